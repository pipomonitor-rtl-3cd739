// Checks the Hash1 Module against the reference H3 hash for 2000
// random 42-bit line addresses plus a few corner values, and checks that the
// indices spread over all log2(l) bits (no stuck bit).
module tb_acf_hash1;
  import tb_ref_pkg::*;
  localparam int ADDR_W = 42, FP_W = 10;
  logic [ADDR_W-1:0] addr;
  logic [FP_W-1:0]   fprint;
  int checks = 0, failures = 0;

  acf_hash1 dut (.addr, .idx(fprint));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [FP_W-1:0] seen_or, seen_and;
    seen_or = '0; seen_and = '1;
    for (int n = 0; n < 2000; n++) begin
      case (n)
        0: addr = '0;
        1: addr = '1;
        2: addr = ADDR_W'(1);
        default: addr = ADDR_W'(rand64());
      endcase
      #1;
      checks++;
      if (64'(fprint) != ref_h1(64'(addr), ADDR_W, FP_W)) begin
        failures++;
        $display("h1(%h) = %h, expected %h", addr, fprint, ref_h1(64'(addr), ADDR_W, FP_W));
      end
      if (n >= 3) begin seen_or |= fprint; seen_and &= fprint; end
    end
    checks++;
    if (seen_or != '1 || seen_and != '0) begin
      failures++;
      $display("index bits stuck: or=%h and=%h", seen_or, seen_and);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
