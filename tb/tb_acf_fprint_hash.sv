// Checks the fPrint Hash Module against the reference H3 hash for 2000
// random 42-bit line addresses plus a few corner values, and checks that the
// fingerprints spread over all 2^f values (no stuck bit).
module tb_acf_fprint_hash;
  import tb_ref_pkg::*;
  localparam int ADDR_W = 42, FP_W = 12;
  logic [ADDR_W-1:0] addr;
  logic [FP_W-1:0]   fprint;
  int checks = 0, failures = 0;

  acf_fprint_hash dut (.addr, .fprint);

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
      if (64'(fprint) != ref_fp(64'(addr), ADDR_W, FP_W)) begin
        failures++;
        $display("fprint(%h) = %h, expected %h", addr, fprint, ref_fp(64'(addr), ADDR_W, FP_W));
      end
      if (n >= 3) begin seen_or |= fprint; seen_and &= fprint; end
    end
    checks++;
    if (seen_or != '1 || seen_and != '0) begin
      failures++;
      $display("fingerprint bits stuck: or=%h and=%h", seen_or, seen_and);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
