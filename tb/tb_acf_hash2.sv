// Checks the Hash2 Module: alt = idx XOR hash(fp) against the reference for
// random (idx, fp) pairs, and the partial-key cuckoo property that applying
// it twice returns the starting bucket. It also checks h2 of an address
// (Hash2 fed from Hash1 and the fingerprint) against the reference.
module tb_acf_hash2;
  import tb_ref_pkg::*;
  localparam int FP_W = 12, IDX_W = 10, ADDR_W = 42;
  logic [IDX_W-1:0] idx, alt, alt2;
  logic [FP_W-1:0]  fp;
  int checks = 0, failures = 0;

  acf_hash2 dut  (.idx,        .fprint(fp), .alt_idx(alt));
  acf_hash2 dut2 (.idx(alt),   .fprint(fp), .alt_idx(alt2));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int moved = 0;
    logic [ADDR_W-1:0] a;
    for (int n = 0; n < 2000; n++) begin
      if (n < 1000) begin
        idx = IDX_W'($urandom);
        fp  = FP_W'($urandom);
      end else begin
        a   = ADDR_W'(rand64());
        idx = IDX_W'(ref_h1(64'(a), ADDR_W, IDX_W));
        fp  = FP_W'(ref_fp(64'(a), ADDR_W, FP_W));
      end
      #1;
      checks++;
      if (64'(alt) != ref_alt(64'(idx), 64'(fp), FP_W, IDX_W)) begin
        failures++;
        $display("alt(%h,%h) = %h, expected %h", idx, fp, alt, ref_alt(64'(idx), 64'(fp), FP_W, IDX_W));
      end
      checks++;
      if (alt2 != idx) begin
        failures++;
        $display("alt(alt(%h,%h)) = %h, not back to the start", idx, fp, alt2);
      end
      if (alt != idx) moved++;
    end
    checks++;
    if (moved < 1900) begin
      failures++;
      $display("alternative bucket equals the first too often: %0d of 2000 differ", moved);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
