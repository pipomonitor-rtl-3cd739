// False-positive rate of a full Auto-Cuckoo filter (l = 1024, b = 8,
// MNK = 4) for fingerprint lengths f = 12 (the default) and f = 8.
// Each filter is filled with 12500 random lines, then receives 40000 Queries
// for fresh random lines that it has never seen. A hit on such a line can
// only be a fingerprint collision, so the hit fraction is the false-positive
// rate. The bound for 2b comparisons is 1 - (1 - 2^-f)^(2b), about 2b/2^f:
// 0.0039 for f = 12 and 0.061 for f = 8. Checked: each measured rate lies
// between half and 1.5 times its bound.
module tb_acf_false_positive;
  import tb_ref_pkg::*;
  localparam int ADDR_W = 42, L = 1024, B = 8, SEC_W = 2, N = 2, FILL = 12500, PROBE = 40000;
  localparam int FPW [N] = '{12, 8};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int hits [N];
  bit done [N];

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar g = 0; g < N; g++) begin : gi
    logic q_valid = 0, q_ready, r_valid, r_hit, reloc_valid, del_valid;
    logic [ADDR_W-1:0] q_addr = '0;
    logic [SEC_W-1:0] r_security;
    logic [FPW[g]-1:0] r_fprint, del_fprint;
    logic [$clog2(L)-1:0] del_idx;
    acf_filter #(.FP_W(FPW[g])) dut (.*);
    initial begin
      hits[g] = 0;
      wait (rst_n);
      for (int n = 0; n < FILL + PROBE; n++) begin
        @(posedge clk); #1;
        q_valid = 1; q_addr = ADDR_W'(rand64());
        while (!q_ready) begin @(posedge clk); #1; end
        @(posedge clk); #1;
        q_valid = 0;
        while (!r_valid) begin @(posedge clk); #1; end
        if (n >= FILL && r_hit) hits[g]++;
        while (!q_ready) begin @(posedge clk); #1; end
      end
      done[g] = 1;
    end
  end

  initial begin
    real bound, rate;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done[0] && done[1]);
    for (int g = 0; g < N; g++) begin
      bound = 1.0 - (1.0 - 1.0 / (2.0 ** FPW[g])) ** (2 * B);
      rate = real'(hits[g]) / PROBE;
      $display("f=%0d: %0d false hits in %0d fresh queries, rate %f, bound %f", FPW[g], hits[g], PROBE, rate, bound);
      checks++;
      if (rate < 0.5 * bound || rate > 1.5 * bound) begin failures++; $display("rate out of range"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
