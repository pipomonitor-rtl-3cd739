// Occupancy of the Auto-Cuckoo filter as random lines are inserted, for
// MNK = 2, 4 and 8 (l = 1024, b = 8, f = 12). Three filters receive the
// same stream of 12500 random line addresses; occupancy is the number of
// records held (insertions minus autonomic deletions) over l*b = 8192 and
// is printed at 8.9K, 10.1K, 11.3K and 12.5K insertions.
// Checked: the filter is at least 99.5 % full after 12.5K insertions for
// every MNK (it never rejects an insertion and keeps finding vacancies), and
// at 8.9K insertions no filter is below 89 %.
module tb_acf_occupancy;
  import tb_ref_pkg::*;
  localparam int ADDR_W = 42, L = 1024, B = 8, FP_W = 12, SEC_W = 2, N = 3, INS = 12500;
  localparam int MNKS [N] = '{2, 4, 8};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [ADDR_W-1:0] stream [INS];
  int held [N][4];
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
    logic [FP_W-1:0] r_fprint, del_fprint;
    logic [$clog2(L)-1:0] del_idx;
    acf_filter #(.MNK(MNKS[g])) dut (.*);
    int records = 0;
    always @(posedge clk) begin
      if (r_valid && !r_hit) records <= records + 1 - int'(del_valid);
      else if (del_valid) records <= records - 1;
    end
    initial begin
      int k = 0;
      wait (rst_n);
      for (int n = 0; n < INS; n++) begin
        @(posedge clk); #1;
        q_valid = 1; q_addr = stream[n];
        while (!q_ready) begin @(posedge clk); #1; end
        @(posedge clk); #1;
        q_valid = 0;
        while (!q_ready) begin @(posedge clk); #1; end
        if (n + 1 == 8900 || n + 1 == 10100 || n + 1 == 11300 || n + 1 == 12500) begin
          held[g][k] = records; k++;
        end
      end
      done[g] = 1;
    end
  end

  initial begin
    foreach (stream[i]) stream[i] = ADDR_W'(rand64());
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done[0] && done[1] && done[2]);
    for (int g = 0; g < N; g++) begin
      $display("MNK=%0d occupancy at 8.9K %0d.%0d%%  10.1K %0d.%0d%%  11.3K %0d.%0d%%  12.5K %0d.%0d%%", MNKS[g],
               held[g][0] * 100 / 8192, (held[g][0] * 1000 / 8192) % 10, held[g][1] * 100 / 8192, (held[g][1] * 1000 / 8192) % 10,
               held[g][2] * 100 / 8192, (held[g][2] * 1000 / 8192) % 10, held[g][3] * 100 / 8192, (held[g][3] * 1000 / 8192) % 10);
      checks++;
      if (held[g][3] * 1000 < 995 * L * B) begin failures++; $display("MNK=%0d below 99.5 %% at 12.5K", MNKS[g]); end
      checks++;
      if (held[g][0] * 100 < 89 * L * B) begin failures++; $display("MNK=%0d below 89 %% at 8.9K", MNKS[g]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
