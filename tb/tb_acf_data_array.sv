// Checks the Data Array at its full size (1024 sets x 8 entries of
// 2-bit Security counters) against a software copy: every set is first written
// in full, then 20000 cycles of random masked writes and random two-port
// reads follow. Each read must show, one cycle later, the contents of both
// sets before any write of the same cycle (read-before-write), and the
// output must hold while rd_en is low.
module tb_acf_data_array;
  localparam int L = 1024, B = 8, E_W = 2, IDX_W = 10;
  logic clk = 0, rd_en = 0, wr_en = 0;
  logic [IDX_W-1:0] rd_idx0 = '0, rd_idx1 = '0, wr_idx = '0;
  logic [B-1:0][E_W-1:0] rd_set0, rd_set1, wr_set = '0;
  logic [B-1:0] wr_mask = '0;
  logic [B-1:0][E_W-1:0] model [L];
  logic [B-1:0][E_W-1:0] exp0, exp1;
  int checks = 0, failures = 0;
  bit pending = 0;

  acf_data_array dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_out();
    checks++;
    if (rd_set0 !== exp0 || rd_set1 !== exp1) begin
      failures++;
      if (failures < 10) $display("%0t read mismatch: got %h/%h expected %h/%h", $time, rd_set0, rd_set1, exp0, exp1);
    end
  endtask

  initial begin
    // fill
    for (int s = 0; s < L; s++) begin
      for (int w = 0; w < B; w++) wr_set[w] = E_W'($urandom);
      wr_en = 1; wr_idx = IDX_W'(s); wr_mask = '1;
      model[s] = wr_set;
      @(posedge clk); #1;
    end
    wr_en = 0;
    for (int n = 0; n < 20000; n++) begin
      rd_en   = ($urandom % 4) != 0;
      rd_idx0 = IDX_W'($urandom);
      rd_idx1 = ($urandom % 8 == 0) ? rd_idx0 : IDX_W'($urandom);
      wr_en   = ($urandom % 2) != 0;
      wr_idx  = ($urandom % 4 == 0) ? rd_idx0 : IDX_W'($urandom);
      wr_mask = B'($urandom);
      for (int w = 0; w < B; w++) wr_set[w] = E_W'($urandom);
      if (rd_en) begin exp0 = model[rd_idx0]; exp1 = model[rd_idx1]; pending = 1; end
      if (wr_en) for (int w = 0; w < B; w++) if (wr_mask[w]) model[wr_idx][w] = wr_set[w];
      @(posedge clk); #1;
      if (pending) check_out();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
