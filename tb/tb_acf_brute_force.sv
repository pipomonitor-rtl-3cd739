// Brute-force eviction of a target record from a full Auto-Cuckoo filter
// (l = 1024, b = 8, f = 12, MNK = 4). The filter is first filled with 12500
// random lines. Then, 24 times over, a target line is inserted and fresh
// random lines are inserted one by one until the filter's autonomic deletion
// reports the target's record (its fingerprint and bucket pair); the number
// of fills needed is recorded. Since every fill of a full filter deletes one
// record that the attacker cannot choose, the expected number is about
// b*l = 8192. Checked: the mean lies between 4096 and 16384, and the
// number of fills varies widely between trials (max over 3x min): the
// attacker cannot tell in advance when the target will go.
module tb_acf_brute_force;
  import tb_ref_pkg::*;
  localparam int ADDR_W = 42, L = 1024, B = 8, FP_W = 12, SEC_W = 2, IDX_W = 10, TRIALS = 24;

  logic clk = 0, rst_n = 0;
  logic q_valid = 0, q_ready, r_valid, r_hit, reloc_valid, del_valid;
  logic [ADDR_W-1:0] q_addr = '0;
  logic [SEC_W-1:0] r_security;
  logic [FP_W-1:0] r_fprint, del_fprint;
  logic [IDX_W-1:0] del_idx;
  acf_filter dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  bit target_gone;
  logic [FP_W-1:0] t_fp;
  logic [IDX_W-1:0] t_i1, t_i2;

  always @(posedge clk)
    if (del_valid && del_fprint == t_fp && (del_idx == t_i1 || del_idx == t_i2)) target_gone <= 1;

  initial begin
    repeat (8000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic insert(logic [ADDR_W-1:0] a);
    @(posedge clk); #1;
    q_valid = 1; q_addr = a;
    while (!q_ready) begin @(posedge clk); #1; end
    @(posedge clk); #1;
    q_valid = 0;
    while (!q_ready) begin @(posedge clk); #1; end
  endtask

  initial begin
    longint total = 0;
    int fills, min_fills = 1 << 30, max_fills = 0;
    logic [ADDR_W-1:0] t;
    t_fp = '1; t_i1 = '0; t_i2 = '0; target_gone = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 12500; n++) insert(ADDR_W'(rand64()));
    for (int k = 0; k < TRIALS; k++) begin
      t = ADDR_W'(rand64());
      insert(t);
      t_fp = FP_W'(ref_fp(64'(t), ADDR_W, FP_W));
      t_i1 = IDX_W'(ref_h1(64'(t), ADDR_W, IDX_W));
      t_i2 = IDX_W'(ref_alt(64'(t_i1), 64'(t_fp), FP_W, IDX_W));
      target_gone = 0;
      fills = 0;
      while (!target_gone && fills < 200000) begin
        insert(ADDR_W'(rand64()));
        fills++;
      end
      total += fills;
      if (fills < min_fills) min_fills = fills;
      if (fills > max_fills) max_fills = fills;
    end
    $display("fills to evict the target: mean %0d, min %0d, max %0d over %0d trials (b*l = %0d)",
             total / TRIALS, min_fills, max_fills, TRIALS, B * L);
    checks++;
    if (total / TRIALS < 4096 || total / TRIALS > 16384) begin failures++; $display("mean out of range"); end
    checks++;
    if (max_fills <= 3 * min_fills) begin failures++; $display("fills hardly vary: %0d to %0d", min_fills, max_fills); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
