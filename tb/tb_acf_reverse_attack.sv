// Eviction-set attack on the Auto-Cuckoo filter, with and without relocation
// (l = 1024, b = 8, f = 12; MNK = 0 and MNK = 4).
//
// In each trial a target line T is inserted into a full filter. The attacker
// then inserts fresh lines whose first candidate bucket is one of T's two
// buckets, alternating between them, until the filter's autonomic deletion
// reports T's record, or 1000 fills have been made. Such lines are found with
// the reference hash. H3 is linear over GF(2), so XOR-ing a found line with
// any combination of lines that hash to bucket 0 keeps its bucket and varies
// its fingerprint.
// With MNK = 0 the record displaced from T's bucket is dropped at once, so T
// goes after a few dozen fills (each fill hits T with probability 1/16).
// With MNK = 4 a displaced T is only moved to its other bucket, and a record
// is dropped only at the end of a four-step relocation walk. The eviction-set
// lines that get relocated out of T's buckets still have those buckets as
// their alternative. Walks therefore keep returning to T's buckets, and T is
// still evicted, only after many more fills.
// Checked: with MNK = 0 every trial evicts T, with a mean under 100 fills;
// with MNK = 4 the mean number of fills (trials capped at 1000 fills count as
// 1000) is at least 3 times that of MNK = 0.
module tb_acf_reverse_attack;
  import tb_ref_pkg::*;
  localparam int ADDR_W = 42, L = 1024, B = 8, FP_W = 12, SEC_W = 2, IDX_W = 10;
  localparam int N = 2, TRIALS = 8, CAP = 1000, KER = 48;
  localparam int MNKS [N] = '{0, 4};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int evicted [N], total_fills [N];
  bit done [N];
  logic [ADDR_W-1:0] kernel [KER];

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // A fresh line whose first candidate bucket is bkt.
  function automatic logic [ADDR_W-1:0] line_in_bucket(logic [IDX_W-1:0] bkt, logic [ADDR_W-1:0] base);
    logic [ADDR_W-1:0] a;
    logic [63:0] pick;
    a = base;
    pick = rand64();
    for (int k = 0; k < KER; k++) if (pick[k]) a ^= kernel[k];
    return a;
  endfunction

  for (genvar g = 0; g < N; g++) begin : gi
    logic q_valid = 0, q_ready, r_valid, r_hit, reloc_valid, del_valid;
    logic [ADDR_W-1:0] q_addr = '0;
    logic [SEC_W-1:0] r_security;
    logic [FP_W-1:0] r_fprint, del_fprint;
    logic [IDX_W-1:0] del_idx;
    acf_filter #(.MNK(MNKS[g])) dut (.*);
    bit gone;
    logic [FP_W-1:0] t_fp = '0;
    logic [IDX_W-1:0] t_b [2];
    bit armed = 0;
    always @(posedge clk)
      if (armed && del_valid && del_fprint == t_fp && (del_idx == t_b[0] || del_idx == t_b[1])) gone <= 1;

    task automatic insert(logic [ADDR_W-1:0] a);
      @(posedge clk); #1;
      q_valid = 1; q_addr = a;
      while (!q_ready) begin @(posedge clk); #1; end
      @(posedge clk); #1;
      q_valid = 0;
      while (!q_ready) begin @(posedge clk); #1; end
    endtask

    initial begin
      logic [ADDR_W-1:0] t, base [2];
      int fills;
      evicted[g] = 0; total_fills[g] = 0;
      wait (rst_n);
      for (int n = 0; n < 12500; n++) insert(ADDR_W'(rand64()));
      for (int k = 0; k < TRIALS; k++) begin
        t = ADDR_W'(rand64());
        insert(t);
        t_fp   = FP_W'(ref_fp(64'(t), ADDR_W, FP_W));
        t_b[0] = IDX_W'(ref_h1(64'(t), ADDR_W, IDX_W));
        t_b[1] = IDX_W'(ref_alt(64'(t_b[0]), 64'(t_fp), FP_W, IDX_W));
        for (int i = 0; i < 2; i++)
          do base[i] = ADDR_W'(rand64()); while (IDX_W'(ref_h1(64'(base[i]), ADDR_W, IDX_W)) != t_b[i]);
        gone = 0; armed = 1;
        fills = 0;
        while (!gone && fills < CAP) begin
          insert(line_in_bucket(t_b[fills % 2], base[fills % 2]));
          fills++;
        end
        armed = 0;
        if (gone) evicted[g]++;
        total_fills[g] += fills;
      end
      done[g] = 1;
    end
  end

  initial begin
    // lines hashing to bucket 0
    for (int k = 0; k < KER; k++)
      do kernel[k] = ADDR_W'(rand64()); while (ref_h1(64'(kernel[k]), ADDR_W, IDX_W) != 0);
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done[0] && done[1]);
    for (int g = 0; g < N; g++)
      $display("MNK=%0d: target evicted in %0d of %0d trials, mean fills %0d",
               MNKS[g], evicted[g], TRIALS, total_fills[g] / TRIALS);
    checks++;
    if (evicted[0] != TRIALS || total_fills[0] / TRIALS >= 100) begin failures++; $display("MNK=0 eviction set did not work as expected"); end
    checks++;
    if (total_fills[1] < 3 * total_fills[0]) begin failures++; $display("relocation does not slow the eviction set down"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
