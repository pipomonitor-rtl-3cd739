// Checks the Auto-Cuckoo filter at its full size (l = 1024, b = 8, f = 12,
// secThr = 3, MNK = 4) against a software model of the records it must hold.
//
// The model keeps one Security value per record, keyed by the fingerprint and
// the unordered pair of candidate buckets, computed with the reference hashes.
// Two addresses with the same key are the same record to the filter (a
// fingerprint collision), and so to the model. Every Response must match the
// model: a hit with the incremented, saturating Security, or a miss with 0 and
// the record added. Each autonomic deletion the filter reports must remove a
// record the model holds, and may only come after MNK relocations. At the end
// the arrays are read through hierarchy and must hold exactly the model's
// records with the model's Security values.
//
// Timing checks: q_ready rises L cycles after reset (array clearing); the
// Response comes 2 cycles after the Query is accepted; the filter is ready
// again one cycle after the Response plus 2 cycles per relocation.
// The workload: 300 lines each accessed 5 times (Security 0,1,2,3,3), then
// 24000 queries of which 80 % are new random lines and 20 % re-access one of
// the last 64 lines, which fills the filter and drives relocations and
// deletions. Occupancy is printed at 9K and 12.5K insertions.
module tb_acf_filter;
  import tb_ref_pkg::*;
  localparam int ADDR_W = 42, L = 1024, B = 8, FP_W = 12, SEC_W = 2, SEC_THR = 3, MNK = 4;
  localparam int IDX_W = $clog2(L);
  typedef logic [FP_W+2*IDX_W-1:0] key_t;

  logic clk = 0, rst_n = 0;
  logic q_valid = 0, q_ready;
  logic [ADDR_W-1:0] q_addr = '0;
  logic r_valid, r_hit;
  logic [SEC_W-1:0] r_security;
  logic [FP_W-1:0]  r_fprint, del_fprint;
  logic [IDX_W-1:0] del_idx;
  logic reloc_valid, del_valid;

  acf_filter dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_hit = 0, n_ins = 0, n_reloc = 0, n_del = 0, n_sat = 0, n_kick_ins = 0;
  int unsigned model [key_t];
  longint unsigned cyc = 0;
  int unsigned last_sec;

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step();
    @(posedge clk); #1; cyc++;
  endtask

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("%0t FAIL: %s", $time, msg);
    end
  endtask

  function automatic key_t key_of(longint unsigned fp, longint unsigned idx);
    longint unsigned alt = ref_alt(idx, fp, FP_W, IDX_W);
    longint unsigned lo = (idx < alt) ? idx : alt;
    longint unsigned hi = (idx < alt) ? alt : idx;
    return {FP_W'(fp), IDX_W'(lo), IDX_W'(hi)};
  endfunction

  task automatic take_deletion();
    key_t k = key_of(64'(del_fprint), 64'(del_idx));
    n_del++;
    check(model.exists(k), $sformatf("deleted record fp=%h idx=%h is not held", del_fprint, del_idx));
    if (model.exists(k)) model.delete(k);
  endtask

  task automatic query(logic [ADDR_W-1:0] a);
    longint unsigned fp = ref_fp(64'(a), ADDR_W, FP_W);
    longint unsigned i1 = ref_h1(64'(a), ADDR_W, IDX_W);
    key_t k = key_of(fp, i1);
    bit exp_hit = model.exists(k);
    int unsigned exp_sec = exp_hit ? ((model[k] >= SEC_THR) ? SEC_THR : model[k] + 1) : 0;
    int n, relocs, busy;
    bit deleted;
    q_valid = 1; q_addr = a;
    while (!q_ready) step();
    step();
    q_valid = 0; q_addr = ADDR_W'(rand64());
    n = 1;
    while (!r_valid && n < 20) begin step(); n++; end
    check(n == 2, $sformatf("response latency %0d cycles, expected 2", n));
    check(r_hit == exp_hit, $sformatf("addr %h hit=%0d expected %0d", a, r_hit, exp_hit));
    check(32'(r_security) == exp_sec, $sformatf("addr %h security=%0d expected %0d", a, r_security, exp_sec));
    check(64'(r_fprint) == fp, $sformatf("addr %h fingerprint %h expected %h", a, r_fprint, fp));
    model[k] = exp_sec;
    last_sec = 32'(r_security);
    if (exp_hit) n_hit++; else n_ins++;
    if (exp_hit && exp_sec == SEC_THR) n_sat++;
    relocs = 0; busy = 0; deleted = 0;
    if (del_valid) begin take_deletion(); deleted = 1; end
    step();
    while (!q_ready && busy < 100) begin
      if (reloc_valid) relocs++;
      if (del_valid) begin
        check(relocs == MNK, $sformatf("deletion after %0d relocations, MNK is %0d", relocs, MNK));
        take_deletion(); deleted = 1;
      end
      step(); busy++;
    end
    check(busy == 2 * relocs, $sformatf("busy %0d cycles for %0d relocations", busy, relocs));
    check(relocs <= MNK, $sformatf("%0d relocations exceed MNK", relocs));
    if (relocs > 0 || deleted) n_kick_ins++;
    n_reloc += relocs;
  endtask

  task automatic check_arrays();
    int unsigned seen [key_t];
    int valid_cnt = 0;
    for (int s = 0; s < L; s++) begin
      for (int w = 0; w < B; w++) begin
        logic [FP_W:0] e = dut.u_fpa.mem[s][w];
        if (e[FP_W]) begin
          key_t k = key_of(64'(e[FP_W-1:0]), 64'(s));
          valid_cnt++;
          checks++;
          if (!model.exists(k) || seen.exists(k) || model[k] != 32'(dut.u_da.mem[s][w])) begin
            failures++;
            if (failures < 20) $display("array entry set %0d way %0d (fp %h) disagrees with the model", s, w, e[FP_W-1:0]);
          end
          seen[k] = 1;
        end
      end
    end
    check(valid_cnt == model.num(), $sformatf("%0d valid entries, model holds %0d", valid_cnt, model.num()));
  endtask

  initial begin
    logic [ADDR_W-1:0] hot [300];
    int cnt [300];
    logic [ADDR_W-1:0] recent [64];
    int init_cycles = 0;
    repeat (3) step();
    rst_n = 1;
    while (!q_ready && init_cycles < 5000) begin step(); init_cycles++; end
    check(init_cycles == L, $sformatf("ready %0d cycles after reset, expected %0d", init_cycles, L));

    // Security counting and saturation
    foreach (hot[i]) begin hot[i] = ADDR_W'(rand64()); cnt[i] = 0; end
    for (int n = 0; n < 1500; n++) begin
      int i;
      do i = $urandom % 300; while (cnt[i] == 5);
      query(hot[i]);
      checks++;
      if (last_sec != ((cnt[i] >= SEC_THR) ? SEC_THR : cnt[i])) begin
        failures++;
        $display("line %0d access %0d gave Security %0d", i, cnt[i] + 1, last_sec);
      end
      cnt[i]++;
    end

    // Fill: new lines with re-accesses mixed in
    foreach (recent[i]) recent[i] = hot[i];
    for (int n = 0; n < 24000; n++) begin
      if ($urandom % 5 == 0) query(recent[$urandom % 64]);
      else begin
        logic [ADDR_W-1:0] a;
        a = ADDR_W'(rand64());
        recent[$urandom % 64] = a;
        query(a);
      end
      if (n_ins == 9000 || n_ins == 12500)
        $display("insertions %0d: occupancy %0d of %0d (%0d%%)", n_ins, model.num(), L * B, model.num() * 100 / (L * B));
    end
    check_arrays();
    $display("hits %0d, insertions %0d, saturated %0d, insertions with kicks %0d, relocations %0d, deletions %0d, final occupancy %0d",
             n_hit, n_ins, n_sat, n_kick_ins, n_reloc, n_del, model.num());
    check(n_reloc > 0, "no relocation happened");
    check(n_del > 0, "no autonomic deletion happened");
    check(n_sat > 0, "no Security saturation happened");
    check(model.num() > L * B * 95 / 100, "occupancy below 95 % after filling");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
