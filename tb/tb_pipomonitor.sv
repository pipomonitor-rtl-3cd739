// End-to-end test of PiPoMonitor at its default configuration (1024 x 8
// Auto-Cuckoo filter, f = 12, secThr = 3, MNK = 4, 200-cycle prefetch delay).
//
// The memory controller side sends an Access stream: 10 % of the accesses go
// to 32 "target" lines that keep returning, as lines under a Prime+Probe
// attack do, and 90 % to fresh random lines, enough to fill the filter and
// keep it relocating and deleting. Every 10000 cycles a 300-cycle burst sends
// an Access almost every cycle to overflow the Access queue. A small model
// of the LLC tags each line reported as Ping-Pong and, from time to time,
// evicts a tagged line by sending pEvict (in bursts too, to fill the pEvict
// queue); the memory fetch queue accepts Prefetches 80 % of the time.
//
// Checks: ready comes L cycles after reset; every Ping-Pong report is the one
// a software model of the filter predicts (the model follows the accepted
// Accesses in order and the deletions the filter makes, seen through
// hierarchy); every Prefetch is for the oldest outstanding pEvict and comes
// no earlier than PF_DELAY cycles after it. Each mechanism (capture, Security
// saturation, Access drop, relocation, autonomic deletion, pEvict
// back-pressure, Prefetch stall, Prefetch) must happen at least once.
module tb_pipomonitor;
  import tb_ref_pkg::*;
  localparam int ADDR_W = 42, L = 1024, B = 8, FP_W = 12, SEC_THR = 3, MNK = 4, PF_DELAY = 200;
  localparam int IDX_W = $clog2(L);
  localparam int CYCLES = 120000;
  typedef logic [FP_W+2*IDX_W-1:0] key_t;

  logic clk = 0, rst_n = 0, ready;
  logic acc_valid = 0, acc_drop;
  logic [ADDR_W-1:0] acc_addr = '0;
  logic pp_valid;
  logic [ADDR_W-1:0] pp_addr;
  logic pev_valid = 0, pev_ready;
  logic [ADDR_W-1:0] pev_addr = '0;
  logic pf_valid, pf_ready = 0;
  logic [ADDR_W-1:0] pf_addr;
  logic reloc_valid, del_valid;

  pipomonitor dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_pp = 0, n_sat = 0, n_drop = 0, n_reloc = 0, n_del = 0, n_pev_stall = 0;
  int n_pf_stall = 0, n_pf = 0, n_acc = 0, n_pp_target = 0;
  int unsigned model [key_t];

  initial begin
    repeat (CYCLES + 20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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

  function automatic key_t key_of_addr(logic [ADDR_W-1:0] a);
    return key_of(ref_fp(64'(a), ADDR_W, FP_W), ref_h1(64'(a), ADDR_W, IDX_W));
  endfunction

  initial begin
    logic [ADDR_W-1:0] targets [32];
    bit is_target [logic [ADDR_W-1:0]];
    logic [ADDR_W-1:0] acc_order [$];
    logic [ADDR_W-1:0] tagged_lines [$];
    logic [ADDR_W-1:0] pev_q [$];
    int pev_t [$];
    bit exp_pp = 0;
    logic [ADDR_W-1:0] exp_pp_addr = '0;
    int init_cycles = 0;
    bit burst;
    bit pev_taken = 0;

    foreach (targets[i]) begin targets[i] = ADDR_W'(rand64()); is_target[targets[i]] = 1; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    while (!ready && init_cycles < 5000) begin @(posedge clk); #1; init_cycles++; end
    check(init_cycles == L, $sformatf("ready after %0d cycles, expected %0d", init_cycles, L));

    for (int c = 0; c < CYCLES; c++) begin
      burst = (c % 10000) < 300;
      // Access from the memory controller
      acc_valid = ($urandom % 100) < (burst ? 95 : 8);
      if ($urandom % 10 == 0) acc_addr = targets[$urandom % 32];
      else acc_addr = ADDR_W'(rand64());
      // pEvict from the LLC: keep the current one until it is taken
      if (!pev_valid && tagged_lines.size() > 0 && ($urandom % 100) < (burst ? 60 : 1)) begin
        int i;
        i = $urandom % tagged_lines.size();
        pev_valid = 1;
        pev_addr = tagged_lines[i];
        tagged_lines.delete(i);
      end
      pf_ready = ($urandom % 100) < 80;
      #1;
      // Ping-Pong reports
      check(pp_valid == exp_pp, $sformatf("pp_valid %0d, model expects %0d", pp_valid, exp_pp));
      if (pp_valid && exp_pp) check(pp_addr == exp_pp_addr, "pp_addr differs from the model");
      // Prefetches
      if (pf_valid) begin
        check(pev_q.size() > 0, "Prefetch without pEvict");
        if (pev_q.size() > 0) begin
          check(pf_addr == pev_q[0], "Prefetch address is not the oldest pEvict");
          check(c - pev_t[0] >= PF_DELAY, $sformatf("Prefetch %0d cycles after pEvict", c - pev_t[0]));
        end
      end
      // Events at this clock edge
      if (acc_valid && !acc_drop) begin acc_order.push_back(acc_addr); n_acc++; end
      if (acc_drop) n_drop++;
      exp_pp = 0;
      if (dut.u_filter.r_valid) begin
        logic [ADDR_W-1:0] a;
        key_t k;
        int unsigned s;
        a = acc_order.pop_front();
        k = key_of_addr(a);
        s = model.exists(k) ? ((model[k] >= SEC_THR) ? SEC_THR : model[k] + 1) : 0;
        if (model.exists(k) && model[k] == SEC_THR) n_sat++;
        model[k] = s;
        exp_pp = (s == SEC_THR);
        exp_pp_addr = a;
      end
      if (del_valid) begin
        key_t k;
        k = key_of(64'(dut.u_filter.del_fprint), 64'(dut.u_filter.del_idx));
        check(model.exists(k), "the filter deleted a record it does not hold");
        model.delete(k);
        n_del++;
      end
      if (reloc_valid) n_reloc++;
      if (pp_valid) begin
        n_pp++;
        if (is_target.exists(pp_addr)) n_pp_target++;
        tagged_lines.push_back(pp_addr);
      end
      if (pev_valid && !pev_ready) n_pev_stall++;
      if (pev_valid && pev_ready) begin pev_q.push_back(pev_addr); pev_t.push_back(c); pev_taken = 1; end
      if (pf_valid && !pf_ready) n_pf_stall++;
      if (pf_valid && pf_ready) begin n_pf++; void'(pev_q.pop_front()); void'(pev_t.pop_front()); end
      @(posedge clk); #1;
      if (pev_taken) begin pev_valid = 0; pev_taken = 0; end
    end
    $display("accesses %0d (dropped %0d), ping-pong reports %0d (%0d of target lines), saturated re-accesses %0d",
             n_acc, n_drop, n_pp, n_pp_target, n_sat);
    $display("relocations %0d, autonomic deletions %0d, prefetches %0d, pEvict stalls %0d, prefetch stalls %0d, filter records %0d",
             n_reloc, n_del, n_pf, n_pev_stall, n_pf_stall, model.num());
    check(n_pp_target > 0, "no target line was captured as Ping-Pong");
    check(n_sat > 0, "no Security saturation");
    check(n_drop > 0, "no Access dropped on a full queue");
    check(n_reloc > 0, "no relocation");
    check(n_del > 0, "no autonomic deletion");
    check(n_pf > 0, "no Prefetch");
    check(n_pev_stall > 0, "no pEvict back-pressure");
    check(n_pf_stall > 0, "no Prefetch stall");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
