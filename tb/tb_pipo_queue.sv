// Checks the PiPoMonitor Queue at its default sizes (8-entry Access and pEvict
// queues, 200-cycle prefetch delay) cycle by cycle against a software model.
// The Auto-Cuckoo filter is replaced by a simple responder: it takes a Query
// when idle, answers 2 to 4 cycles later with a Security value derived from
// the address, and is idle again the cycle after. Random Access, pEvict and
// Prefetch-ready traffic is applied for 30000 cycles. Checked every cycle:
// the Query shown (address, in Access order, one outstanding), acc_drop on a
// full Access queue, pp_valid and its address one cycle after a Response of
// secThr, pev_ready, and that each Prefetch appears exactly PF_DELAY cycles
// after its pEvict or, if the memory fetch queue was busy, as soon as it can.
module tb_pipo_queue;
  import tb_ref_pkg::*;
  localparam int ADDR_W = 42, SEC_W = 2, SEC_THR = 3, DEPTH = 8, PF_DELAY = 200;

  logic clk = 0, rst_n = 0;
  logic acc_valid = 0, acc_drop;
  logic [ADDR_W-1:0] acc_addr = '0;
  logic q_valid, q_ready = 0;
  logic [ADDR_W-1:0] q_addr;
  logic r_valid = 0;
  logic [SEC_W-1:0] r_security = '0;
  logic pp_valid;
  logic [ADDR_W-1:0] pp_addr;
  logic pev_valid = 0, pev_ready;
  logic [ADDR_W-1:0] pev_addr = '0;
  logic pf_valid, pf_ready = 0;
  logic [ADDR_W-1:0] pf_addr;

  pipo_queue dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_drop = 0, n_pp = 0, n_pf = 0, n_pev_stall = 0, n_pf_stall = 0, n_query = 0;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
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

  function automatic logic [SEC_W-1:0] sec_of(logic [ADDR_W-1:0] a);
    return SEC_W'(a[7:6] ^ a[1:0]);
  endfunction

  initial begin
    logic [ADDR_W-1:0] acc_q [$];
    logic [ADDR_W-1:0] pev_q [$];
    int pev_t [$];
    bit inflight = 0, exp_pp = 0, busy = 0;
    logic [ADDR_W-1:0] inflight_addr = '0, exp_pp_addr = '0, fake_addr = '0;
    int countdown = 0;
    int c;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (c = 0; c < 30000; c++) begin
      // inputs for this cycle
      acc_valid = ($urandom % 100) < ((c / 3000) % 2 ? 60 : 20);
      acc_addr  = ADDR_W'(rand64());
      pev_valid = ($urandom % 100) < ((c / 5000) % 2 ? 15 : 2);
      pev_addr  = ADDR_W'(rand64());
      pf_ready  = ($urandom % 100) < 70;
      r_valid   = busy && countdown == 0;
      r_security = r_valid ? sec_of(fake_addr) : SEC_W'($urandom);
      q_ready   = !busy;
      #1;
      // outputs against the model
      check(q_valid == (acc_q.size() > 0 && !inflight), "q_valid");
      if (q_valid && acc_q.size() > 0) check(q_addr == acc_q[0], "q_addr not the oldest Access");
      check(acc_drop == (acc_valid && acc_q.size() == DEPTH), "acc_drop");
      check(pp_valid == exp_pp, "pp_valid");
      if (exp_pp) check(pp_addr == exp_pp_addr, "pp_addr");
      check(pev_ready == (pev_q.size() < DEPTH), "pev_ready");
      check(pf_valid == (pev_q.size() > 0 && c - pev_t[0] >= PF_DELAY), $sformatf("pf_valid at cycle %0d", c));
      if (pf_valid && pev_q.size() > 0) check(pf_addr == pev_q[0], "pf_addr");
      // model update at the clock edge
      if (acc_drop) n_drop++;
      if (pp_valid) n_pp++;
      if (pev_valid && !pev_ready) n_pev_stall++;
      if (pf_valid && !pf_ready) n_pf_stall++;
      exp_pp = r_valid && sec_of(fake_addr) == SEC_THR;
      exp_pp_addr = inflight_addr;
      if (r_valid) begin inflight = 0; busy = 0; end
      else if (busy) countdown--;
      if (q_valid && q_ready) begin
        n_query++;
        inflight = 1; inflight_addr = q_addr; void'(acc_q.pop_front());
        busy = 1; countdown = 1 + $urandom % 3; fake_addr = q_addr;
      end
      if (acc_valid && acc_q.size() < DEPTH && !acc_drop) acc_q.push_back(acc_addr);
      if (pf_valid && pf_ready) begin n_pf++; void'(pev_q.pop_front()); void'(pev_t.pop_front()); end
      if (pev_valid && pev_ready) begin pev_q.push_back(pev_addr); pev_t.push_back(c); end
      @(posedge clk); #1;
    end
    $display("queries %0d, drops %0d, ping-pong tags %0d, prefetches %0d, pEvict stalls %0d, prefetch stalls %0d",
             n_query, n_drop, n_pp, n_pf, n_pev_stall, n_pf_stall);
    check(n_drop > 0 && n_pp > 0 && n_pf > 0 && n_pev_stall > 0 && n_pf_stall > 0, "a mechanism never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
