// An Evict+Reload style attack on a square-and-multiply loop, run against
// PiPoMonitor at its default configuration.
//
// Two target lines stand for the entry points of "square" and "multiply".
// Each 5000-cycle attack iteration: the attacker evicts both lines from the
// LLC (cycle 0); the victim processes one key bit (cycle 1500), running
// multiply always and square only for a 1 bit; the attacker reloads both
// lines (cycle 4000) and reads a hit as "the victim used this line". A
// small model of the LLC for the two lines sits in this testbench:
// a miss sends an Access to PiPoMonitor and fills the line; a Ping-Pong
// report tags it; evicting a tagged line that was used since its last fill
// sends pEvict; a Prefetch refills it (unused). Other cores add random memory
// traffic, about 50 Accesses per iteration.
//
// Without protection the attacker's observations equal the key bits. Checked:
// both lines are captured as Ping-Pong lines within the first 5 iterations,
// after which, in each of the remaining 95 iterations, the attacker sees both
// lines as used, whatever the key bit: no information leaks. Prefetches must
// arrive PF_DELAY cycles or more after their pEvict and before the victim runs.
module tb_pipomonitor_attack;
  import tb_ref_pkg::*;
  localparam int ADDR_W = 42, ITER = 100, PERIOD = 5000, PF_DELAY = 200;

  logic clk = 0, rst_n = 0, ready;
  logic acc_valid = 0, acc_drop;
  logic [ADDR_W-1:0] acc_addr = '0;
  logic pp_valid;
  logic [ADDR_W-1:0] pp_addr;
  logic pev_valid = 0, pev_ready;
  logic [ADDR_W-1:0] pev_addr = '0;
  logic pf_valid, pf_ready = 1;
  logic [ADDR_W-1:0] pf_addr;
  logic reloc_valid, del_valid;

  pipomonitor dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (ITER * PERIOD + 10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // LLC state of the two target lines
  logic [ADDR_W-1:0] tgt [2];
  bit in_llc [2], tagged_line [2], used [2];
  int captured_at [2];
  int n_pf = 0;

  function automatic int which(logic [ADDR_W-1:0] a);
    return (a == tgt[0]) ? 0 : (a == tgt[1]) ? 1 : -1;
  endfunction

  initial begin
    logic [ADDR_W-1:0] acc_pend [$];
    logic [ADDR_W-1:0] pev_pend [$];
    int it, ph, w, leaks_before = 0, leaks_after = 0, early = 0;
    bit key, seen0, seen1;
    tgt[0] = ADDR_W'(rand64()); tgt[1] = ADDR_W'(rand64());
    captured_at = '{-1, -1};
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    while (!ready) begin @(posedge clk); #1; end
    for (int c = 0; c < ITER * PERIOD; c++) begin
      it = c / PERIOD; ph = c % PERIOD;
      if (ph == 0) begin
        key = $urandom % 2;
        for (int i = 0; i < 2; i++) begin
          if (in_llc[i] && tagged_line[i] && used[i]) pev_pend.push_back(tgt[i]);
          in_llc[i] = 0;
        end
      end
      if (ph == 1500) begin
        for (int i = 0; i < 2; i++) begin
          if (i == 1 || key) begin
            if (!in_llc[i]) begin acc_pend.push_back(tgt[i]); in_llc[i] = 1; end
            used[i] = 1;
          end
        end
      end
      if (ph == 4000) begin
        seen0 = in_llc[0]; seen1 = in_llc[1];
        for (int i = 0; i < 2; i++) begin
          if (!in_llc[i]) begin acc_pend.push_back(tgt[i]); in_llc[i] = 1; end
          used[i] = 1;
        end
        if (captured_at[0] >= 0 && captured_at[1] >= 0 && it >= 5) begin
          checks++;
          if (!(seen0 && seen1)) begin failures++; leaks_after++; $display("iteration %0d: attacker sees square=%0d multiply=%0d", it, seen0, seen1); end
        end else if (seen0 == key) leaks_before++;
      end
      // background traffic and the target Accesses share the Access port
      if (acc_pend.size() > 0) begin acc_valid = 1; acc_addr = acc_pend.pop_front(); end
      else begin acc_valid = ($urandom % 100) == 0; acc_addr = ADDR_W'(rand64()); end
      pev_valid = pev_pend.size() > 0;
      pev_addr = pev_valid ? pev_pend[0] : '0;
      #1;
      if (acc_valid && acc_drop && which(acc_addr) >= 0) begin
        checks++; failures++; $display("target Access dropped");
      end
      if (pp_valid && which(pp_addr) >= 0) begin
        w = which(pp_addr);
        tagged_line[w] = 1;
        if (captured_at[w] < 0) captured_at[w] = it;
      end
      if (pf_valid && which(pf_addr) >= 0) begin
        w = which(pf_addr);
        n_pf++;
        checks++;
        if (ph < PF_DELAY || ph >= 1500) begin failures++; early++; $display("prefetch at phase %0d", ph); end
        in_llc[w] = 1; used[w] = 0;
      end
      if (pev_valid && pev_ready) void'(pev_pend.pop_front());
      @(posedge clk); #1;
    end
    $display("square captured in iteration %0d, multiply in iteration %0d; prefetches %0d",
             captured_at[0], captured_at[1], n_pf);
    $display("iterations before protection where the probe matched the key bit: %0d; leaks after: %0d",
             leaks_before, leaks_after);
    checks++;
    if (captured_at[0] < 0 || captured_at[0] >= 5 || captured_at[1] < 0 || captured_at[1] >= 5) begin
      failures++; $display("targets not captured within 5 iterations");
    end
    checks++;
    if (n_pf < 2 * (ITER - 6)) begin failures++; $display("too few prefetches"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
