// PiPoMonitor: a detector of cross-core cache attacks that sits in the memory
// controller and watches the traffic between the last-level cache (LLC) and
// main memory.
//
// An attacker probing a victim's cache line keeps evicting it from the LLC
// and fetching it back, so the line bounces between LLC and memory (the
// Ping-Pong pattern). Every memory access (Access) is looked up in the
// Auto-Cuckoo filter, which counts re-accesses per line in a 2-bit Security
// counter. When the count reaches secThr the line is a Ping-Pong line and
// pp_valid asks the LLC to tag it as it is filled. When the LLC later evicts
// a tagged line that has been used, it sends pEvict; after PF_DELAY cycles
// the monitor issues a Prefetch of the line to the memory fetch queue, so the
// line is back in the LLC whatever the victim did and the attacker's probe
// learns nothing.
//
// The monitor runs beside the memory fetch path: it never stalls an Access
// (a full Access queue drops the record, acc_drop), so it adds no latency.
// The filter needs L cycles after reset to clear itself (ready is low until
// then; Accesses arriving meanwhile are queued or dropped).
//
// Interface: acc_* from the memory controller's request stream; pev_* from
// the LLC; pp_* to the LLC fill path; pf_* to the memory fetch queue.
// reloc_valid and del_valid report filter relocations and autonomic
// deletions for statistics.
module pipomonitor #(
  parameter int unsigned ADDR_W    = acf_pkg::ADDR_W,
  parameter int unsigned L         = acf_pkg::L,
  parameter int unsigned B         = acf_pkg::B,
  parameter int unsigned FP_W      = acf_pkg::FP_W,
  parameter int unsigned SEC_W     = acf_pkg::SEC_W,
  parameter int unsigned SEC_THR   = acf_pkg::SEC_THR,
  parameter int unsigned MNK       = acf_pkg::MNK,
  parameter int unsigned ACC_DEPTH = 8,
  parameter int unsigned PEV_DEPTH = 8,
  parameter int unsigned PF_DELAY  = acf_pkg::PF_DELAY
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic              ready,
  input  logic              acc_valid,
  input  logic [ADDR_W-1:0] acc_addr,
  output logic              acc_drop,
  output logic              pp_valid,
  output logic [ADDR_W-1:0] pp_addr,
  input  logic              pev_valid,
  output logic              pev_ready,
  input  logic [ADDR_W-1:0] pev_addr,
  output logic              pf_valid,
  input  logic              pf_ready,
  output logic [ADDR_W-1:0] pf_addr,
  output logic              reloc_valid,
  output logic              del_valid
);
  logic              q_valid, q_ready, r_valid, r_hit;
  logic [ADDR_W-1:0] q_addr;
  logic [SEC_W-1:0]  r_security;
  logic [FP_W-1:0]   r_fprint, del_fprint;
  logic [$clog2(L)-1:0] del_idx;
  logic              init_done;

  pipo_queue #(
    .ADDR_W(ADDR_W), .SEC_W(SEC_W), .SEC_THR(SEC_THR),
    .ACC_DEPTH(ACC_DEPTH), .PEV_DEPTH(PEV_DEPTH), .PF_DELAY(PF_DELAY)
  ) u_queue (
    .clk, .rst_n,
    .acc_valid, .acc_addr, .acc_drop,
    .q_valid, .q_ready, .q_addr,
    .r_valid, .r_security,
    .pp_valid, .pp_addr,
    .pev_valid, .pev_ready, .pev_addr,
    .pf_valid, .pf_ready, .pf_addr);

  acf_filter #(
    .ADDR_W(ADDR_W), .L(L), .B(B), .FP_W(FP_W), .SEC_W(SEC_W),
    .SEC_THR(SEC_THR), .MNK(MNK)
  ) u_filter (
    .clk, .rst_n,
    .q_valid, .q_ready, .q_addr,
    .r_valid, .r_hit, .r_security, .r_fprint,
    .reloc_valid, .del_valid, .del_fprint, .del_idx);

  // The filter is ready for the first time when it has cleared its arrays.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       init_done <= 1'b0;
    else if (q_ready) init_done <= 1'b1;
  end
  assign ready = init_done || q_ready;
endmodule
