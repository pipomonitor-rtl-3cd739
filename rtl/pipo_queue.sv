// Queue of PiPoMonitor: the part of the monitor that talks to the memory
// controller, the LLC and the Auto-Cuckoo filter.
//
// Access path. Every request the LLC sends to main memory (an Access) is
// copied into a FIFO of ACC_DEPTH line addresses. The head is sent to the
// filter as a Query; one Query is outstanding at a time and its address is
// kept until the Response arrives. A Response equal to secThr means the line
// has shown the Ping-Pong pattern: pp_valid pulses with its address, so the
// line can be tagged for protection when memory returns it to the LLC. The
// monitor works beside the memory fetch, never in its way: an Access that
// finds the FIFO full is not recorded (acc_drop pulses) and the memory
// request itself is unaffected.
//
// pEvict path. When the LLC evicts a tagged line it sends a pEvict message
// (pev_valid/pev_ready handshake). The address is held in a FIFO of
// PEV_DEPTH entries with a countdown; PF_DELAY cycles after the message was
// taken, the entry issues a Prefetch of the line to the memory fetch queue
// (pf_valid/pf_ready handshake, held until taken). The delay keeps the
// prefetch from competing with the writeback of the same line. Prefetches
// leave in pEvict order.
//
// Timing: an Access accepted in cycle t can be queried at t+1. pp_valid is
// registered: it follows r_valid by one cycle. A pEvict taken in cycle t
// raises pf_valid at cycle t + max(PF_DELAY, 1) at the earliest.
// Queue depths, the delay value and the drop-on-full policy are this design's
// choices; which prefetches to issue (only for lines accessed since their last
// prefetch) is decided in the LLC, which sends the pEvict.
module pipo_queue #(
  parameter int unsigned ADDR_W    = acf_pkg::ADDR_W,
  parameter int unsigned SEC_W     = acf_pkg::SEC_W,
  parameter int unsigned SEC_THR   = acf_pkg::SEC_THR,
  parameter int unsigned ACC_DEPTH = 8,
  parameter int unsigned PEV_DEPTH = 8,
  parameter int unsigned PF_DELAY  = acf_pkg::PF_DELAY,
  localparam int unsigned PEV_PTR_W = (PEV_DEPTH > 1) ? $clog2(PEV_DEPTH) : 1,
  localparam int unsigned PEV_CNT_W = $clog2(PEV_DEPTH + 1),
  localparam int unsigned DLY_W     = (PF_DELAY > 1) ? $clog2(PF_DELAY) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // Access from the memory controller
  input  logic              acc_valid,
  input  logic [ADDR_W-1:0] acc_addr,
  output logic              acc_drop,
  // Query / Response with the Auto-Cuckoo filter
  output logic              q_valid,
  input  logic              q_ready,
  output logic [ADDR_W-1:0] q_addr,
  input  logic              r_valid,
  input  logic [SEC_W-1:0]  r_security,
  // Ping-Pong line found: tag it in the LLC
  output logic              pp_valid,
  output logic [ADDR_W-1:0] pp_addr,
  // pEvict from the LLC
  input  logic              pev_valid,
  output logic              pev_ready,
  input  logic [ADDR_W-1:0] pev_addr,
  // Prefetch to the memory fetch queue
  output logic              pf_valid,
  input  logic              pf_ready,
  output logic [ADDR_W-1:0] pf_addr
);
  // ---------------- Access -> Query ----------------
  logic acc_empty, acc_full;
  logic inflight;
  logic [ADDR_W-1:0] inflight_addr;
  logic q_fire;

  pipo_fifo #(.WIDTH(ADDR_W), .DEPTH(ACC_DEPTH)) u_acc (
    .clk, .rst_n, .push(acc_valid), .din(acc_addr), .pop(q_fire),
    .dout(q_addr), .empty(acc_empty), .full(acc_full), .count());

  assign acc_drop = acc_valid && acc_full;
  assign q_valid  = !acc_empty && !inflight;
  assign q_fire   = q_valid && q_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      inflight      <= 1'b0;
      inflight_addr <= '0;
      pp_valid      <= 1'b0;
      pp_addr       <= '0;
    end else begin
      if (q_fire) begin
        inflight      <= 1'b1;
        inflight_addr <= q_addr;
      end else if (r_valid) begin
        inflight <= 1'b0;
      end
      pp_valid <= r_valid && inflight && (r_security == SEC_W'(SEC_THR));
      if (r_valid && inflight) pp_addr <= inflight_addr;
    end
  end

  // ---------------- pEvict -> Prefetch ----------------
  logic [ADDR_W-1:0]    pev_mem [PEV_DEPTH];
  logic [DLY_W-1:0]     pev_dly [PEV_DEPTH];
  logic [PEV_PTR_W-1:0] pev_rd, pev_wr;
  logic [PEV_CNT_W-1:0] pev_cnt;
  logic pev_push, pf_pop;

  localparam logic [DLY_W-1:0] DLY_INIT = (PF_DELAY > 1) ? DLY_W'(PF_DELAY - 1) : '0;

  function automatic logic [PEV_PTR_W-1:0] pinc(input logic [PEV_PTR_W-1:0] p);
    return (p == PEV_PTR_W'(PEV_DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  assign pev_ready = (pev_cnt != PEV_CNT_W'(PEV_DEPTH));
  assign pev_push  = pev_valid && pev_ready;
  assign pf_valid  = (pev_cnt != '0) && (pev_dly[pev_rd] == '0);
  assign pf_addr   = pev_mem[pev_rd];
  assign pf_pop    = pf_valid && pf_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pev_rd  <= '0;
      pev_wr  <= '0;
      pev_cnt <= '0;
      for (int i = 0; i < PEV_DEPTH; i++) pev_dly[i] <= '0;
    end else begin
      for (int i = 0; i < PEV_DEPTH; i++)
        if (pev_dly[i] != '0) pev_dly[i] <= pev_dly[i] - 1'b1;
      if (pev_push) begin
        pev_dly[pev_wr] <= DLY_INIT;
        pev_wr <= pinc(pev_wr);
      end
      if (pf_pop) pev_rd <= pinc(pev_rd);
      pev_cnt <= pev_cnt + PEV_CNT_W'(pev_push) - PEV_CNT_W'(pf_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (pev_push) pev_mem[pev_wr] <= pev_addr;
  end

  // Handshake rules
  a_pf_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              pf_valid && !pf_ready |=> pf_valid && $stable(pf_addr));
  a_resp_expected: assert property (@(posedge clk) disable iff (!rst_n) r_valid |-> inflight);
endmodule
