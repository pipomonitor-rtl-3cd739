// Data Array of the Auto-Cuckoo filter.
//
// l sets of b entries, entry for entry beside the fPrint Array; each entry
// holds the Security counter of its record, the number of re-accesses to the
// line counted so far (2 bits, saturating at secThr = 3 in the filter).
// The saturating increment is done by the filter; this array only stores.
//
// Timing: same as the fPrint Array. Synchronous read of two sets (rd_idx0,
// rd_idx1) whose contents appear the cycle after rd_en; one write port that
// writes the entries of set wr_idx selected by wr_mask; read-before-write on a
// same-cycle collision. No reset: an entry's counter is meaningful only while
// its Valid flag in the fPrint Array is set, and it is written on insertion.
module acf_data_array #(
  parameter int unsigned L      = acf_pkg::L,
  parameter int unsigned B      = acf_pkg::B,
  parameter int unsigned SEC_W  = acf_pkg::SEC_W,
  localparam int unsigned IDX_W = $clog2(L)
) (
  input  logic                    clk,
  input  logic                    rd_en,
  input  logic [IDX_W-1:0]        rd_idx0,
  input  logic [IDX_W-1:0]        rd_idx1,
  output logic [B-1:0][SEC_W-1:0] rd_set0,
  output logic [B-1:0][SEC_W-1:0] rd_set1,
  input  logic                    wr_en,
  input  logic [IDX_W-1:0]        wr_idx,
  input  logic [B-1:0]            wr_mask,
  input  logic [B-1:0][SEC_W-1:0] wr_set
);
  logic [B-1:0][SEC_W-1:0] mem [L];

  always_ff @(posedge clk) begin
    if (rd_en) begin
      rd_set0 <= mem[rd_idx0];
      rd_set1 <= mem[rd_idx1];
    end
    if (wr_en) begin
      for (int w = 0; w < B; w++) begin
        if (wr_mask[w]) mem[wr_idx][w] <= wr_set[w];
      end
    end
  end
endmodule
