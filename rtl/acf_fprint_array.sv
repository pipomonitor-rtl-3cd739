// fPrint Array of the Auto-Cuckoo filter.
//
// l sets of b entries; each entry is {Valid, fPrint}: a 1-bit flag saying the
// entry holds a record and the f-bit fingerprint of that record. Organised
// like a cache tag array, with the two read ports that the filter needs to
// look at both candidate buckets of an address in the same cycle.
//
// Timing: reads are synchronous. When rd_en is high, the sets rd_idx0 and
// rd_idx1 appear on rd_set0/rd_set1 in the next cycle and stay there until
// the next read. One write port writes the entries of set wr_idx selected by
// wr_mask; a read in the same cycle as a write to the same set returns the
// old contents. The array is not reset: the filter clears the Valid flags by
// writing every set once after reset.
//
// Entry layout in a set word: entry w occupies bits [w*(FP_W+1) +: FP_W+1],
// with Valid as its top bit.
module acf_fprint_array #(
  parameter int unsigned L      = acf_pkg::L,
  parameter int unsigned B      = acf_pkg::B,
  parameter int unsigned FP_W   = acf_pkg::FP_W,
  localparam int unsigned IDX_W = $clog2(L),
  localparam int unsigned E_W   = FP_W + 1
) (
  input  logic                  clk,
  input  logic                  rd_en,
  input  logic [IDX_W-1:0]      rd_idx0,
  input  logic [IDX_W-1:0]      rd_idx1,
  output logic [B-1:0][E_W-1:0] rd_set0,
  output logic [B-1:0][E_W-1:0] rd_set1,
  input  logic                  wr_en,
  input  logic [IDX_W-1:0]      wr_idx,
  input  logic [B-1:0]          wr_mask,
  input  logic [B-1:0][E_W-1:0] wr_set
);
  logic [B-1:0][E_W-1:0] mem [L];

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
