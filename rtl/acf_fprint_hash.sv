// fPrint Hash Module of the Auto-Cuckoo filter.
//
// Maps a cache-line address x to its f-bit fingerprint (xi x), the value kept
// in the fPrint Array instead of the address. The filter's structure calls
// for an address hash but does not fix one; this unit uses an H3 hash: bit i
// of the fingerprint is the parity of the address bits picked by the constant
// mask acf_pkg::h3_row(SEED, i). Purely combinational; the filter registers
// the result in its first pipeline stage.
module acf_fprint_hash #(
  parameter int unsigned ADDR_W = acf_pkg::ADDR_W,
  parameter int unsigned FP_W   = acf_pkg::FP_W,
  parameter logic [63:0] SEED   = acf_pkg::SEED_FPRINT
) (
  input  logic [ADDR_W-1:0] addr,
  output logic [FP_W-1:0]   fprint
);
  for (genvar i = 0; i < FP_W; i++) begin : g_bit
    localparam logic [63:0] ROW = acf_pkg::h3_row(SEED, i);
    assign fprint[i] = ^(addr & ROW[ADDR_W-1:0]);
  end
endmodule
