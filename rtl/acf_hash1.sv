// Hash1 Module of the Auto-Cuckoo filter.
//
// Computes the first candidate bucket of a cache-line address,
// h1(x) = hash(x), as a log2(l)-bit index. As for the fingerprint, the hash
// itself is this design's choice: an H3 hash with its own seed, so that the
// index and the fingerprint are independent functions of the address.
// Purely combinational.
module acf_hash1 #(
  parameter int unsigned ADDR_W = acf_pkg::ADDR_W,
  parameter int unsigned L      = acf_pkg::L,
  parameter logic [63:0] SEED   = acf_pkg::SEED_HASH1,
  localparam int unsigned IDX_W = $clog2(L)
) (
  input  logic [ADDR_W-1:0] addr,
  output logic [IDX_W-1:0]  idx
);
  for (genvar i = 0; i < IDX_W; i++) begin : g_bit
    localparam logic [63:0] ROW = acf_pkg::h3_row(SEED, i);
    assign idx[i] = ^(addr & ROW[ADDR_W-1:0]);
  end
endmodule
