// Hash2 Module of the Auto-Cuckoo filter (partial-key cuckoo hashing).
//
// Gives the other candidate bucket of a record from one bucket index and the
// record's fingerprint: alt = idx XOR hash(fprint). With idx = h1(x) it yields
// the second candidate h2(x); applied to a relocated record's current bucket
// it yields the bucket the record moves to, and applying it twice returns the
// starting bucket. This is why the filter can relocate a record knowing only
// its fingerprint. hash(fprint) is an H3 hash of the f fingerprint bits onto
// log2(l) bits (this design's choice). Purely combinational.
module acf_hash2 #(
  parameter int unsigned FP_W   = acf_pkg::FP_W,
  parameter int unsigned L      = acf_pkg::L,
  parameter logic [63:0] SEED   = acf_pkg::SEED_HASH2,
  localparam int unsigned IDX_W = $clog2(L)
) (
  input  logic [IDX_W-1:0] idx,
  input  logic [FP_W-1:0]  fprint,
  output logic [IDX_W-1:0] alt_idx
);
  logic [IDX_W-1:0] fp_hash;
  for (genvar i = 0; i < IDX_W; i++) begin : g_bit
    localparam logic [63:0] ROW = acf_pkg::h3_row(SEED, i);
    assign fp_hash[i] = ^(fprint & ROW[FP_W-1:0]);
  end
  assign alt_idx = idx ^ fp_hash;
endmodule
