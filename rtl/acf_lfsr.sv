// Free-running 16-bit Galois LFSR (x^16 + x^14 + x^13 + x^11 + 1), the random
// source the Auto-Cuckoo filter uses to pick which candidate bucket and which
// entry to kick out when both candidate buckets are full. It steps every cycle,
// so the choice also depends on the timing of the requests. The seed must be
// non-zero. The generator itself is this design's choice; the filter only
// requires that the kicked record is chosen at random.
module acf_lfsr #(
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic [15:0] rnd
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rnd <= SEED;
    else        rnd <= (rnd >> 1) ^ (rnd[0] ? 16'hB400 : 16'h0000);
  end
endmodule
