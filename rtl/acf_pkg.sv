// Shared constants and helpers of the Auto-Cuckoo filter and PiPoMonitor.
//
// The default sizes are the main configuration: l = 1024 buckets of b = 8
// entries, f = 12-bit fingerprints, a 2-bit Security counter that saturates
// at secThr = 3, and at most MNK = 4 relocations per insertion. The address
// width, the prefetch delay, the queue depths and the hash seeds are not
// given for the design and are chosen here.
//
// The hash units are H3 hashes: output bit i is the XOR of the input bits
// selected by a constant mask row i. The mask rows are produced at
// elaboration time by splitmix64 from a seed and the row number, so each
// hash is a fixed tree of XOR gates.
package acf_pkg;

  localparam int unsigned ADDR_W   = 42;   // cache-line address: 48-bit physical address, 64-byte lines
  localparam int unsigned L        = 1024; // number of buckets (sets)
  localparam int unsigned B        = 8;    // entries per bucket
  localparam int unsigned FP_W     = 12;   // fingerprint length f
  localparam int unsigned SEC_W    = 2;    // Security counter width
  localparam int unsigned SEC_THR  = 3;    // Security saturation value secThr
  localparam int unsigned MNK      = 4;    // maximal number of kicks
  localparam int unsigned PF_DELAY = 200;  // cycles between pEvict and Prefetch

  localparam logic [63:0] SEED_FPRINT = 64'h0123_4567_89AB_CDEF;
  localparam logic [63:0] SEED_HASH1  = 64'h2545_F491_4F6C_DD1D;
  localparam logic [63:0] SEED_HASH2  = 64'h9E6C_63D0_676A_9A99;

  // splitmix64 of (seed + (row+1) * golden ratio): one H3 mask row.
  function automatic logic [63:0] h3_row(input logic [63:0] seed, input int unsigned row);
    logic [63:0] z;
    z = seed + 64'(row + 1) * 64'h9E37_79B9_7F4A_7C15;
    z = (z ^ (z >> 30)) * 64'hBF58_476D_1CE4_E5B9;
    z = (z ^ (z >> 27)) * 64'h94D0_49BB_1331_11EB;
    return z ^ (z >> 31);
  endfunction

endpackage
