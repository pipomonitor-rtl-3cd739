// Auto-Cuckoo filter: records the fingerprints of accesses to main memory and
// counts how often each recorded line is accessed again.
//
// A Query carries a cache-line address x. The filter hashes it into a
// fingerprint fp = xi(x) and two candidate buckets mu(x) = h1(x) and
// sigma(x) = h1(x) XOR hash(fp), reads both buckets from the fPrint and Data
// Arrays, and compares fp with all 2b entries.
//  * Match: the entry's Security counter is incremented, saturating at secThr,
//    written back, and the new value is the Response.
//  * No match: fp is inserted with Security 0 into the first free entry of
//    mu(x), else of sigma(x); the Response is 0.
//  * No match and both buckets full: a random entry of a random candidate
//    bucket is kicked out and fp takes its place. The kicked record (with its
//    Security) moves to its other bucket, found from its current bucket and
//    its fingerprint alone. If that bucket is full too, a random entry there
//    is kicked in turn. After MNK relocations the record still left homeless
//    is dropped (autonomic deletion), so an insertion never fails and the
//    record that is lost cannot be predicted by an attacker.
// When several entries match, the first in bucket mu(x) and way order wins.
//
// Pipeline and timing (the two register stages follow the microarchitecture
// drawing: hash results are registered, then the array outputs are
// registered, then compared). A query is accepted when q_valid && q_ready;
// the Response (r_valid for one cycle) comes 2 cycles later. q_ready returns
// the cycle after the Response when no relocation is needed, so a query takes
// 3 cycles; each relocation adds 2 cycles (read, then compare/write), during
// which q_ready stays low. After reset the filter spends L cycles clearing
// the Valid flags, with q_ready low. There is no r_ready: the requester must
// take the Response when it comes.
//
// Extra outputs show the mechanisms: reloc_valid pulses for each relocation,
// del_valid/del_fprint/del_idx for each autonomically deleted record (its
// fingerprint and the bucket it was taken from).
module acf_filter #(
  parameter int unsigned ADDR_W  = acf_pkg::ADDR_W,
  parameter int unsigned L       = acf_pkg::L,
  parameter int unsigned B       = acf_pkg::B,
  parameter int unsigned FP_W    = acf_pkg::FP_W,
  parameter int unsigned SEC_W   = acf_pkg::SEC_W,
  parameter int unsigned SEC_THR = acf_pkg::SEC_THR,
  parameter int unsigned MNK     = acf_pkg::MNK,
  parameter logic [15:0] LFSR_SEED = 16'hACE1,
  localparam int unsigned IDX_W  = $clog2(L),
  localparam int unsigned WAY_W  = (B > 1) ? $clog2(B) : 1,
  localparam int unsigned E_W    = FP_W + 1,
  localparam int unsigned RC_W   = $clog2(MNK + 1) > 0 ? $clog2(MNK + 1) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // Query
  input  logic              q_valid,
  output logic              q_ready,
  input  logic [ADDR_W-1:0] q_addr,
  // Response
  output logic              r_valid,
  output logic              r_hit,
  output logic [SEC_W-1:0]  r_security,
  output logic [FP_W-1:0]   r_fprint,
  // Mechanism events
  output logic              reloc_valid,
  output logic              del_valid,
  output logic [FP_W-1:0]   del_fprint,
  output logic [IDX_W-1:0]  del_idx
);
  typedef enum logic [2:0] {S_INIT, S_IDLE, S_READ, S_CMP, S_KREAD, S_KCMP} state_e;
  state_e state;

  initial begin
    assert (L >= 2 && (L & (L - 1)) == 0) else $error("L must be a power of two");
    assert (B >= 2 && (B & (B - 1)) == 0) else $error("B must be a power of two");
    assert (SEC_THR < (1 << SEC_W)) else $error("secThr does not fit the Security counter");
  end

  // ---------------- hash stage ----------------
  logic [FP_W-1:0]  fp_c;
  logic [IDX_W-1:0] i1_c, i2_c;
  acf_fprint_hash #(.ADDR_W(ADDR_W), .FP_W(FP_W)) u_fph (.addr(q_addr), .fprint(fp_c));
  acf_hash1 #(.ADDR_W(ADDR_W), .L(L)) u_h1 (.addr(q_addr), .idx(i1_c));
  acf_hash2 #(.FP_W(FP_W), .L(L)) u_h2 (.idx(i1_c), .fprint(fp_c), .alt_idx(i2_c));

  logic [FP_W-1:0]  fp_q;
  logic [IDX_W-1:0] i1_q, i2_q;

  // ---------------- arrays ----------------
  logic                    rd_en;
  logic [IDX_W-1:0]        rd_idx0, rd_idx1;
  logic [B-1:0][E_W-1:0]   fset0, fset1;
  logic [B-1:0][SEC_W-1:0] dset0, dset1;
  logic                    wr_en;
  logic [IDX_W-1:0]        wr_idx;
  logic [B-1:0]            wr_mask;
  logic [B-1:0][E_W-1:0]   wr_fset;
  logic [B-1:0][SEC_W-1:0] wr_dset;

  acf_fprint_array #(.L(L), .B(B), .FP_W(FP_W)) u_fpa (
    .clk, .rd_en, .rd_idx0, .rd_idx1, .rd_set0(fset0), .rd_set1(fset1),
    .wr_en, .wr_idx, .wr_mask, .wr_set(wr_fset));
  acf_data_array #(.L(L), .B(B), .SEC_W(SEC_W)) u_da (
    .clk, .rd_en, .rd_idx0, .rd_idx1, .rd_set0(dset0), .rd_set1(dset1),
    .wr_en, .wr_idx, .wr_mask, .wr_set(wr_dset));

  logic [15:0] rnd;
  acf_lfsr #(.SEED(LFSR_SEED)) u_rnd (.clk, .rst_n, .rnd);

  // ---------------- relocation state ----------------
  logic [IDX_W-1:0] init_idx;
  logic [FP_W-1:0]  vic_fp;      // record looking for a home
  logic [SEC_W-1:0] vic_sec;
  logic [IDX_W-1:0] vic_idx;     // bucket it is moving into
  logic [RC_W-1:0]  relocs;      // relocations done for this insertion

  // ---------------- compare stage ----------------
  logic [B-1:0] match0, match1, free0, free1;
  always_comb begin
    for (int w = 0; w < B; w++) begin
      match0[w] = fset0[w][FP_W] && (fset0[w][FP_W-1:0] == fp_q);
      match1[w] = fset1[w][FP_W] && (fset1[w][FP_W-1:0] == fp_q);
      free0[w]  = !fset0[w][FP_W];
      free1[w]  = !fset1[w][FP_W];
    end
  end

  function automatic logic [WAY_W-1:0] first_one(input logic [B-1:0] v);
    first_one = '0;
    for (int w = B - 1; w >= 0; w--) if (v[w]) first_one = WAY_W'(w);
  endfunction

  // Way and bucket picked at random for a kick.
  logic             rnd_bkt;
  logic [WAY_W-1:0] rnd_way;
  assign rnd_bkt = rnd[0];
  assign rnd_way = rnd[WAY_W:1];

  // Alternative bucket of the record being kicked out.
  logic [IDX_W-1:0] kick_from;
  logic [FP_W-1:0]  kick_fp;
  logic [SEC_W-1:0] kick_sec;
  logic [IDX_W-1:0] kick_to;
  acf_hash2 #(.FP_W(FP_W), .L(L)) u_h2k (.idx(kick_from), .fprint(kick_fp), .alt_idx(kick_to));

  logic [SEC_W-1:0] hit_sec, hit_sec_inc;
  logic [WAY_W-1:0] way_sel;

  always_comb begin
    rd_en      = 1'b0;
    rd_idx0    = i1_q;
    rd_idx1    = i2_q;
    wr_en      = 1'b0;
    wr_idx     = i1_q;
    wr_mask    = '0;
    wr_fset    = '0;
    wr_dset    = '0;
    r_valid    = 1'b0;
    r_hit      = 1'b0;
    r_security = '0;
    r_fprint   = fp_q;
    way_sel    = '0;
    hit_sec    = '0;
    hit_sec_inc = '0;
    kick_from  = i1_q;
    kick_fp    = '0;
    kick_sec   = '0;
    reloc_valid = 1'b0;

    case (state)
      S_INIT: begin
        wr_en   = 1'b1;
        wr_idx  = init_idx;
        wr_mask = '1;
      end
      S_READ: rd_en = 1'b1;
      S_KREAD: begin
        rd_en   = 1'b1;
        rd_idx0 = vic_idx;
        rd_idx1 = vic_idx;
      end
      S_CMP: begin
        r_valid = 1'b1;
        wr_en   = 1'b1;
        if (|match0 || |match1) begin
          // reAccess: count it
          r_hit   = 1'b1;
          way_sel = |match0 ? first_one(match0) : first_one(match1);
          wr_idx  = |match0 ? i1_q : i2_q;
          hit_sec = |match0 ? dset0[way_sel] : dset1[way_sel];
          hit_sec_inc = (hit_sec >= SEC_W'(SEC_THR)) ? SEC_W'(SEC_THR) : hit_sec + 1'b1;
          wr_mask[way_sel] = 1'b1;
          wr_fset[way_sel] = {1'b1, fp_q};
          wr_dset[way_sel] = hit_sec_inc;
          r_security = hit_sec_inc;
        end else begin
          // new record, Security starts at 0
          if (|free0) begin
            way_sel = first_one(free0);
            wr_idx  = i1_q;
          end else if (|free1) begin
            way_sel = first_one(free1);
            wr_idx  = i2_q;
          end else begin
            way_sel   = rnd_way;
            wr_idx    = rnd_bkt ? i2_q : i1_q;
            kick_from = wr_idx;
            kick_fp   = rnd_bkt ? fset1[rnd_way][FP_W-1:0] : fset0[rnd_way][FP_W-1:0];
            kick_sec  = rnd_bkt ? dset1[rnd_way] : dset0[rnd_way];
          end
          wr_mask[way_sel] = 1'b1;
          wr_fset[way_sel] = {1'b1, fp_q};
          wr_dset[way_sel] = '0;
        end
      end
      S_KCMP: begin
        reloc_valid = 1'b1;
        wr_en       = 1'b1;
        wr_idx      = vic_idx;
        if (|free0) begin
          way_sel = first_one(free0);
        end else begin
          way_sel   = rnd_way;
          kick_from = vic_idx;
          kick_fp   = fset0[rnd_way][FP_W-1:0];
          kick_sec  = dset0[rnd_way];
        end
        wr_mask[way_sel] = 1'b1;
        wr_fset[way_sel] = {1'b1, vic_fp};
        wr_dset[way_sel] = vic_sec;
      end
      default: ;
    endcase
  end

  assign q_ready = (state == S_IDLE);

  // A record is dropped when it has been displaced after MNK relocations
  // (or straight away when MNK is 0).
  logic cmp_kick, kcmp_kick, drop;
  assign cmp_kick  = (state == S_CMP) && !(|match0 || |match1) && !(|free0) && !(|free1);
  assign kcmp_kick = (state == S_KCMP) && !(|free0);
  assign drop      = (cmp_kick && (MNK == 0)) ||
                     (kcmp_kick && (32'(relocs) + 1 >= MNK));
  assign del_valid  = drop;
  assign del_fprint = kick_fp;
  assign del_idx    = kick_from;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_INIT;
      init_idx <= '0;
      fp_q     <= '0;
      i1_q     <= '0;
      i2_q     <= '0;
      vic_fp   <= '0;
      vic_sec  <= '0;
      vic_idx  <= '0;
      relocs   <= '0;
    end else begin
      case (state)
        S_INIT: begin
          init_idx <= init_idx + 1'b1;
          if (init_idx == IDX_W'(L - 1)) state <= S_IDLE;
        end
        S_IDLE: if (q_valid) begin
          fp_q  <= fp_c;
          i1_q  <= i1_c;
          i2_q  <= i2_c;
          state <= S_READ;
        end
        S_READ: state <= S_CMP;
        S_CMP: begin
          relocs <= '0;
          if (cmp_kick && !drop) begin
            vic_fp  <= kick_fp;
            vic_sec <= kick_sec;
            vic_idx <= kick_to;
            state   <= S_KREAD;
          end else begin
            state <= S_IDLE;
          end
        end
        S_KREAD: state <= S_KCMP;
        S_KCMP: begin
          relocs <= relocs + 1'b1;
          if (kcmp_kick && !drop) begin
            vic_fp  <= kick_fp;
            vic_sec <= kick_sec;
            vic_idx <= kick_to;
            state   <= S_KREAD;
          end else begin
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Handshake rules
  a_resp_not_ready: assert property (@(posedge clk) disable iff (!rst_n) r_valid |-> !q_ready);
  a_relocs_bound:   assert property (@(posedge clk) disable iff (!rst_n) 32'(relocs) <= MNK);
  a_sec_bound:      assert property (@(posedge clk) disable iff (!rst_n) r_valid |-> 32'(r_security) <= SEC_THR);
endmodule
