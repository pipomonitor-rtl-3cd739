// Share of Auto-Cuckoo filter entries that hold a fingerprint collision, for
// fingerprint lengths f = 6, 8 and 12 (l = 1024, b = 8, MNK = 4).
//
// Each filter receives 60000 Queries for fresh random lines, so a hit can only
// be a collision: a line whose fingerprint and bucket pair equal those of a
// stored record is merged into that record. The testbench keeps a model of
// every stored record, keyed by fingerprint and bucket pair, with the number
// of distinct lines merged into it. A miss adds a record, a hit adds a line to
// the record it must have matched, and each autonomic deletion reported by
// the filter removes its record. At the end the share of stored records with
// 2 or more, and with 3 or more, lines is printed.
// Checked: every hit and every deletion names a record the model holds; the
// share with 2 or more lines falls as f grows; at f = 12 it is below 0.021
// (1.5 times the 0.014 the filter was designed for) and the share with 3 or
// more lines is below 0.002.
module tb_acf_collisions;
  import tb_ref_pkg::*;
  localparam int ADDR_W = 42, L = 1024, B = 8, SEC_W = 2, N = 3, INS = 60000;
  localparam int IDX_W = $clog2(L);
  localparam int FPW [N] = '{6, 8, 12};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  bit done [N];
  real share2 [N], share3 [N];

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint unsigned rec_key(longint unsigned fp, longint unsigned i0, longint unsigned i1);
    longint unsigned lo, hi;
    lo = (i0 < i1) ? i0 : i1;
    hi = (i0 < i1) ? i1 : i0;
    return (fp << (2 * IDX_W)) | (lo << IDX_W) | hi;
  endfunction

  for (genvar g = 0; g < N; g++) begin : gi
    logic q_valid = 0, q_ready, r_valid, r_hit, reloc_valid, del_valid;
    logic [ADDR_W-1:0] q_addr = '0;
    logic [SEC_W-1:0] r_security;
    logic [FPW[g]-1:0] r_fprint, del_fprint;
    logic [IDX_W-1:0] del_idx;
    acf_filter #(.FP_W(FPW[g])) dut (.*);

    int lines [longint unsigned];

    // autonomic deletions, sampled at the clock edge after they are reported
    always @(posedge clk) begin
      longint unsigned fp, k;
      if (del_valid) begin
        fp = longint'(del_fprint);
        k = rec_key(fp, longint'(del_idx), ref_alt(longint'(del_idx), fp, FPW[g], IDX_W));
        checks++;
        if (!lines.exists(k)) begin failures++; $display("f=%0d: deleted record not in model", FPW[g]); end
        else lines.delete(k);
      end
    end

    initial begin
      longint unsigned a, fp, i1, k;
      int n2, n3;
      wait (rst_n);
      for (int n = 0; n < INS; n++) begin
        @(posedge clk); #1;
        a = rand64() & ((64'd1 << ADDR_W) - 1);
        q_valid = 1; q_addr = ADDR_W'(a);
        while (!q_ready) begin @(posedge clk); #1; end
        @(posedge clk); #1;
        q_valid = 0;
        while (!r_valid) begin @(posedge clk); #1; end
        fp = ref_fp(a, ADDR_W, FPW[g]);
        i1 = ref_h1(a, ADDR_W, IDX_W);
        k = rec_key(fp, i1, ref_alt(i1, fp, FPW[g], IDX_W));
        if (r_hit) begin
          checks++;
          if (!lines.exists(k)) begin failures++; $display("f=%0d: hit on a record not in model", FPW[g]); end
          else lines[k]++;
        end else begin
          lines[k] = 1;
        end
        while (!q_ready) begin @(posedge clk); #1; end
      end
      n2 = 0; n3 = 0;
      foreach (lines[key]) begin
        if (lines[key] >= 2) n2++;
        if (lines[key] >= 3) n3++;
      end
      share2[g] = real'(n2) / lines.num();
      share3[g] = real'(n3) / lines.num();
      $display("f=%0d: %0d records, share with >=2 lines %f, with >=3 lines %f",
               FPW[g], lines.num(), share2[g], share3[g]);
      done[g] = 1;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done[0] && done[1] && done[2]);
    checks++;
    if (!(share2[0] > share2[1] && share2[1] > share2[2])) begin failures++; $display("share does not fall with f"); end
    checks++;
    if (share2[2] >= 0.021) begin failures++; $display("f=12 share with >=2 lines too high"); end
    checks++;
    if (share3[2] >= 0.002) begin failures++; $display("f=12 share with >=3 lines too high"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
