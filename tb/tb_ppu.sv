// tb_ppu: path pruning unit. After init the metrics are (0, max, max, max).
// A sequence of random leaves is decoded:
//  * CG rate-1 leaves (one word, or four words for a multi-word node): each
//    path offers its hard decision h (metric unchanged) and h with the least
//    reliable bit flipped (metric + min |LLR|);
//  * FP leaves: each path offers its best candidates from NG-II;
//  * hard-decision leaves: every path keeps its own hard decision.
// A reference keeps the L path metrics and the decided words; after each
// commit the surviving metrics must be the L smallest offered ones, each
// survivor must name a source path a_l and carry a word that this path
// offered with exactly that metric. FP candidates are checked to be
// codewords of the node. The commit is given np - 2 cycles after the last
// LLR word, where np is the PPU latency of Table 4 (or 2 for CG).
// CG, MBS and the path metric update follow the paper; sizes are own choices.
module tb_ppu;
  import polar_pkg::*;
  import polar_tb_pkg::*;
  localparam int L = 4, T = 8, QM = 7, X0 = 8, X1 = 16, MAX_R1 = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic init = 0, is_fp = 0, valid = 0, last = 0, multi = 0, fp_cap = 0, commit = 0, commit_hd = 0;
  logic [7:0] wk = '0;
  logic [$clog2(T):0] nv = '0;
  logic signed [QM-1:0] llr [L][T];
  logic [2:0] slog = '0;
  logic [X1-1:0] info_mask = '0;
  logic [2:0] a_q [L];
  logic [MAX_R1-1:0] beta_q [L];
  logic [PMW-1:0] pm_q [L];
  logic [3:0] q_used;
  int checks = 0, failures = 0, n_cg = 0, n_fp = 0, n_hd = 0;

  ppu #(.L(L), .T(T), .QM(QM), .X0(X0), .X1(X1), .MAX_R1(MAX_R1)) dut (
    .clk, .rst_n, .init, .is_fp, .valid, .last, .multi, .wk, .nv, .llr, .fp_cap, .slog,
    .info_mask, .commit, .commit_hd, .a_q, .beta_q, .pm_q, .q_used);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sadd(int a, int b);
    return (a + b > int'(PM_MAX)) ? int'(PM_MAX) : a + b;
  endfunction

  function automatic logic [CWW-1:0] ref_enc(logic [CWW-1:0] u, int s);
    bitq_t q, x;
    logic [CWW-1:0] r;
    r = '0;
    for (int i = 0; i < (1 << s); i++) q.push_back(u[i]);
    x = encode_ref(q, s);
    for (int i = 0; i < (1 << s); i++) r[i] = x[i];
    return r;
  endfunction

  initial begin
    int pm [L];
    int v [L][MAX_R1];
    for (int l = 0; l < L; l++) for (int i = 0; i < T; i++) llr[l][i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk) init = 1;
    @(negedge clk) init = 0;
    for (int l = 0; l < L; l++) pm[l] = (l == 0) ? 0 : int'(PM_MAX);
    for (int leaf = 0; leaf < 300; leaf++) begin
      int kind, sz, nw, np, iv;
      int offs [$];
      offs.delete();
      kind = leaf % 4;            // 0,1: CG (single, multi)  2: FP  3: hard decision
      sz = (kind == 1) ? 4 * T : (kind == 2) ? (1 << (2 + $urandom % 3)) : (kind == 3) ? 2 * T : T / 2;
      nw = (sz + T - 1) / T;
      iv = 0;
      if (kind == 2) begin
        info_mask = '0;
        iv = 1 + $urandom % ((sz - 1 < X0) ? sz - 1 : X0);
        for (int c = 0; c < iv; c++) begin
          int p;
          do p = $urandom % sz; while (info_mask[p]);
          info_mask[p] = 1'b1;
        end
      end
      for (int l = 0; l < L; l++)
        for (int i = 0; i < MAX_R1; i++)
          v[l][i] = (i < sz) ? (($urandom % 2) ? -1 : 1) * int'(1 + ($urandom % 40)) : 0;
      np = (kind == 2) ? np_fp(iv, L) : (kind == 3) ? ((nw > 1) ? 3 : 2) : ((nw > 1) ? 4 : 2);
      for (int w = 0; w < nw; w++) begin
        @(negedge clk);
        is_fp = (kind == 2);
        valid = (kind != 2); fp_cap = (kind == 2);
        last = (w == nw - 1); multi = nw > 1; wk = 8'(w);
        nv = ($clog2(T)+1)'(sz < T ? sz : T);
        slog = 3'($clog2(sz));
        for (int l = 0; l < L; l++)
          for (int i = 0; i < T; i++) llr[l][i] = QM'(v[l][(w*T+i) % MAX_R1]);
      end
      @(negedge clk);
      valid = 0; fp_cap = 0; last = 0;
      for (int c = 0; c < np - 2; c++) @(negedge clk);
      if (kind == 3) commit_hd = 1; else commit = 1;
      @(negedge clk);
      commit = 0; commit_hd = 0;
      // collect offered metrics
      for (int l = 0; l < L; l++) begin
        if (kind == 3) offs.push_back(pm[l]);
        else if (kind != 2) begin
          automatic int mn = 1000;
          for (int i = 0; i < sz; i++) if ((v[l][i] < 0 ? -v[l][i] : v[l][i]) < mn) mn = v[l][i] < 0 ? -v[l][i] : v[l][i];
          offs.push_back(pm[l]);
          offs.push_back(sadd(pm[l], mn));
        end
      end
      // survivors
      for (int l = 0; l < L; l++) begin
        int src, hmet;
        bit ok;
        logic [MAX_R1-1:0] h;
        src = int'(a_q[l]);
        h = '0; hmet = 0;
        for (int i = 0; i < sz; i++) begin
          h[i] = v[src][i] < 0;
          if (beta_q[l][i] != h[i]) hmet += v[src][i] < 0 ? -v[src][i] : v[src][i];
        end
        ok = (int'(pm_q[l]) == sadd(pm[src], hmet)) || (pm[src] == int'(PM_MAX) && pm_q[l] == PM_MAX);
        if (kind == 3) ok = ok && src == l && hmet == 0;
        if (kind < 2) begin
          automatic int nflip = 0;
          for (int i = 0; i < sz; i++) nflip += (beta_q[l][i] != h[i]);
          ok = ok && nflip <= 1;
        end
        if (kind == 2) begin
          logic [CWW-1:0] uu;
          uu = ref_enc(CWW'(beta_q[l]), $clog2(sz));
          for (int p = 0; p < sz; p++) if (!info_mask[p] && uu[p]) ok = 0;
          offs.push_back(int'(pm_q[l]));
        end
        checks++;
        if (!ok) begin
          failures++;
          if (failures < 10) $display("FAIL leaf %0d kind %0d path %0d: src %0d pm %0d (src pm %0d, distance %0d)",
                                      leaf, kind, l, src, pm_q[l], pm[src], hmet);
        end
      end
      offs.sort();
      if (kind != 2) begin
        for (int l = 0; l < L; l++) begin
          checks++;
          if (int'(pm_q[l]) != offs[l]) begin
            failures++;
            if (failures < 10) $display("FAIL leaf %0d kind %0d: survivor %0d metric %0d, expected %0d", leaf, kind, l, pm_q[l], offs[l]);
          end
        end
      end
      if (kind < 2) n_cg++; else if (kind == 2) n_fp++; else n_hd++;
      for (int l = 0; l < L; l++) pm[l] = int'(pm_q[l]);
      // keep metrics away from saturation
      if (leaf % 8 == 7) begin
        @(negedge clk) init = 1;
        @(negedge clk) init = 0;
        for (int l = 0; l < L; l++) pm[l] = (l == 0) ? 0 : int'(PM_MAX);
      end
    end
    $display("leaves: CG %0d, FP %0d, hard decision %0d", n_cg, n_fp, n_hd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
