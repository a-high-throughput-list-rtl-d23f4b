// ppu: path pruning unit (Fig. 7). Runs the CG algorithm for rate-1 nodes
// and the MBS algorithm for FP nodes and keeps the L surviving paths.
//
// Inputs arrive with the node's LLRs. For a rate-1 node the LLR words of all
// L paths stream into the L NG-I units; their outputs (NM^1, k_M, hard
// decision) are captured when NG-I flags them valid. For an FP node the
// first X1 LLRs of every path are captured by fp_cap (the LLR buffer in
// front of the PPU) and feed the L NG-II units. Expanded path metrics
// PM_l + NM are formed with saturating adders from the path metric
// registers (PMR). CG: the 2L metrics go to one MS_{2L-L}. FP: each path
// offers its q best metrics, padded to L with the largest metric, and a
// binary tree of log2(L) levels of MS_{2L-L} keeps L. The last level's input
// is multiplexed between the two cases, as in Fig. 7. On commit the PMR,
// the list indices a_l (pList) and the returned codewords beta_l (pCCode)
// are registered; beta_l is the hard decision of path a_l, with bit k_M
// flipped for the second-best candidate, or the chosen FP codeword.
// commit_hd registers the plain hard decisions of every path (rate-1 node
// decoded by hard decision, no split). init clears the PMR: path 0 starts
// at 0, the others at the largest metric so that only one path is live.
// The network between the capture registers and commit is combinational
// and is given N_P cycles (Table 4) by the controller.
//
// From the paper: NG-I, NG-II, adders, MS tree with input mux, PMR.
// Own choices: the PMR start values (the paper starts all at 0), capture and
// commit handshake, padding of q < L to the full sorter tree.
module ppu
  import polar_pkg::*;
#(
  parameter int L      = 4,
  parameter int T      = 128,
  parameter int QM     = 7,
  parameter int X0     = 8,
  parameter int X1     = 16,
  parameter int MAX_R1 = 256
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  init,
  input  logic                  is_fp,
  // LLR stream of the activated leaf (all paths in lockstep)
  input  logic                  valid,
  input  logic                  last,
  input  logic                  multi,
  input  logic [7:0]            wk,
  input  logic [$clog2(T):0]    nv,
  input  logic signed [QM-1:0]  llr [L][T],
  input  logic                  fp_cap,
  input  logic [2:0]            slog,
  input  logic [X1-1:0]         info_mask,
  input  logic                  commit,
  input  logic                  commit_hd,
  output logic [2:0]            a_q    [L],
  output logic [MAX_R1-1:0]     beta_q [L],
  output logic [PMW-1:0]        pm_q   [L],
  output logic [3:0]            q_used
);
  localparam int KW = $clog2(MAX_R1);
  localparam int LV = $clog2(L);

  // NG-I outputs and their capture registers
  logic              g1_v   [L];
  logic [QM-2:0]     g1_nm  [L];
  logic [KW-1:0]     g1_k   [L];
  logic [MAX_R1-1:0] g1_c0  [L];
  logic [QM-2:0]     nm1_r  [L];
  logic [KW-1:0]     k_r    [L];
  logic [MAX_R1-1:0] c0_r   [L];
  // NG-II inputs (LLR buffer) and outputs
  logic signed [QM-1:0] fp_llr [L][X1];
  logic [2:0]        slog_r;
  logic [X1-1:0]     mask_r;
  logic [3:0]        g2_cnt [L];
  logic [NMW-1:0]    g2_nm  [L][L];
  logic [CWW-1:0]    g2_cw  [L][L];

  for (genvar l = 0; l < L; l++) begin : g_path
    ng1 #(.T(T), .QM(QM), .MAX_R1(MAX_R1)) u_ng1 (
      .clk, .rst_n, .valid, .last, .multi, .wk, .nv, .llr(llr[l]),
      .o_valid(g1_v[l]), .nm1(g1_nm[l]), .kidx(g1_k[l]), .c0(g1_c0[l]));
    ng2 #(.L(L), .QM(QM), .X0(X0), .X1(X1)) u_ng2 (
      .llr(fp_llr[l]), .slog(slog_r), .info_mask(mask_r),
      .cnt(g2_cnt[l]), .nm(g2_nm[l]), .cw(g2_cw[l]));
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int l = 0; l < L; l++) begin
        nm1_r[l] <= '0; k_r[l] <= '0; c0_r[l] <= '0;
        for (int i = 0; i < X1; i++) fp_llr[l][i] <= '0;
      end
      slog_r <= '0; mask_r <= '0;
    end else begin
      if (g1_v[0])
        for (int l = 0; l < L; l++) begin
          nm1_r[l] <= g1_nm[l]; k_r[l] <= g1_k[l]; c0_r[l] <= g1_c0[l];
        end
      if (fp_cap) begin
        for (int l = 0; l < L; l++)
          for (int i = 0; i < T; i++)
            if (int'(wk) * T + i < X1) fp_llr[l][int'(wk) * T + i] <= llr[l][i];
        slog_r <= slog;
        mask_r <= info_mask;
      end
    end

  // expanded path metrics and the sorter tree
  cand_t cg_c  [2*L];
  cand_t fp_c  [L*L];
  cand_t best  [L];

  always_comb
    for (int l = 0; l < L; l++) begin
      cg_c[2*l].pm     = pm_q[l];
      cg_c[2*l].path   = 3'(l);
      cg_c[2*l].flip   = 1'b0;
      cg_c[2*l].cw     = '0;
      cg_c[2*l+1].pm   = sat_add(pm_q[l], NMW'(nm1_r[l]));
      cg_c[2*l+1].path = 3'(l);
      cg_c[2*l+1].flip = 1'b1;
      cg_c[2*l+1].cw   = '0;
      for (int i = 0; i < L; i++) begin
        fp_c[l*L+i].pm   = (i < int'(g2_cnt[l])) ? sat_add(pm_q[l], g2_nm[l][i]) : PM_MAX;
        fp_c[l*L+i].path = 3'(l);
        fp_c[l*L+i].flip = 1'b0;
        fp_c[l*L+i].cw   = g2_cw[l][i];
      end
    end

  // level k of the tree takes L*L/2^k candidates and returns half of them
  for (genvar k = 0; k < LV; k++) begin : g_lvl
    localparam int NIN = (L * L) >> k;
    cand_t vin  [NIN];
    cand_t vout [NIN/2];
    if (k == 0) begin : g_first
      if (LV == 1) begin : g_mux
        always_comb vin = is_fp ? fp_c : cg_c;
      end else begin : g_nomux
        always_comb vin = fp_c;
      end
    end else if (k == LV - 1) begin : g_last
      always_comb vin = is_fp ? g_lvl[k-1].vout : cg_c;
    end else begin : g_mid
      always_comb vin = g_lvl[k-1].vout;
    end
    for (genvar s = 0; s < NIN / (2*L); s++) begin : g_ms
      ms_sort #(.L(L)) u_ms (.din(vin[s*2*L +: 2*L]), .dout(vout[s*L +: L]));
    end
  end

  always_comb
    for (int i = 0; i < L; i++) best[i] = g_lvl[LV-1].vout[i];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int l = 0; l < L; l++) begin
        pm_q[l] <= (l == 0) ? '0 : PM_MAX; a_q[l] <= 3'(l); beta_q[l] <= '0;
      end
      q_used <= '0;
    end else if (init) begin
      for (int l = 0; l < L; l++) begin
        pm_q[l] <= (l == 0) ? '0 : PM_MAX; a_q[l] <= 3'(l);
      end
    end else if (commit) begin
      q_used <= is_fp ? g2_cnt[0] : 4'd0;
      for (int l = 0; l < L; l++) begin
        pm_q[l] <= best[l].pm;
        a_q[l]  <= best[l].path;
        if (is_fp)
          beta_q[l] <= MAX_R1'(best[l].cw);
        else
          beta_q[l] <= c0_r[best[l].path] ^
                       (best[l].flip ? (MAX_R1'(1) << k_r[best[l].path]) : '0);
      end
    end else if (commit_hd) begin
      for (int l = 0; l < L; l++) begin
        a_q[l] <= 3'(l); beta_q[l] <= c0_r[l];
      end
    end
endmodule
