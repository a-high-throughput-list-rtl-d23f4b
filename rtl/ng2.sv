// ng2: node metric generation unit of type II (NG-II_l) for an FP node,
// decoding path l (MBS algorithm, first sorting stage; Alg. 2, Fig. 9).
//
// An FP node has 2^s <= X1 LLRs (s = slog) and I_v <= X0 information leaves
// (info_mask). Node metrics of all 2^I_v candidate codewords are computed in
// parallel with the DR-Hybrid method: per LLR pair i the four partial
// metrics theta_i[r] (r = two code bits) are formed by two 2-to-1 muxes per
// LLR (|alpha| or 0, steered by the hard decision) and four adders; a 4-to-1
// mux per candidate and pair (MUX4T256) picks theta_i[c[2i+1:2i]] and SUM
// adds the X1/2 picks. The approximate sort (ASort) then keeps q = q(I_v,L)
// candidates: if 2^I_v <= 2L one MS_{2L-L} sorts them directly; otherwise
// the candidates are split into q groups of 2^I_v/q, Min-2 keeps the two
// best of each group and one MS_{2L-L} keeps the best q of those 2q.
// Outputs: q (cnt), the q node metrics in ascending order and their
// codewords. Purely combinational.
//
// From the paper: DRH, ASort, Min-2, MS_{8-4} for L=4, q from Table 3.
// Own choices: the metric is the penalty form sum(m_k*|alpha_k|) of Eq. (9),
// as drawn in Fig. 9 (Alg. 2 writes the signed correlation instead); bit b
// of the candidate index j is the b-th information leaf; candidate
// codewords are obtained by encoding j on the fly.
module ng2
  import polar_pkg::*;
#(
  parameter int L  = 4,
  parameter int QM = 7,
  parameter int X0 = 8,
  parameter int X1 = 16
) (
  input  logic signed [QM-1:0] llr [X1],
  input  logic [2:0]           slog,
  input  logic [X1-1:0]        info_mask,
  output logic [3:0]           cnt,
  output logic [NMW-1:0]       nm  [L],
  output logic [CWW-1:0]       cw  [L]
);
  localparam int NC = 1 << X0;
  localparam int NP = X1 / 2;

  logic [NMW-1:0] theta [NP][4];
  logic [NMW-1:0] nmj   [NC];
  logic [CWW-1:0] cwj   [NC];
  logic [NC-1:0]  vj;
  int             iv, q;
  cand_t          s_in [2*L];
  cand_t          s_out[L];

  // RCC part: four partial metrics per LLR pair
  always_comb begin
    logic [NMW-1:0] p0 [2], p1 [2];
    logic signed [QM-1:0] x;
    logic [NMW-1:0] mag;
    p0[0] = '0; p0[1] = '0; p1[0] = '0; p1[1] = '0; x = '0; mag = '0;
    for (int i = 0; i < NP; i++) begin
      for (int b = 0; b < 2; b++) begin
        x   = llr[2*i+b];
        mag = NMW'(x < 0 ? -(NMW'(x)) : NMW'(x));
        if ((2*i+b) >= (1 << slog)) mag = '0;
        p0[b] = x[QM-1] ? mag : '0;   // cost of code bit 0
        p1[b] = x[QM-1] ? '0 : mag;   // cost of code bit 1
      end
      theta[i][0] = p0[0] + p0[1];
      theta[i][1] = p1[0] + p0[1];
      theta[i][2] = p0[0] + p1[1];
      theta[i][3] = p1[0] + p1[1];
    end
  end

  // candidate codewords and DMM part
  always_comb begin
    logic [CWW-1:0] u;
    logic [NMW-1:0] acc;
    int b;
    u = '0; acc = '0; b = 0;
    iv = 0;
    for (int p = 0; p < X1; p++)
      if (info_mask[p] && p < (1 << slog)) iv++;
    for (int j = 0; j < NC; j++) begin
      u = '0;
      b = 0;
      for (int p = 0; p < X1; p++)
        if (info_mask[p] && p < (1 << slog)) begin
          u[p] = (b < X0) ? j[b] : 1'b0;
          b++;
        end
      cwj[j] = enc16(u, int'(slog));
      acc = '0;
      for (int i = 0; i < NP; i++)
        acc = acc + theta[i][{cwj[j][2*i+1], cwj[j][2*i]}];
      nmj[j] = acc;
      vj[j]  = (j < (1 << iv));
    end
  end

  // ASort: direct or Min-2 per group, then MS_{2L-L}
  always_comb begin
    int gsh;
    logic [NMW-1:0] m1, m2;
    logic [CWW-1:0] c1, c2;
    gsh = 0; m1 = '1; m2 = '1; c1 = '0; c2 = '0;
    q = q_of(iv, L);
    for (int i = 0; i < 2*L; i++) begin
      s_in[i].pm   = PM_MAX;
      s_in[i].path = '0;
      s_in[i].flip = 1'b0;
      s_in[i].cw   = '0;
    end
    if ((1 << iv) <= 2 * L) begin
      for (int j = 0; j < 2*L; j++)
        if (j < NC && vj[j]) begin
          s_in[j].pm = PMW'(nmj[j]);
          s_in[j].cw = cwj[j];
        end
    end else begin
      gsh = iv - $clog2(q);            // log2 of the group size
      for (int g = 0; g < L; g++) begin
        m1 = '1; m2 = '1; c1 = '0; c2 = '0;
        for (int j = 0; j < NC; j++)
          if (vj[j] && g < q && (j >> gsh) == g) begin
            if (nmj[j] < m1) begin
              m2 = m1; c2 = c1; m1 = nmj[j]; c1 = cwj[j];
            end else if (nmj[j] < m2) begin
              m2 = nmj[j]; c2 = cwj[j];
            end
          end
        if (g < q) begin
          s_in[2*g].pm   = PMW'(m1); s_in[2*g].cw   = c1;
          s_in[2*g+1].pm = PMW'(m2); s_in[2*g+1].cw = c2;
        end
      end
    end
  end

  ms_sort #(.L(L)) u_ms (.din(s_in), .dout(s_out));

  always_comb begin
    cnt = 4'(q);
    for (int i = 0; i < L; i++) begin
      nm[i] = (i < q) ? NMW'(s_out[i].pm) : '1;
      cw[i] = s_out[i].cw;
    end
  end
endmodule
