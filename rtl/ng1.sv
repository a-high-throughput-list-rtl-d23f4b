// ng1: node metric generation unit of type I (NG-I_l) for a rate-1 node,
// decoding path l (CG algorithm, Alg. 1, Fig. 8).
//
// For a rate-1 node the best candidate codeword is the hard decision h(alpha)
// with node metric 0; the second best flips the bit k_M of the smallest
// |alpha|, with node metric NM^1 = |alpha[k_M]|. The node's LLRs arrive T per
// cycle (wk = word index, nv = valid LLRs in the word, last = final word).
// Min-1 finds the smallest magnitude mLLR and its index mIdx of one word.
// For a node of at most T LLRs (multi = 0) the outputs are taken straight
// from Min-1 and the input word, in the cycle of the word (o_valid with it).
// For a longer node (multi = 1) a comparator keeps the running minimum in
// mLR/mIR, the hard decisions are collected in HCM0 and copied to HCM1 with
// the last word; the outputs then come from mLR, mIR and HCM1 one cycle
// after the last word. Ties keep the lowest index.
//
// From the paper: Min-1, mLR, mIR, cmp, HCM0, HCM1 and the output muxes of
// Fig. 8. Own choice: the o_valid timing and the tie rule.
module ng1 #(
  parameter int T      = 128,
  parameter int QM     = 7,
  parameter int MAX_R1 = 256
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      valid,
  input  logic                      last,
  input  logic                      multi,
  input  logic [7:0]                wk,
  input  logic [$clog2(T):0]        nv,
  input  logic signed [QM-1:0]      llr [T],
  output logic                      o_valid,
  output logic [QM-2:0]             nm1,
  output logic [$clog2(MAX_R1)-1:0] kidx,
  output logic [MAX_R1-1:0]         c0
);
  localparam int KW = $clog2(MAX_R1);
  logic [QM-2:0]   mllr, mlr;
  logic [KW-1:0]   midx, mir;
  logic [T-1:0]    hd;
  logic [MAX_R1-1:0] hcm0, hcm1;
  logic            en, done_q;

  // Min-1 over one word, and the word's hard decisions
  always_comb begin
    logic [QM-2:0] mag;
    mag  = '0;
    mllr = '1;
    midx = '0;
    for (int i = 0; i < T; i++) begin
      mag   = (QM-1)'(llr[i] < 0 ? -llr[i] : llr[i]);
      hd[i] = (i < int'(nv)) ? llr[i][QM-1] : 1'b0;
      if (i < int'(nv) && mag < mllr) begin
        mllr = mag;
        midx = KW'(int'(wk) * T + i);
      end
    end
  end

  assign en = (wk == 0) || (mllr < mlr);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      mlr <= '1; mir <= '0; hcm0 <= '0; hcm1 <= '0; done_q <= 1'b0;
    end else begin
      done_q <= valid && last && multi;
      if (valid) begin
        if (en) begin mlr <= mllr; mir <= midx; end
        for (int i = 0; i < T; i++)
          if (int'(wk) * T + i < MAX_R1) hcm0[int'(wk) * T + i] <= hd[i];
        if (last) begin
          hcm1 <= hcm0;
          for (int i = 0; i < T; i++)
            if (int'(wk) * T + i < MAX_R1) hcm1[int'(wk) * T + i] <= hd[i];
        end
      end
    end

  always_comb begin
    o_valid = multi ? done_q : (valid && last);
    nm1     = multi ? mlr  : mllr;
    kidx    = multi ? mir  : midx;
    c0      = multi ? hcm1 : MAX_R1'(hd);
  end
endmodule
