// pua: one processing unit array (PUA_l) of T processing units for decoding
// path l.
//
// Every cycle each PU i takes the LLR pair (a[2i], a[2i+1]) of the parent
// node and produces one LLR of the child node:
//   f (left child):  sign(a)*sign(b)*min(|a|,|b|)          (min-sum, Eq. 6)
//   g (right child): a*(1-2*ps[i]) + b                      (Eq. 7)
// where ps[i] is the partial sum of the left sibling. The result is
// saturated symmetrically to out_w bits, the storage width of the child's
// layer under the memory efficient quantisation (MEQ), and returned sign
// extended to QM bits. Purely combinational: the decoder registers the
// result in the internal LLR memory.
//
// From the paper: the f/g functions and T PUs per path. Own choice: symmetric
// saturation (+-(2^(w-1)-1)) so that magnitudes fit in w-1 bits.
module pua #(
  parameter int T  = 128,
  parameter int QM = 7
) (
  input  logic                 is_g,
  input  logic [3:0]           out_w,           // saturation width, <= QM
  input  logic signed [QM-1:0] a  [2*T],
  input  logic [T-1:0]         ps,
  output logic signed [QM-1:0] y  [T]
);
  always_comb begin
    logic signed [QM+1:0] x0, x1, r, lim;
    logic [QM:0] m0, m1;
    x0 = '0; x1 = '0; r = '0; lim = '0; m0 = '0; m1 = '0;
    for (int i = 0; i < T; i++) begin
      x0 = (QM+2)'(a[2*i]);
      x1 = (QM+2)'(a[2*i+1]);
      if (is_g) begin
        r = (ps[i] ? -x0 : x0) + x1;
      end else begin
        m0 = (QM+1)'(x0 < 0 ? -x0 : x0);
        m1 = (QM+1)'(x1 < 0 ? -x1 : x1);
        r  = (QM+2)'(m0 < m1 ? m0 : m1);
        if ((x0 < 0) != (x1 < 0)) r = -r;
      end
      lim = (QM+2)'((1 << (out_w - 1)) - 1);
      if (r > lim)       r = lim;
      else if (r < -lim) r = -lim;
      y[i] = QM'(r);
    end
  end
endmodule
