// hyb_psu: hybrid partial sum unit (Hyb-PSU) with its L computation units
// CU_l, implementing the index based partial sum computation (IPC, Alg. 3).
//
// For every physical path l and layer z = 1..n the unit keeps only the set
// C0_{l,z}: the codeword returned by the last left child at layer z. Which
// physical copy a decoding path uses at layer z is given by the index
// reference p_l[z]; when path a_l is copied to path l only these references
// move (p_l[z] <= p_{a_l}[z] for z <= t), never the partial sums.
//
// Operation for one leaf v at layer t whose last leaf index makes the
// partial sums land at layer t_e (t_e = t for a left child):
//   leaf_ld  : the L returned codewords (pCCode) are loaded into the data
//              load unit of stage t; with leaf_zero (rate-0 node, LZ = 0)
//              they read as all zero. With copy the references are copied
//              using the list indices a_l (pList) in the same cycle.
//   word k   : xout[l] is word k (T bits) of C_{l,t_e}, built on the fly
//              from the loaded codeword and the stored left siblings
//              C0_{p_l[z+1],z+1} for z = t_e..t-1 with
//              (c[2j], c[2j+1]) = (left[j] ^ right[j], right[j]).
//              Each stage touches one T-bit slice of its layer per word.
//   st       : stores the word into C0_{l,t_e} and sets p_l[t_e] = l. For
//              t_e >= M (register stages) the whole layer is stored with
//              the first word, as the paper computes it in one cycle; for
//              t_e < M (bit-memory stages) one T-bit word per cycle.
// xout feeds the g computation of the right sibling directly (PS in
// Fig. 5); with t_e = 0 it streams the decoded codeword x of path l.
//
// From the paper: IPC, the reference copy, C0/C1 split with C1 formed on
// the fly, register stages z >= M and T-bit memory words below, the word
// rate 2^(n-t_e)/T. Own choice: all layers of one path are held in one flat
// vector (layer z at offset 2^(n-z)); the PE/CN wiring of Fig. 10 is
// replaced by the equivalent bit recursion.
module hyb_psu #(
  parameter int N_LOG  = 13,
  parameter int L      = 4,
  parameter int T      = 128,
  parameter int M      = 3,
  parameter int MAX_R1 = 256
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              leaf_ld,
  input  logic              leaf_zero,
  input  logic [3:0]        leaf_t,
  input  logic [3:0]        leaf_te,
  input  logic [MAX_R1-1:0] beta [L],
  input  logic              copy,
  input  logic [2:0]        a    [L],
  input  logic [N_LOG-1:0]  k,
  input  logic              st,
  output logic [T-1:0]      xout [L]
);
  localparam int N = 1 << N_LOG;

  logic [N-1:0]      c0   [L];
  logic [2:0]        pref [L][N_LOG+1];
  logic [MAX_R1-1:0] lbuf [L];
  logic              lz;
  logic [3:0]        t_r, te_r;

  function automatic logic cbit(int l, int i);
    logic acc;
    int idx;
    acc = 1'b0;
    idx = i;
    for (int z = 0; z < N_LOG; z++)
      if (z >= int'(te_r) && z < int'(t_r)) begin
        if ((idx & 1) == 0)
          acc ^= c0[pref[l][z+1]][(1 << (N_LOG - z - 1)) + (idx >> 1)];
        idx = idx >> 1;
      end
    if (!lz && idx < MAX_R1) acc ^= lbuf[l][idx];
    return acc;
  endfunction

  always_comb begin
    int i;
    i = 0;
    for (int l = 0; l < L; l++)
      for (int b = 0; b < T; b++) begin
        i = int'(k) * T + b;
        xout[l][b] = (i < (N >> te_r)) ? cbit(l, i) : 1'b0;
      end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      lz <= 1'b1; t_r <= '0; te_r <= '0;
      for (int l = 0; l < L; l++) begin
        c0[l] <= '0; lbuf[l] <= '0;
        for (int z = 0; z <= N_LOG; z++) pref[l][z] <= 3'(l);
      end
    end else begin
      if (leaf_ld) begin
        lz <= leaf_zero; t_r <= leaf_t; te_r <= leaf_te;
        for (int l = 0; l < L; l++) lbuf[l] <= beta[l];
        if (copy)
          for (int l = 0; l < L; l++)
            for (int z = 0; z <= N_LOG; z++)
              if (z <= int'(leaf_t)) pref[l][z] <= pref[a[l]][z];
      end
      if (st && te_r != 0) begin
        for (int l = 0; l < L; l++) begin
          pref[l][te_r] <= 3'(l);
          if (int'(te_r) >= M) begin
            if (k == 0)
              for (int i = 0; i < (N >> te_r); i++)
                c0[l][(N >> te_r) + i] <= cbit(l, i);
          end else begin
            for (int b = 0; b < T; b++)
              if (int'(k) * T + b < (N >> te_r))
                c0[l][(N >> te_r) + int'(k) * T + b] <= xout[l][b];
          end
        end
      end
    end
endmodule
