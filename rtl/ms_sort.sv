// ms_sort: metric sorter MS_{2L-L}. From 2L candidates it returns the L with
// the smallest path metrics, in ascending order.
//
// Built as a bitonic sorting network of compare-and-switch (CS) units, each
// one comparator and two 2-to-1 multiplexers, of which only the lower half
// of the outputs is used. Every candidate carries its payload (source path,
// flip bit, codeword) through the network. Equal metrics are not swapped,
// so the network is deterministic. Purely combinational.
//
// From the paper: MS_{2L-L} as a bitonic sequence based sorter (BBS) and its
// use in the CG and MBS selection. Own choice: a full bitonic sort network
// (rather than the paper's reference design) and the tie rule.
module ms_sort
  import polar_pkg::*;
#(
  parameter int L = 4
) (
  input  cand_t din  [2*L],
  output cand_t dout [L]
);
  localparam int NI = 2 * L;

  always_comb begin
    cand_t a [NI];
    cand_t tmp;
    int p;
    a = din;
    tmp = din[0];
    p = 0;
    for (int k = 2; k <= NI; k = k * 2)
      for (int j = k / 2; j > 0; j = j / 2)
        for (int i = 0; i < NI; i++) begin
          p = i ^ j;
          if (p > i) begin
            if (((i & k) == 0 && a[i].pm > a[p].pm) ||
                ((i & k) != 0 && a[i].pm < a[p].pm)) begin
              tmp  = a[i];
              a[i] = a[p];
              a[p] = tmp;
            end
          end
        end
    for (int i = 0; i < L; i++) dout[i] = a[i];
  end
endmodule
