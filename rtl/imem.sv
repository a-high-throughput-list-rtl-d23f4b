// imem: internal LLR message memory (IMEM) with the switch network (SN).
//
// Stores, for every physical path p and layer t = 1..n, the 2^(n-t) LLRs of
// the node last activated at layer t (matrix P_{p,t}). Each layer is its own
// array and is stored with its MEQ width: Qc bits for t <= T1, Qc+1 for
// t <= T2 and Qm above, which is where the memory saving of the memory
// efficient quantisation comes from.
//
// Write: the T LLRs produced by PUA_l in one cycle go to physical path l,
// layer wlayer, LLRs [T*wk, T*wk+T). Read: logical path l reads layer rlayer
// of physical path rsel[l] (the switch network, steered by the list index
// references), 2T LLRs starting at 2*T*rk, sign extended to QM bits. Reads
// are combinational, writes land at the clock edge.
//
// From the paper: P_{l,t} sizes, MEQ widths and the SN's place in Fig. 5.
// Own choice: register-array storage (a compiler memory would replace it)
// and reading through path indices instead of copying LLRs on a path copy.
module imem #(
  parameter int N_LOG = 13,
  parameter int L     = 4,
  parameter int T     = 128,
  parameter int QC    = 5,
  parameter int QM    = 7,
  parameter int T1    = 3,
  parameter int T2    = 4
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [3:0]           wlayer,
  input  logic [N_LOG-1:0]     wk,
  input  logic signed [QM-1:0] wdata [L][T],
  input  logic [3:0]           rlayer,
  input  logic [N_LOG-1:0]     rk,
  input  logic [2:0]           rsel  [L],
  output logic signed [QM-1:0] rdata [L][2*T]
);
  logic signed [QM-1:0] lay_rd [1:N_LOG][L][2*T];

  for (genvar z = 1; z <= N_LOG; z++) begin : g_layer
    localparam int SZ = 1 << (N_LOG - z);
    localparam int W  = polar_pkg::meq_width(z, QC, QM, T1, T2);
    logic signed [W-1:0] mem [L][SZ];

    always_ff @(posedge clk)
      if (we && int'(wlayer) == z)
        for (int l = 0; l < L; l++)
          for (int i = 0; i < T; i++)
            if (int'(wk) * T + i < SZ) mem[l][int'(wk) * T + i] <= W'(wdata[l][i]);

    always_comb begin
      int idx;
      idx = 0;
      for (int l = 0; l < L; l++)
        for (int i = 0; i < 2*T; i++) begin
          idx = 2 * T * int'(rk) + i;
          lay_rd[z][l][i] = (idx < SZ) ? QM'(mem[rsel[l]][idx]) : '0;
        end
    end
  end

  always_comb begin
    for (int l = 0; l < L; l++)
      for (int i = 0; i < 2*T; i++) rdata[l][i] = '0;
    for (int z = 1; z <= N_LOG; z++)
      if (int'(rlayer) == z) rdata = lay_rd[z];
  end
endmodule
