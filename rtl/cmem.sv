// cmem: channel message memory (CMEM). Holds the N channel LLRs of one frame,
// QC bits each, written by the host one word of T LLRs per cycle.
//
// Read side: the two f/g computations at the root need the LLR pairs
// (2i, 2i+1), so one read returns 2T consecutive LLRs starting at LLR index
// 2*T*rk, sign extended to QM bits (entries beyond N read as 0). Reads are
// combinational (an asynchronous register file); writes take effect at the
// next clock edge.
//
// From the paper: its role and QC. Own choice: word organisation, ports.
module cmem #(
  parameter int N_LOG = 13,
  parameter int T     = 128,
  parameter int QC    = 5,
  parameter int QM    = 7
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [N_LOG-1:0]     waddr,           // word address (T LLRs)
  input  logic signed [QC-1:0] wdata [T],
  input  logic [N_LOG-1:0]     rk,              // read pair-word index
  output logic signed [QM-1:0] rdata [2*T]
);
  localparam int N = 1 << N_LOG;
  logic signed [QC-1:0] mem [N];

  always_ff @(posedge clk)
    if (we)
      for (int i = 0; i < T; i++)
        if (int'(waddr) * T + i < N) mem[int'(waddr) * T + i] <= wdata[i];

  always_comb begin
    int idx;
    idx = 0;
    for (int i = 0; i < 2*T; i++) begin
      idx = 2 * T * int'(rk) + i;
      rdata[i] = (idx < N) ? QM'(mem[idx]) : '0;
    end
  end
endmodule
