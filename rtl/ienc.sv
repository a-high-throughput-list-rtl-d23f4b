// ienc: re-encoder (IEnc). The decoder produces the codeword x of a path;
// the CRC is defined on the data word u, so u = x * (B_N F^n)^-1 must be
// recovered. The tree transform is its own inverse, so IEnc applies the
// same transform the encoder uses.
//
// x arrives as N/T words of T bits (in_valid, word index implied by order).
// When the last word is in, u leaves as N/T words of T bits on
// consecutive cycles (out_valid, out_last). A new frame may start when
// out_last has been given. Latency: N/T cycles in, N/T cycles out, which
// gives the 2N/T of the paper's N_C together with the CRC that consumes the
// output stream in parallel.
//
// From the paper: its role and the N/T word rate. Own choice: a frame
// buffer followed by a fully parallel transform instead of the cited
// pipelined encoder.
module ienc #(
  parameter int N_LOG = 13,
  parameter int T     = 128
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [T-1:0] in_word,
  output logic         out_valid,
  output logic         out_last,
  output logic [T-1:0] out_word
);
  localparam int N  = 1 << N_LOG;
  localparam int NW = (N + T - 1) / T;

  logic [N-1:0] xbuf, ubits;
  logic [$clog2(NW+1)-1:0] cnt;
  logic emit;

  always_comb begin
    logic [N-1:0] cur, nxt;
    cur = xbuf;
    for (int lv = 0; lv < N_LOG; lv++) begin
      nxt = cur;
      for (int o = 0; o < N; o += (2 << lv))
        for (int i = 0; i < (1 << lv); i++) begin
          nxt[o + 2*i]     = cur[o + i] ^ cur[o + (1 << lv) + i];
          nxt[o + 2*i + 1] = cur[o + (1 << lv) + i];
        end
      cur = nxt;
    end
    ubits = cur;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      xbuf <= '0; cnt <= '0; emit <= 1'b0;
    end else if (!emit) begin
      if (in_valid) begin
        for (int b = 0; b < T; b++)
          if (int'(cnt) * T + b < N) xbuf[int'(cnt) * T + b] <= in_word[b];
        if (int'(cnt) == NW - 1) begin cnt <= '0; emit <= 1'b1; end
        else cnt <= cnt + 1'b1;
      end
    end else begin
      if (int'(cnt) == NW - 1) begin cnt <= '0; emit <= 1'b0; end
      else cnt <= cnt + 1'b1;
    end

  always_comb begin
    out_valid = emit;
    out_last  = emit && int'(cnt) == NW - 1;
    for (int b = 0; b < T; b++)
      out_word[b] = (int'(cnt) * T + b < N) ? ubits[int'(cnt) * T + b] : 1'b0;
  end
endmodule
