// crcc: partial parallel CRC checker (CRCC). Consumes the data word u as
// T-bit words together with the matching words of the frozen-bit mask and
// runs the CRC over the information bits only, T bit positions per cycle
// (frozen positions are skipped). The check sum is appended to the
// information bits, so a correct word leaves remainder zero: ok is
// valid in the cycle after the word flagged last.
//
// The paper gives the role of the unit, a CRC of length h (CRC-32 in its
// simulations) and the N/T latency. Own choices: the CRC-32 generator
// 0x04C11DB7, zero initial value, no final inversion, bit order of
// increasing u index, MSB of the register shifted out first.
module crcc #(
  parameter int T    = 128,
  parameter int H    = 32,
  parameter logic [H-1:0] POLY = 32'h04C1_1DB7
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         valid,
  input  logic         last,
  input  logic [T-1:0] word,
  input  logic [T-1:0] frozen,
  output logic         done,
  output logic         ok
);
  logic [H-1:0] crc, nxt;

  always_comb begin
    logic fb;
    fb  = 1'b0;
    nxt = start ? '0 : crc;
    for (int b = 0; b < T; b++)
      if (!frozen[b]) begin
        fb  = nxt[H-1] ^ word[b];
        nxt = {nxt[H-2:0], 1'b0} ^ (fb ? POLY : '0);
      end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      crc <= '0; done <= 1'b0; ok <= 1'b0;
    end else begin
      done <= valid && last;
      if (valid) begin
        crc <= nxt;
        if (last) ok <= (nxt == '0);
      end else if (start) crc <= '0;
    end
endmodule
