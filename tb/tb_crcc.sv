// tb_crcc: builds words whose information bits (positions not marked
// frozen) carry a random message followed by its CRC-32, streams them word
// by word into the CRC checker and expects ok = 1 with done one cycle after
// the last word. Frames with one information bit flipped must give ok = 0;
// flipping a frozen position must not matter.
// The CRC length follows the paper (CRC-32); polynomial and bit order are own choices.
module tb_crcc;
  import polar_tb_pkg::*;
  localparam int T = 16, NW = 16, N = T * NW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, valid = 0, last = 0;
  logic [T-1:0] word = '0, frozen = '0;
  logic done, ok;
  int checks = 0, failures = 0;

  crcc #(.T(T)) dut (.clk, .rst_n, .start, .valid, .last, .word, .frozen, .done, .ok);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bitq_t info, u;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 30; f++) begin
      int mode, pos;
      bit want;
      info.delete();
      for (int i = 0; i < N; i++) info.push_back(($urandom % 3) != 0);
      u = make_u(info);
      mode = f % 3;            // 0 clean, 1 info bit flipped, 2 frozen bit flipped
      do pos = $urandom % N; while ((mode == 1 && !info[pos]) || (mode == 2 && info[pos]));
      if (mode != 0) u[pos] = !u[pos];
      want = (mode != 1);
      for (int w = 0; w < NW; w++) begin
        @(negedge clk);
        start = (w == 0); valid = 1; last = (w == NW - 1);
        for (int b = 0; b < T; b++) begin word[b] = u[w*T+b]; frozen[b] = !info[w*T+b]; end
      end
      @(negedge clk) begin start = 0; valid = 0; last = 0; end
      checks++;
      if (!done || ok != want) begin
        failures++; $display("FAIL frame %0d mode %0d: done %0d ok %0d", f, mode, done, ok);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
