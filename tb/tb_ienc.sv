// tb_ienc: feeds codewords x = u * B_N * F^(xn) (built by the matrix-form
// reference encoder) word by word into the re-encoder and checks that u
// comes out, N/T words on consecutive cycles starting the cycle after the
// last input word, with out_last on the final one. Three frames back to back.
// The N/T word rate checked follows the paper; sizes are own choices.
module tb_ienc;
  import polar_tb_pkg::*;
  localparam int N_LOG = 6, T = 8;
  localparam int N = 1 << N_LOG, NW = N / T;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0;
  logic [T-1:0] in_word = '0;
  logic out_valid, out_last;
  logic [T-1:0] out_word;
  int checks = 0, failures = 0;

  ienc #(.N_LOG(N_LOG), .T(T)) dut (.clk, .rst_n, .in_valid, .in_word, .out_valid, .out_last, .out_word);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bitq_t u, x;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 3; f++) begin
      u.delete();
      for (int i = 0; i < N; i++) u.push_back(1'($urandom));
      x = encode_ref(u, N_LOG);
      for (int w = 0; w < NW; w++) begin
        @(negedge clk);
        in_valid = 1;
        for (int b = 0; b < T; b++) in_word[b] = x[w*T+b];
      end
      @(negedge clk) in_valid = 0;
      for (int w = 0; w < NW; w++) begin
        automatic bit ok = 1;
        if (w > 0) @(negedge clk);
        checks++;
        if (!out_valid || out_last != (w == NW - 1)) begin
          failures++; $display("FAIL frame %0d word %0d: valid %0d last %0d", f, w, out_valid, out_last);
        end
        for (int b = 0; b < T; b++) if (out_word[b] != u[w*T+b]) ok = 0;
        checks++;
        if (!ok) begin failures++; $display("FAIL frame %0d word %0d: data", f, w); end
      end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("FAIL frame %0d: extra output word", f); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
