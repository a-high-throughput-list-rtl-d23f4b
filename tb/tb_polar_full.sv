// tb_polar_full: the decoder at its default size (N = 8192, L = 4, T = 128,
// MAX_R1 = 256) decoding the (8192, 4096) code with CRC-32, every rate-1
// node through the CG path (X_th = 256). One noiseless frame and one frame
// with Gaussian noise (sigma = 0.7). Checks: decode time equals the count
// derived from the node program, the CRC passes and the data word is right.
// The code size and list size follow the paper; the construction is own choice.
module tb_polar_full;
  import polar_pkg::*;
  import polar_tb_pkg::*;

  localparam int N_LOG = 13, T = 128, L = 4, MAX_R1 = 256, IRD = 2048;
  localparam int N = 1 << N_LOG, NW = N / T, TL = $clog2(T);
  localparam int K = 4096, FRAMES = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cm_we = 0, fz_we = 0, ir_we = 0, start = 0;
  logic [N_LOG-1:0] cm_addr = '0, fz_addr = '0, out_addr = '0;
  logic signed [4:0] cm_data [T];
  logic [T-1:0] fz_data = '0, out_data;
  logic [$clog2(IRD)-1:0] ir_addr = '0;
  instr_t ir_data = '0;
  logic busy, done, crc_ok;
  logic [2:0] sel_path;
  logic [31:0] cycles;

  polar_list_decoder u_dut (
    .clk, .rst_n, .cm_we, .cm_addr, .cm_data, .fz_we, .fz_addr, .fz_data,
    .ir_we, .ir_addr, .ir_data, .start, .busy, .done, .crc_ok, .sel_path,
    .cycles, .out_addr, .out_data);

  int checks = 0, failures = 0;

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bitq_t info, u, x;
    prog_t prog;
    for (int i = 0; i < T; i++) cm_data[i] = '0;
    info = construct(N_LOG, K, 0.5);
    prog = make_program(info, N_LOG, 8, 16, MAX_R1, MAX_R1);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < NW; w++) begin
      @(negedge clk);
      fz_we = 1; fz_addr = N_LOG'(w);
      for (int b = 0; b < T; b++) fz_data[b] = !info[w*T + b];
    end
    @(negedge clk) fz_we = 0;
    foreach (prog[p]) begin
      @(negedge clk);
      ir_we = 1; ir_addr = ($clog2(IRD))'(p); ir_data = prog[p];
    end
    @(negedge clk) ir_we = 0;
    for (int f = 0; f < FRAMES; f++) begin
      real sigma;
      int exp_dec, tries;
      bit ok_word;
      sigma = (f == 0) ? 0.0 : 0.7;
      u = make_u(info);
      x = encode_fast(u, N_LOG);
      for (int w = 0; w < NW; w++) begin
        @(negedge clk);
        cm_we = 1; cm_addr = N_LOG'(w);
        for (int b = 0; b < T; b++) begin
          real y;
          int q;
          y = (x[w*T+b] ? -1.0 : 1.0) + sigma * gauss();
          q = $rtoi(y * 4.0 + (y >= 0 ? 0.5 : -0.5));
          if (q > 15) q = 15; else if (q < -15) q = -15;
          cm_data[b] = 5'(q);
        end
      end
      @(negedge clk) begin cm_we = 0; start = 1; end
      @(negedge clk) start = 0;
      wait (done);
      @(negedge clk);
      ok_word = 1;
      for (int w = 0; w < NW; w++) begin
        out_addr = N_LOG'(w);
        #1;
        for (int b = 0; b < T; b++) if (out_data[b] !== u[w*T+b]) ok_word = 0;
      end
      tries = crc_ok ? int'(sel_path) + 1 : L + 1;
      exp_dec = expected_cycles(prog, N_LOG, TL, L) + tries * (2 * NW + 1);
      checks++;
      if (int'(cycles) != exp_dec) begin
        failures++; $display("FAIL frame %0d: %0d cycles, expected %0d", f, cycles, exp_dec);
      end
      checks++;
      if (!(crc_ok && ok_word)) begin failures++; $display("FAIL frame %0d: not decoded", f); end
      $display("frame %0d sigma %.2f: %0d nodes, %0d cycles, crc_ok %0d path %0d correct %0d",
               f, sigma, prog.size(), cycles, crc_ok, sel_path, ok_word);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
