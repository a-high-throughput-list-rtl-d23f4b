// tb_polar_list_decoder: end-to-end test of the list decoder at a reduced
// size (N = 256, L = 4, T = 8).
//
// A (256, 128) code (96 data bits + CRC-32) is built with the Bhattacharyya
// construction. Each frame draws a random data word, encodes it with an
// independent matrix-form encoder, sends it over BPSK with Gaussian noise,
// quantises the LLRs to 5 bits, loads channel LLRs, frozen mask and the
// node program, and decodes. Checks per frame:
//   * the decode time equals the count derived from the program;
//   * when the decoder reports a CRC pass, the output word equals the sent
//     word; noiseless frames must pass with the first candidate;
//   * over all frames at least half decode correctly;
//   * every candidate path handed to the CRC check is a codeword (its data
//     word is zero at every frozen position).
// Half of the frames use X_th = 8 so that large rate-1 nodes are decoded by
// hard decision. Every mechanism (f and g steps, rate-0, hard-decision,
// CG with one and with several LLR words, FP with q = 2 and q = 4, path
// copies, Hyb-PSU stores to register and memory stages, CRC retry of a
// later candidate, and a frame rescued by a path other than the best one)
// is counted and must occur at least once.
// The cycle rules checked follow the paper; the reduced size is own choice.

module tb_polar_list_decoder;
  import polar_pkg::*;
  import polar_tb_pkg::*;

  localparam int N_LOG = 8, L = 4, T = 8, M = 3, MAX_R1 = 64, IRD = 256;
  localparam int N = 1 << N_LOG, NW = N / T, TL = $clog2(T);
  localparam int K = 128, FRAMES = 60;

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

  polar_list_decoder #(.N_LOG(N_LOG), .L(L), .T(T), .M(M), .MAX_R1(MAX_R1), .IRD(IRD)) u_dut (
    .clk, .rst_n, .cm_we, .cm_addr, .cm_data, .fz_we, .fz_addr, .fz_data,
    .ir_we, .ir_addr, .ir_data, .start, .busy, .done, .crc_ok, .sel_path,
    .cycles, .out_addr, .out_data);

  // state encodings of the controller (position in its state list)
  localparam int ST_LEAF = 3, ST_FEED = 4;

  int checks = 0, failures = 0;
  int n_f = 0, n_g = 0, n_r0 = 0, n_r1h = 0, n_cg1 = 0, n_cgm = 0, n_fp2 = 0,
      n_fp4 = 0, n_copy = 0, n_st_reg = 0, n_st_bm = 0, n_retry = 0;
  int frozen_err = 0, n_rescue = 0;
  bit info_a [N];

  // every candidate path must be a codeword: its data word, as it leaves
  // the re-encoder, is zero at all frozen positions
  always @(posedge clk) if (rst_n && u_dut.ie_ov)
    for (int b = 0; b < T; b++)
      if (u_dut.ie_ow[b] && !info_a[u_dut.ecnt * T + b]) frozen_err++;

  // mechanism counters, observed inside the design
  always @(posedge clk) if (rst_n) begin
    if (u_dut.llr_cyc && u_dut.k == 0) begin
      if (u_dut.ins.is_right) n_g++; else n_f++;
    end
    if (int'(u_dut.st) == ST_LEAF) n_r0++;
    if (u_dut.commit_hd) n_r1h++;
    if (u_dut.commit && u_dut.ins.kind == K_R1CG) begin
      if (u_dut.multi) n_cgm++; else n_cg1++;
    end
    if (u_dut.commit && u_dut.ins.kind == K_FP) begin
      if (u_dut.u_ppu.g2_cnt[0] == 2) n_fp2++;
      if (u_dut.u_ppu.g2_cnt[0] == 4) n_fp4++;
    end
    if (u_dut.leaf_ld && u_dut.leaf_copy)
      for (int l = 0; l < L; l++) if (int'(u_dut.a_q[l]) != l) n_copy++;
    if (u_dut.llr_cyc && u_dut.is_g && u_dut.k == 0) begin
      if (int'(u_dut.u_psu.te_r) >= M) n_st_reg++; else n_st_bm++;
    end
    if (int'(u_dut.st) == ST_FEED && u_dut.k == 0 && (u_dut.cand != 0 || u_dut.retry)) n_retry++;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic need(string what, int cnt);
    checks++;
    if (cnt == 0) begin failures++; $display("FAIL: mechanism %s never happened", what); end
    else $display("mechanism %-10s : %0d", what, cnt);
  endtask

  initial begin
    bitq_t info, u, x;
    prog_t prog;
    int good = 0;
    for (int i = 0; i < T; i++) cm_data[i] = '0;
    info = construct(N_LOG, K, 0.5);
    foreach (info[i]) info_a[i] = info[i];
    repeat (3) @(posedge clk);
    rst_n = 1;
    // frozen mask
    for (int w = 0; w < NW; w++) begin
      @(negedge clk);
      fz_we = 1; fz_addr = N_LOG'(w);
      for (int b = 0; b < T; b++) fz_data[b] = !info[w*T + b];
    end
    @(negedge clk) fz_we = 0;
    for (int f = 0; f < FRAMES; f++) begin
      real sigma;
      int exp_dec, tries;
      bit ok_word;
      int xth;
      xth = (f % 2) ? 8 : MAX_R1;
      sigma = (f < 2) ? 0.0 : (f < 24) ? 0.55 + 0.02 * f : 0.85 + 0.003 * (f - 24);
      prog = make_program(info, N_LOG, 8, 16, xth, MAX_R1);
      u = make_u(info);
      x = encode_ref(u, N_LOG);
      foreach (prog[p]) begin
        @(negedge clk);
        ir_we = 1; ir_addr = ($clog2(IRD))'(p); ir_data = prog[p];
      end
      for (int w = 0; w < NW; w++) begin
        @(negedge clk);
        ir_we = 0; cm_we = 1; cm_addr = N_LOG'(w);
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
      if (crc_ok) begin
        checks++;
        if (!ok_word) begin failures++; $display("FAIL frame %0d: CRC passed on a wrong word", f); end
      end
      if (sigma == 0.0) begin
        checks++;
        if (!(crc_ok && sel_path == 0 && ok_word)) begin
          failures++; $display("FAIL frame %0d: noiseless frame not decoded", f);
        end
      end
      if (ok_word) good++;
      if (ok_word && crc_ok && sel_path != 0) n_rescue++;
      $display("frame %0d sigma %.2f xth %0d: %0d instr, %0d cycles, crc_ok %0d path %0d correct %0d",
               f, sigma, xth, prog.size(), cycles, crc_ok, sel_path, ok_word);
    end
    checks++;
    if (good * 2 < FRAMES) begin failures++; $display("FAIL: only %0d of %0d frames correct", good, FRAMES); end
    checks++;
    if (frozen_err != 0) begin failures++; $display("FAIL: %0d frozen bits set in candidate paths", frozen_err); end
    need("f", n_f);       need("g", n_g);       need("rate0", n_r0);
    need("rate1_hd", n_r1h); need("cg_1word", n_cg1); need("cg_multi", n_cgm);
    need("fp_q2", n_fp2); need("fp_q4", n_fp4); need("path_copy", n_copy);
    need("st_reg", n_st_reg); need("st_bm", n_st_bm); need("crc_retry", n_retry);
    need("list_rescue", n_rescue);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
