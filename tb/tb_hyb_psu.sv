// tb_hyb_psu: drives the hybrid partial sum unit the way the decoder does
// for a randomly pruned code tree: for every leaf in depth-first order it
// loads one returned codeword per path (or the all-zero word of a rate-0
// leaf), with random path copies, then streams the partial sums of layer
// t_e word by word while storing them. A reference keeps, per path, the
// codeword of every finished node in full and copies all of it on a path
// copy; the unit, which keeps only left-sibling sets and index references,
// must produce the same words. On the last leaf the complete codeword of
// every path is compared. Several layers fall in the register stages
// (t_e >= M) and several in the word-memory stages.
// The reference model follows the paper's partial-sum rule; sizes are own choices.
module tb_hyb_psu;
  import polar_pkg::*;
  import polar_tb_pkg::*;
  localparam int N_LOG = 6, L = 4, T = 4, M = 3, MAX_R1 = 16;
  localparam int N = 1 << N_LOG;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic leaf_ld = 0, leaf_zero = 0, copy = 0, st = 0;
  logic [3:0] leaf_t = '0, leaf_te = '0;
  logic [MAX_R1-1:0] beta [L];
  logic [2:0] a [L];
  logic [N_LOG-1:0] k = '0;
  logic [T-1:0] xout [L];
  bit cwr [L][N_LOG+1][N];       // reference node codewords per layer
  bit tmp [L][N_LOG+1][N];
  int checks = 0, failures = 0, n_reg = 0, n_mem = 0;

  hyb_psu #(.N_LOG(N_LOG), .L(L), .T(T), .M(M), .MAX_R1(MAX_R1)) dut (
    .clk, .rst_n, .leaf_ld, .leaf_zero, .leaf_t, .leaf_te, .beta, .copy, .a, .k, .st, .xout);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bitq_t info;
    prog_t prog;
    for (int l = 0; l < L; l++) begin beta[l] = '0; a[l] = 3'(l); end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 20; f++) begin
      int st_t [$], st_j [$];
      info.delete();
      for (int i = 0; i < N; i++) info.push_back(($urandom % 2) == 1);
      prog = make_program(info, N_LOG, 4, 8, MAX_R1, MAX_R1);
      st_t.push_back(1); st_j.push_back(1); st_t.push_back(1); st_j.push_back(0);
      foreach (prog[p]) begin
        int t, j, sz, te, jj;
        t = st_t.pop_back(); j = st_j.pop_back();
        if (prog[p].kind == K_INT) begin
          st_t.push_back(t + 1); st_j.push_back(2 * j + 1);
          st_t.push_back(t + 1); st_j.push_back(2 * j);
          continue;
        end
        sz = 1 << (N_LOG - t);
        te = int'(prog[p].te);
        // drive the leaf
        @(negedge clk);
        leaf_ld = 1; leaf_t = 4'(t); leaf_te = 4'(te);
        leaf_zero = (prog[p].kind == K_R0);
        copy = ($urandom % 2) == 1;
        for (int l = 0; l < L; l++) begin
          beta[l] = MAX_R1'($urandom) & ((MAX_R1'(1) << sz) - 1'b1);
          a[l] = copy ? 3'($urandom % L) : 3'(l);
        end
        // reference: copy paths, write leaf, combine up to layer te
        tmp = cwr;
        for (int l = 0; l < L; l++) begin
          if (copy) cwr[l] = tmp[a[l]];
          for (int i = 0; i < sz; i++) cwr[l][t][j*sz+i] = leaf_zero ? 1'b0 : beta[l][i];
          jj = j;
          for (int z = t; z > te; z--) begin
            automatic int s = 1 << (N_LOG - z);
            automatic int pj = jj >> 1;
            for (int i = 0; i < s; i++) begin
              cwr[l][z-1][pj*2*s + 2*i]     = cwr[l][z][(jj-1)*s + i] ^ cwr[l][z][jj*s + i];
              cwr[l][z-1][pj*2*s + 2*i + 1] = cwr[l][z][jj*s + i];
            end
            jj = pj;
          end
        end
        @(negedge clk);
        leaf_ld = 0; copy = 0;
        // stream layer te (the g step of the right sibling, or the output)
        begin
          int s, nw, jt;
          s = N >> te;
          nw = (s + T - 1) / T;
          jt = j >> (t - te);
          if (te >= M) n_reg++; else if (te > 0) n_mem++;
          for (int w = 0; w < nw; w++) begin
            k = N_LOG'(w); st = (te != 0);
            #1;
            for (int l = 0; l < L; l++) begin
              automatic bit ok = 1;
              for (int b = 0; b < T; b++)
                if (w*T + b < s && xout[l][b] != cwr[l][te][jt*s + w*T + b]) ok = 0;
              checks++;
              if (!ok) begin
                failures++;
                if (failures < 10) $display("FAIL frame %0d leaf %0d (t=%0d te=%0d) path %0d word %0d", f, p, t, te, l, w);
              end
            end
            @(negedge clk);
          end
          st = 0; k = '0;
        end
      end
    end
    checks++;
    if (n_reg == 0 || n_mem == 0) begin failures++; $display("FAIL: register stores %0d, memory stores %0d", n_reg, n_mem); end
    $display("stores to register stages %0d, to memory stages %0d", n_reg, n_mem);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
