// tb_ng2: node metric generation and first sorting stage for FP nodes.
// Random FP nodes (size 4, 8 or 16, 1..8 information bits) with random LLRs.
// A reference enumerates every candidate codeword (matrix-form encoder) and
// its penalty metric (sum of |LLR| where the code bit disagrees with the
// sign). Checks: the number of kept candidates equals q(I_v, L) of the
// paper's Table 3 (limited to 2^I_v); the first output is the best
// candidate's metric; every output is a codeword of the node with the
// metric it claims; metrics come out in ascending order; when all
// candidates fit the sorter (2^I_v <= 2L) the outputs are the exact best.
// Only the first q outputs are examined; the rest are unused padding.
// The metric and q values follow the paper; the tie rule is this design's own.
module tb_ng2;
  import polar_pkg::*;
  import polar_tb_pkg::*;
  localparam int L = 4, QM = 7, X0 = 8, X1 = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic signed [QM-1:0] llr [X1];
  logic [2:0] slog = 3'd4;
  logic [X1-1:0] info_mask = '0;
  logic [3:0] cnt;
  logic [NMW-1:0] nm [L];
  logic [CWW-1:0] cw [L];
  int checks = 0, failures = 0;

  ng2 #(.L(L), .QM(QM), .X0(X0), .X1(X1)) dut (.llr, .slog, .info_mask, .cnt, .nm, .cw);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int metric(logic [CWW-1:0] c, int sz);
    int m = 0;
    for (int i = 0; i < sz; i++)
      if (c[i] != (llr[i] < 0)) m += (llr[i] < 0) ? -int'(llr[i]) : int'(llr[i]);
    return m;
  endfunction

  function automatic logic [CWW-1:0] ref_enc(logic [CWW-1:0] u, int s);
    bitq_t q, x;
    logic [CWW-1:0] r = '0;
    for (int i = 0; i < (1 << s); i++) q.push_back(u[i]);
    x = encode_ref(q, s);
    for (int i = 0; i < (1 << s); i++) r[i] = x[i];
    return r;
  endfunction

  initial begin
    for (int i = 0; i < X1; i++) llr[i] = '0;
    for (int v = 0; v < 400; v++) begin
      int s, sz, iv, q, best;
      int all [$];
      @(negedge clk);
      all.delete();
      s = 2 + v % 3; sz = 1 << s;
      iv = 1 + $urandom % ((sz - 1 < X0) ? sz - 1 : X0);
      info_mask = '0;
      for (int c = 0; c < iv; c++) begin
        int p;
        do p = $urandom % sz; while (info_mask[p]);
        info_mask[p] = 1'b1;
      end
      slog = 3'(s);
      for (int i = 0; i < X1; i++) llr[i] = QM'((i < sz) ? int'($urandom % 63) - 31 : 0);
      // all candidates
      for (int j = 0; j < (1 << iv); j++) begin
        automatic logic [CWW-1:0] u = '0;
        automatic int b = 0;
        for (int p = 0; p < sz; p++) if (info_mask[p]) begin u[p] = j[b]; b++; end
        all.push_back(metric(ref_enc(u, s), sz));
      end
      all.sort();
      q = q_of(iv, L);
      #1;
      checks++;
      if (int'(cnt) != q) begin failures++; $display("FAIL vec %0d iv %0d: q %0d want %0d", v, iv, cnt, q); end
      checks++;
      if (int'(nm[0]) != all[0]) begin failures++; $display("FAIL vec %0d: best %0d want %0d", v, nm[0], all[0]); end
      for (int l = 0; l < L && l < q; l++) begin
        logic [CWW-1:0] uu;
        automatic bit okc = 1;
        uu = ref_enc(cw[l], s);
        for (int p = 0; p < sz; p++) if (!info_mask[p] && uu[p]) okc = 0;
        checks++;
        if (!okc || metric(cw[l], sz) != int'(nm[l])) begin
          failures++; $display("FAIL vec %0d out %0d: codeword %0d metric %0d/%0d", v, l, okc, nm[l], metric(cw[l], sz));
        end
        if (l > 0) begin
          checks++;
          if (nm[l] < nm[l-1]) begin failures++; $display("FAIL vec %0d: not sorted", v); end
        end
        if ((1 << iv) <= 2 * L) begin
          checks++;
          if (int'(nm[l]) != all[l]) begin failures++; $display("FAIL vec %0d out %0d: %0d want %0d", v, l, nm[l], all[l]); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
