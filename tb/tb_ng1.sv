// tb_ng1: node metric generation for rate-1 nodes. For random LLR vectors
// with distinct magnitudes it checks the hard decisions HCM, the smallest
// magnitude (the metric of the second CG candidate) and its position.
// Single-word nodes (size <= T) give the result with the word itself;
// multi-word nodes (4 words) give it one cycle after the last word.
// Min-1 and the hard decisions follow the paper; sizes are own choices.
module tb_ng1;
  localparam int T = 8, QM = 7, MAX_R1 = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic valid = 0, last = 0, multi = 0;
  logic [7:0] wk = '0;
  logic [$clog2(T):0] nv = '0;
  logic signed [QM-1:0] llr [T];
  logic o_valid;
  logic [QM-2:0] nm1;
  logic [$clog2(MAX_R1)-1:0] kidx;
  logic [MAX_R1-1:0] c0;
  int checks = 0, failures = 0;

  ng1 #(.T(T), .QM(QM), .MAX_R1(MAX_R1)) dut (.clk, .rst_n, .valid, .last, .multi, .wk, .nv, .llr,
    .o_valid, .nm1, .kidx, .c0);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int sz, int v[MAX_R1]);
    int mn, mk;
    bit [MAX_R1-1:0] h;
    mn = 1000; mk = 0; h = '0;
    for (int i = 0; i < sz; i++) begin
      automatic int m = v[i] < 0 ? -v[i] : v[i];
      h[i] = v[i] < 0;
      if (m < mn) begin mn = m; mk = i; end
    end
    checks++;
    if (!o_valid || int'(nm1) != mn || int'(kidx) != mk || ((c0 ^ h) & ((MAX_R1)'(1) << sz) - 1'b1) != 0) begin
      failures++;
      $display("FAIL size %0d: valid %0d nm %0d/%0d k %0d/%0d hcm %h/%h", sz, o_valid, nm1, mn, kidx, mk, c0, h);
    end
  endtask

  initial begin
    int v [MAX_R1];
    for (int i = 0; i < T; i++) llr[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 200; rep++) begin
      automatic int sz = (rep % 3 == 0) ? 4 * T : (rep % 3 == 1) ? T : 4;
      int perm [MAX_R1];
      for (int i = 0; i < MAX_R1; i++) perm[i] = i + 1 + ($urandom % 2) * 32;
      perm.shuffle();
      for (int i = 0; i < MAX_R1; i++) v[i] = (($urandom % 2) ? -1 : 1) * (perm[i] % 63);
      // make magnitudes distinct within the node
      for (int i = 0; i < sz; i++) v[i] = (v[i] < 0 ? -1 : 1) * (i * 7 % sz + 1 + (rep % 20));
      for (int i = sz - 1; i > 0; i--) begin
        automatic int j = $urandom % (i + 1), t = v[i];
        v[i] = v[j]; v[j] = t;
      end
      for (int w = 0; w < (sz + T - 1) / T; w++) begin
        @(negedge clk);
        valid = 1; multi = sz > T; wk = 8'(w); last = (w == (sz + T - 1) / T - 1);
        nv = ($clog2(T)+1)'(sz > T ? T : sz);
        for (int i = 0; i < T; i++) llr[i] = QM'((w * T + i < sz) ? v[w*T+i] : 0);
        if (!multi && last) begin #1; check(sz, v); end
      end
      @(negedge clk);
      valid = 0; last = 0;
      if (multi) begin #1; check(sz, v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
