// tb_pua: checks the processing unit array against a plain reference of
// the min-sum f function and the g function with symmetric saturation to
// the output width of the target layer (5, 6 or 7 bits). Random LLR pairs,
// random partial sums, 2000 vectors. The array is combinational: results
// are checked in the same cycle.
// The f and g functions follow the paper; saturation widths are own choices.
module tb_pua;
  localparam int T = 8, QM = 7;
  logic clk = 0;
  always #5 clk = ~clk;
  logic is_g = 0;
  logic [3:0] out_w = 4'd7;
  logic signed [QM-1:0] a [2*T];
  logic [T-1:0] ps = '0;
  logic signed [QM-1:0] y [T];
  int checks = 0, failures = 0;

  pua #(.T(T), .QM(QM)) dut (.is_g, .out_w, .a, .ps, .y);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2*T; i++) a[i] = '0;
    for (int v = 0; v < 2000; v++) begin
      @(negedge clk);
      is_g = 1'($urandom);
      out_w = 4'(5 + $urandom % 3);
      ps = T'($urandom);
      for (int i = 0; i < 2*T; i++) a[i] = QM'(int'($urandom % 127) - 63);
      #1;
      for (int i = 0; i < T; i++) begin
        int x0, x1, r, lim;
        x0 = int'(a[2*i]); x1 = int'(a[2*i+1]);
        if (is_g) r = (ps[i] ? -x0 : x0) + x1;
        else begin
          r = ((x0 < 0 ? -x0 : x0) < (x1 < 0 ? -x1 : x1)) ? (x0 < 0 ? -x0 : x0) : (x1 < 0 ? -x1 : x1);
          if ((x0 < 0) != (x1 < 0)) r = -r;
        end
        lim = (1 << (out_w - 1)) - 1;
        if (r > lim) r = lim;
        if (r < -lim) r = -lim;
        checks++;
        if (int'(y[i]) != r) begin
          failures++;
          if (failures < 10) $display("FAIL g=%0d a=%0d,%0d ps=%0d w=%0d: got %0d want %0d", is_g, x0, x1, ps[i], out_w, y[i], r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
