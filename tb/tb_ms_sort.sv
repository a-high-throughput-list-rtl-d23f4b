// tb_ms_sort: random candidate lists (metrics drawn from a small range so
// that ties occur) go through the 2L-to-L metric sorter. The output must be
// the L smallest metrics in ascending order, and each output must carry the
// path, flip and codeword fields of an input with that metric.
// The 2L-to-L selection follows the paper; the tie rule checked is this design's own.
module tb_ms_sort;
  import polar_pkg::*;
  localparam int L = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  cand_t din [2*L];
  cand_t dout [L];
  int checks = 0, failures = 0;

  ms_sort #(.L(L)) dut (.din, .dout);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pms [$];
    for (int i = 0; i < 2*L; i++) din[i] = '0;
    for (int v = 0; v < 3000; v++) begin
      @(negedge clk);
      pms.delete();
      for (int i = 0; i < 2*L; i++) begin
        din[i].pm   = PMW'((v % 2) ? $urandom % 8 : $urandom % 4096);
        din[i].path = 3'(i / 2);
        din[i].flip = 1'(i);
        din[i].cw   = CWW'(i * 37 + v);
        pms.push_back(int'(din[i].pm));
      end
      pms.sort();
      #1;
      for (int l = 0; l < L; l++) begin
        automatic bit found = 0;
        checks++;
        if (int'(dout[l].pm) != pms[l]) begin
          failures++; $display("FAIL vec %0d out %0d pm %0d want %0d", v, l, dout[l].pm, pms[l]);
        end
        for (int i = 0; i < 2*L; i++) if (din[i] == dout[l]) found = 1;
        checks++;
        if (!found) begin failures++; $display("FAIL vec %0d out %0d is not an input", v, l); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
