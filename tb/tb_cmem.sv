// tb_cmem: writes random 5-bit channel LLR words into the channel memory,
// then reads every pair-word and checks that it returns the 2T LLRs
// 2T*rk .. 2T*rk+2T-1, sign extended to the internal width. The read is
// asynchronous (same cycle as rk).
// What is checked follows the paper's CMEM role; sizes and stimulus are own choices.
module tb_cmem;
  localparam int N_LOG = 6, T = 4, QC = 5, QM = 7;
  localparam int N = 1 << N_LOG;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [N_LOG-1:0] waddr = '0, rk = '0;
  logic signed [QC-1:0] wdata [T];
  logic signed [QM-1:0] rdata [2*T];
  int ref_llr [N];
  int checks = 0, failures = 0;

  cmem #(.N_LOG(N_LOG), .T(T), .QC(QC), .QM(QM)) dut (.clk, .we, .waddr, .wdata, .rk, .rdata);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < T; i++) wdata[i] = '0;
    for (int rep = 0; rep < 3; rep++) begin
      for (int w = 0; w < N / T; w++) begin
        @(negedge clk);
        we = 1; waddr = N_LOG'(w);
        for (int i = 0; i < T; i++) begin
          ref_llr[w*T+i] = int'($urandom % 31) - 15;
          wdata[i] = QC'(ref_llr[w*T+i]);
        end
      end
      @(negedge clk) we = 0;
      for (int r = 0; r < N / (2*T); r++) begin
        rk = N_LOG'(r);
        #1;
        for (int i = 0; i < 2*T; i++) begin
          checks++;
          if (int'(rdata[i]) != ref_llr[2*T*r+i]) begin
            failures++; $display("FAIL rk=%0d i=%0d got %0d want %0d", r, i, rdata[i], ref_llr[2*T*r+i]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
