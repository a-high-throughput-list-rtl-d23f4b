// tb_imem: fills every layer of the internal LLR memory for all L paths
// with random values that fit the layer's stored width (5, 6 or 7 bits by
// the mixed quantisation rule), then reads them back through the switch
// network with random path selections rsel and checks the 2T LLRs of each
// pair-word. Writes take effect at the clock edge; reads are asynchronous.
// MEQ widths and path-copy-by-reference follow the paper; sizes are own choices.
module tb_imem;
  import polar_pkg::*;
  localparam int N_LOG = 6, L = 4, T = 4, QC = 5, QM = 7, T1 = 1, T2 = 2;
  localparam int N = 1 << N_LOG;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [3:0] wlayer = '0, rlayer = '0;
  logic [N_LOG-1:0] wk = '0, rk = '0;
  logic signed [QM-1:0] wdata [L][T];
  logic [2:0] rsel [L];
  logic signed [QM-1:0] rdata [L][2*T];
  int mref [N_LOG+1][L][N];
  int checks = 0, failures = 0;

  imem #(.N_LOG(N_LOG), .L(L), .T(T), .QC(QC), .QM(QM), .T1(T1), .T2(T2)) dut (
    .clk, .we, .wlayer, .wk, .wdata, .rlayer, .rk, .rsel, .rdata);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < L; l++) begin
      rsel[l] = 3'(l);
      for (int i = 0; i < T; i++) wdata[l][i] = '0;
    end
    for (int z = 1; z <= N_LOG; z++) begin
      automatic int sz = N >> z, w = meq_width(z, QC, QM, T1, T2), lim = (1 << (w - 1)) - 1;
      for (int k = 0; k < (sz + T - 1) / T; k++) begin
        @(negedge clk);
        we = 1; wlayer = 4'(z); wk = N_LOG'(k);
        for (int l = 0; l < L; l++)
          for (int i = 0; i < T; i++) begin
            automatic int v = int'($urandom % (2 * lim + 1)) - lim;
            wdata[l][i] = QM'(v);
            if (k * T + i < sz) mref[z][l][k*T+i] = v;
          end
      end
    end
    @(negedge clk) we = 0;
    for (int rep = 0; rep < 4; rep++)
      for (int z = 1; z <= N_LOG; z++) begin
        automatic int sz = N >> z;
        for (int k = 0; k < (sz + 2*T - 1) / (2*T); k++) begin
          rlayer = 4'(z); rk = N_LOG'(k);
          for (int l = 0; l < L; l++) rsel[l] = 3'($urandom % L);
          #1;
          for (int l = 0; l < L; l++)
            for (int i = 0; i < 2*T; i++)
              if (2*T*k + i < sz) begin
                checks++;
                if (int'(rdata[l][i]) != mref[z][rsel[l]][2*T*k+i]) begin
                  failures++;
                  if (failures < 10) $display("FAIL z=%0d k=%0d l=%0d i=%0d got %0d want %0d", z, k, l, i,
                                              rdata[l][i], mref[z][rsel[l]][2*T*k+i]);
                end
              end
          #1;
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
