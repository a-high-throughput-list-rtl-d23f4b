// polar_list_decoder: high throughput CRC-aided list decoder for polar
// codes running the reduced latency list decoding (RLLD) algorithm
// (top architecture of Fig. 5).
//
// A frame is decoded on the pruned code tree. The host first writes the
// channel LLRs into CMEM, the frozen-bit mask into FMEM and the node
// program into the instruction RAM (one instr_t per visited node, in
// depth-first order), then pulses start. For every instruction the
// controller
//   1. computes the node's LLRs with the L PUAs, T per path per cycle,
//      ceil(2^(n-t)/T) cycles: f (left child) or g (right child, using the
//      partial sums streamed by the Hyb-PSU), parent read from CMEM for
//      layer 1 and from IMEM through the switch network otherwise, result
//      written to IMEM (rate-0 leaves skip this step);
//   2. for a leaf, decodes it: rate-0 -> all-zero codeword; rate-1 with
//      I_v > X_th -> hard decision; rate-1 with I_v <= X_th -> CG; FP ->
//      MBS. CG and FP take N_P cycles in the PPU (Table 4 for FP, 2 or 4
//      for CG) and prune the list;
//   3. loads the returned codewords and list indices into the Hyb-PSU
//      (one cycle), which copies index references instead of data.
// After the last leaf the codeword x of each path, best metric first, is
// streamed through IEnc and CRCC; the first path whose CRC holds is kept
// in the output buffer (read through out_addr/out_data, data word u). If
// no path passes, path 0 is output and crc_ok is low.
//
// Timing (cycles from start to done): sum over visited non-rate-0 nodes of
// ceil(2^(n-t)/T) + N_P, plus 1 per leaf for the Hyb-PSU load, plus
// 2*N/T + 1 per output candidate tried. The paper's Eq. (14) counts the
// same except the load cycle and the rate-0 handling.
//
// From the paper: the block structure of Fig. 5 (CMEM, IMEM/SN, PUAs,
// PPU, Hyb-PSU, IEnc, CRCC), the node types and their processing, the
// instruction RAM style of control. Own choices: instruction format, the
// host interface, FMEM, the output buffer and the candidate retry order.
// The LLR buffers LBuf0/LBuf1 and the c2 bypass of Fig. 5 are not
// described in the text and are not built; the PPU's capture registers
// play the role of LBuf2 and its codeword registers that of CBuf.
module polar_list_decoder
  import polar_pkg::*;
#(
  parameter int N_LOG  = 13,
  parameter int L      = 4,
  parameter int T      = 128,
  parameter int QC     = 5,
  parameter int QM     = 7,
  parameter int T1     = 3,
  parameter int T2     = 4,
  parameter int X0     = 8,
  parameter int X1     = 16,
  parameter int M      = 3,
  parameter int MAX_R1 = 256,
  parameter int IRD    = 2048
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // host: channel LLRs, frozen mask, program
  input  logic                     cm_we,
  input  logic [N_LOG-1:0]         cm_addr,
  input  logic signed [QC-1:0]     cm_data [T],
  input  logic                     fz_we,
  input  logic [N_LOG-1:0]         fz_addr,
  input  logic [T-1:0]             fz_data,
  input  logic                     ir_we,
  input  logic [$clog2(IRD)-1:0]   ir_addr,
  input  instr_t                   ir_data,
  input  logic                     start,
  // status and result
  output logic                     busy,
  output logic                     done,
  output logic                     crc_ok,
  output logic [2:0]               sel_path,
  output logic [31:0]              cycles,
  input  logic [N_LOG-1:0]         out_addr,
  output logic [T-1:0]             out_data
);
  localparam int N   = 1 << N_LOG;
  localparam int NW  = (N + T - 1) / T;
  localparam int TL  = $clog2(T);
  localparam int PW  = $clog2(IRD);

  typedef enum logic [3:0] {
    S_IDLE, S_LLR, S_PPU, S_LEAF, S_FEED, S_EMIT, S_CHK, S_DONE
  } state_e;

  state_e            st;
  logic [PW-1:0]     pc;
  logic [N_LOG-1:0]  k;
  logic [3:0]        pk;
  logic [2:0]        cand;
  logic              retry;
  instr_t            iram [IRD];
  logic [T-1:0]      fmem [NW];
  logic [T-1:0]      obuf [NW];
  logic [2:0]        lptr [L][N_LOG+1];
  instr_t            ins;

  // node geometry of the current instruction
  int                nsz_log, nl, np, ivc;
  logic              multi, is_hd;

  always_comb begin
    ins     = iram[pc];
    nsz_log = N_LOG - int'(ins.layer);
    nl      = (nsz_log > TL) ? (1 << (nsz_log - TL)) : 1;
    multi   = nsz_log > TL;
    ivc     = $countones(ins.info_mask);
    is_hd   = ins.kind == K_R1H;
    case (ins.kind)
      K_FP:    np = np_fp(ivc, L);
      K_R1CG:  np = multi ? 4 : 2;
      K_R1H:   np = multi ? 3 : 2;
      default: np = 0;
    endcase
  end

  // ---------------- datapath ----------------
  logic signed [QM-1:0] cm_rd  [2*T];
  logic signed [QM-1:0] im_rd  [L][2*T];
  logic signed [QM-1:0] pu_in  [L][2*T];
  logic signed [QM-1:0] pu_out [L][T];
  logic [2:0]           rsel   [L];
  logic [T-1:0]         ps     [L];
  logic                 llr_cyc, is_g;
  logic [3:0]           out_w;

  assign llr_cyc = (st == S_LLR);
  assign is_g    = ins.is_right;
  assign out_w   = 4'(meq_width(int'(ins.layer), QC, QM, T1, T2));

  cmem #(.N_LOG(N_LOG), .T(T), .QC(QC), .QM(QM)) u_cmem (
    .clk, .we(cm_we), .waddr(cm_addr), .wdata(cm_data), .rk(k), .rdata(cm_rd));

  always_comb
    for (int l = 0; l < L; l++) rsel[l] = lptr[l][ins.layer - 4'd1];

  imem #(.N_LOG(N_LOG), .L(L), .T(T), .QC(QC), .QM(QM), .T1(T1), .T2(T2)) u_imem (
    .clk, .we(llr_cyc), .wlayer(ins.layer), .wk(k), .wdata(pu_out),
    .rlayer(ins.layer - 4'd1), .rk(k), .rsel(rsel), .rdata(im_rd));

  always_comb
    for (int l = 0; l < L; l++)
      pu_in[l] = (ins.layer == 4'd1) ? cm_rd : im_rd[l];

  for (genvar l = 0; l < L; l++) begin : g_pua
    pua #(.T(T), .QM(QM)) u_pua (
      .is_g(is_g), .out_w(out_w), .a(pu_in[l]),
      .ps(is_g ? ps[l] : '0), .y(pu_out[l]));
  end

  // ---------------- PPU ----------------
  logic [2:0]        a_q    [L];
  logic [MAX_R1-1:0] beta_q [L];
  logic [PMW-1:0]    pm_q   [L];
  logic [3:0]        q_used;
  logic              ppu_valid, ppu_last, fp_cap, commit, commit_hd, ppu_init;

  assign ppu_valid = llr_cyc && (ins.kind == K_R1CG || is_hd);
  assign ppu_last  = int'(k) == nl - 1;
  assign fp_cap    = llr_cyc && ins.kind == K_FP;
  assign commit    = st == S_PPU && !is_hd && int'(pk) == np - 2;
  assign commit_hd = st == S_PPU &&  is_hd && int'(pk) == np - 2;
  assign ppu_init  = st == S_IDLE && start;

  ppu #(.L(L), .T(T), .QM(QM), .X0(X0), .X1(X1), .MAX_R1(MAX_R1)) u_ppu (
    .clk, .rst_n, .init(ppu_init), .is_fp(ins.kind == K_FP),
    .valid(ppu_valid), .last(ppu_last), .multi(multi), .wk(k[7:0]),
    .nv((TL+1)'(multi ? T : (1 << nsz_log))), .llr(pu_out),
    .fp_cap(fp_cap), .slog(3'(nsz_log)), .info_mask(ins.info_mask[X1-1:0]),
    .commit(commit), .commit_hd(commit_hd),
    .a_q(a_q), .beta_q(beta_q), .pm_q(pm_q), .q_used(q_used));

  // ---------------- Hyb-PSU ----------------
  logic leaf_ld, leaf_copy;
  assign leaf_ld   = (st == S_LEAF) || (st == S_PPU && int'(pk) == np - 1);
  assign leaf_copy = st == S_PPU && !is_hd;

  hyb_psu #(.N_LOG(N_LOG), .L(L), .T(T), .M(M), .MAX_R1(MAX_R1)) u_psu (
    .clk, .rst_n, .leaf_ld(leaf_ld), .leaf_zero(st == S_LEAF),
    .leaf_t(ins.layer), .leaf_te(ins.te), .beta(beta_q),
    .copy(leaf_copy), .a(a_q), .k(k), .st(llr_cyc && is_g), .xout(ps));

  // ---------------- IEnc and CRCC ----------------
  logic         ie_ov, ie_ol;
  logic [T-1:0] ie_ow;
  logic [N_LOG-1:0] ecnt;
  logic         crc_done, crc_pass;

  ienc #(.N_LOG(N_LOG), .T(T)) u_ienc (
    .clk, .rst_n, .in_valid(st == S_FEED), .in_word(ps[cand]),
    .out_valid(ie_ov), .out_last(ie_ol), .out_word(ie_ow));

  crcc #(.T(T)) u_crcc (
    .clk, .rst_n, .start(ie_ov && ecnt == 0), .valid(ie_ov), .last(ie_ol),
    .word(ie_ow), .frozen(fmem[ecnt]), .done(crc_done), .ok(crc_pass));

  // ---------------- host memories ----------------
  always_ff @(posedge clk) begin
    if (ir_we) iram[ir_addr] <= ir_data;
    if (fz_we && int'(fz_addr) < NW) fmem[fz_addr] <= fz_data;
    if (ie_ov && int'(ecnt) < NW) obuf[ecnt] <= ie_ow;
  end
  assign out_data = (int'(out_addr) < NW) ? obuf[out_addr] : '0;

  // ---------------- controller ----------------
  function automatic state_e dispatch(instr_t i);
    return (i.kind == K_R0) ? S_LEAF : S_LLR;
  endfunction

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= S_IDLE; pc <= '0; k <= '0; pk <= '0; cand <= '0; retry <= 1'b0;
      done <= 1'b0; crc_ok <= 1'b0; sel_path <= '0; cycles <= '0; ecnt <= '0;
      for (int l = 0; l < L; l++)
        for (int z = 0; z <= N_LOG; z++) lptr[l][z] <= 3'(l);
    end else begin
      if (st != S_IDLE && st != S_DONE) cycles <= cycles + 1;
      if (ie_ov) ecnt <= ie_ol ? '0 : ecnt + 1'b1;
      case (st)
        S_IDLE, S_DONE: if (start) begin
          pc <= '0; k <= '0; pk <= '0; cand <= '0; retry <= 1'b0;
          done <= 1'b0; crc_ok <= 1'b0; cycles <= '0; ecnt <= '0;
          st <= dispatch(iram[0]);
        end
        S_LLR: begin
          for (int l = 0; l < L; l++) lptr[l][ins.layer] <= 3'(l);
          if (int'(k) == nl - 1) begin
            k <= '0;
            if (ins.kind == K_INT) begin
              pc <= pc + 1'b1;
              st <= dispatch(iram[pc + 1'b1]);
            end else begin
              pk <= '0;
              st <= S_PPU;
            end
          end else k <= k + 1'b1;
        end
        S_PPU: begin
          pk <= pk + 1'b1;
          if (int'(pk) == np - 1) begin
            if (!is_hd)
              for (int l = 0; l < L; l++)
                for (int z = 0; z <= N_LOG; z++)
                  if (z < int'(ins.layer)) lptr[l][z] <= lptr[a_q[l]][z];
            if (ins.last) begin st <= S_FEED; k <= '0; end
            else begin pc <= pc + 1'b1; st <= dispatch(iram[pc + 1'b1]); end
          end
        end
        S_LEAF: begin
          if (ins.last) begin st <= S_FEED; k <= '0; end
          else begin pc <= pc + 1'b1; st <= dispatch(iram[pc + 1'b1]); end
        end
        S_FEED: begin
          if (int'(k) == NW - 1) begin k <= '0; st <= S_EMIT; end
          else k <= k + 1'b1;
        end
        S_EMIT: if (ie_ol) st <= S_CHK;
        S_CHK: begin
          if (crc_pass || retry) begin
            st <= S_DONE; done <= 1'b1; crc_ok <= crc_pass && !retry; sel_path <= cand;
          end else if (int'(cand) == L - 1) begin
            cand <= '0; retry <= 1'b1; st <= S_FEED;
          end else begin
            cand <= cand + 1'b1; st <= S_FEED;
          end
        end
        default: st <= S_IDLE;
      endcase
    end

  assign busy = st != S_IDLE && st != S_DONE;

  // the program must not ask for more than the hardware holds
  assert property (@(posedge clk)
    (st == S_PPU && ins.kind == K_FP) |-> (nsz_log <= $clog2(X1) && ivc <= X0));
  assert property (@(posedge clk)
    (st == S_PPU && ins.kind != K_FP) |-> ((1 << nsz_log) <= MAX_R1));
endmodule
