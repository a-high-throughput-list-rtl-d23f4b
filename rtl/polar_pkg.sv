// polar_pkg: types, constants and small functions shared by the list decoder.
//
// The decoder walks a pruned binary code tree. Each visited node is one
// instruction (instr_t) in the instruction RAM: how its LLRs are made (f for
// a left child, g for a right child), its layer, and, for leaves, how it is
// decoded (rate-0, rate-1 by hard decision, rate-1 by candidate generation,
// or fast-processing (FP) node by metric based search). The leaf also carries
// t_e, the layer at which the partial sums it completes are stored.
//
// Following the paper: the node kinds, q(I_v,L) of the MBS first-stage sort
// (Table 3) and the PPU cycle counts N_P (Table 4). Own choices: field
// widths, path-metric width PMW=12 with saturation, node-metric width 10.
package polar_pkg;

  localparam int PMW  = 12;              // path metric width (saturating)
  localparam int NMW  = 10;              // node metric width
  localparam int CWW  = 16;              // max FP codeword length (X1)
  localparam logic [PMW-1:0] PM_MAX = '1;

  typedef enum logic [2:0] {
    K_INT  = 3'd0,   // internal node: only its LLRs are computed
    K_R0   = 3'd1,   // rate-0 leaf
    K_R1H  = 3'd2,   // rate-1 leaf with I_v > X_th: hard decision
    K_R1CG = 3'd3,   // rate-1 leaf with I_v <= X_th: CG algorithm
    K_FP   = 3'd4    // fast-processing leaf: MBS algorithm
  } node_kind_e;

  typedef struct packed {
    logic        is_right;   // 1: g from parent, 0: f from parent
    logic [3:0]  layer;      // layer index t of this node
    node_kind_e  kind;
    logic [3:0]  te;         // leaf only: layer where partial sums land
    logic [15:0] info_mask;  // FP only: info-bit leaves within the node
    logic        last;       // last instruction of the frame
  } instr_t;

  // one candidate entering a metric sorter
  typedef struct packed {
    logic [PMW-1:0] pm;      // expanded path metric
    logic [2:0]     path;    // source decoding path a_l
    logic           flip;    // CG: second-best codeword chosen
    logic [CWW-1:0] cw;      // FP: candidate codeword
  } cand_t;

  function automatic logic [PMW-1:0] sat_add(logic [PMW-1:0] a, logic [NMW-1:0] b);
    logic [PMW:0] s;
    s = {1'b0, a} + (PMW+1)'(b);
    return s[PMW] ? PM_MAX : s[PMW-1:0];
  endfunction

  // Table 3 of the paper: q(I_v, L) for L = 2,4,8,16,32 and I_v = 1..8.
  function automatic int q_of(int iv, int l);
    int q;
    case (l)
      2:       q = 2;
      4:       q = (iv == 1 || iv == 8) ? 2 : 4;
      8:       q = (iv == 1 || iv == 8) ? 2 : (iv == 2 || iv == 7) ? 4 : 8;
      16:      q = (iv == 1 || iv == 8) ? 2 : (iv == 2) ? 4 : 8;
      default: q = (iv == 1 || iv == 8) ? 2 : (iv == 2 || iv == 6 || iv == 7) ? 4 : 8;
    endcase
    if (q > (1 << iv)) q = 1 << iv;
    return q;
  endfunction

  // Table 4 of the paper: PPU cycles N_P for an FP node with I_v leaves of
  // information bits (L = 2,4,8); a rate-1 node takes 2 (I_v <= T) or 4.
  function automatic int np_fp(int iv, int l);
    int v;
    case (l)
      2:       v = (iv <= 2) ? 2 : 3;
      4:       v = (iv == 1) ? 2 : (iv == 8) ? 3 : 4;
      default: case (iv)
                 1: v = 2; 2: v = 3; 3: v = 4; 4: v = 5;
                 5: v = 5; 6: v = 6; 7: v = 5; default: v = 3;
               endcase
    endcase
    return v;
  endfunction

  // MEQ storage width of layer t: Qc up to layer t1, Qc+1 up to t2, Qm above.
  function automatic int meq_width(int t, int qc, int qm, int t1, int t2);
    if (t <= t1) return qc;
    if (t <= t2) return qc + 1;
    return qm;
  endfunction

  // Polar transform of the tree: x = comb(enc(left half), enc(right half))
  // with comb(a,b)[2i] = a[i]^b[i], comb(a,b)[2i+1] = b[i]. Applied to the
  // 2^s low bits of a CWW-bit vector. The transform is its own inverse.
  function automatic logic [CWW-1:0] enc16(logic [CWW-1:0] u, int s);
    logic [CWW-1:0] cur, nxt;
    int w;
    cur = u;
    for (int lv = 0; lv < 4; lv++) begin
      w = 1 << lv;
      nxt = cur;
      if (lv < s) begin
        for (int o = 0; o < CWW; o += 2 * w)
          for (int i = 0; i < w; i++) begin
            nxt[o + 2*i]     = cur[o + i] ^ cur[o + w + i];
            nxt[o + 2*i + 1] = cur[o + w + i];
          end
      end
      cur = nxt;
    end
    return cur;
  endfunction

endpackage
