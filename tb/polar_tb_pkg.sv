// polar_tb_pkg: reference functions for the decoder testbenches.
//
//  * construct: chooses the K most reliable leaves with the Bhattacharyya
//    parameter recursion (left child 2z - z^2, right child z^2).
//  * make_program: prunes the code tree (rate-0, rate-1, FP nodes) and emits
//    the depth-first node program the decoder's instruction RAM expects.
//  * encode_ref: x = u * B_N * F^(xn), written from the matrix definition
//    (x_i = XOR of u_bitrev(k) over all k that contain the bits of i), so
//    it does not share code with the decoder's recursive transform;
//    encode_fast computes the same with butterflies for large N.
//  * crc_ref: CRC-32 (0x04C11DB7, zero start, MSB first) of a bit list.
//  * expected_cycles: the cycle count the controller should take.
// The code construction, the CRC convention and the program format are this
// design's own choices; the paper fixes only the transform and the pruning rules.
package polar_tb_pkg;
  import polar_pkg::*;

  typedef bit bitq_t [$];
  typedef instr_t prog_t [$];

  function automatic int bitrev(int v, int n);
    int r = 0;
    for (int b = 0; b < n; b++) if (v & (1 << b)) r |= 1 << (n - 1 - b);
    return r;
  endfunction

  // info[i] = 1 for the K most reliable leaves
  function automatic bitq_t construct(int n, int k, real z0);
    real z [];
    bitq_t info;
    int N = 1 << n;
    bit used [];
    z = new[N];
    used = new[N];
    for (int i = 0; i < N; i++) begin
      real v = z0;
      for (int b = n - 1; b >= 0; b--)
        v = ((i >> b) & 1) ? v * v : 2.0 * v - v * v;
      z[i] = v;
      used[i] = 0;
    end
    for (int c = 0; c < k; c++) begin
      int best = -1;
      for (int i = 0; i < N; i++)
        if (!used[i] && (best < 0 || z[i] < z[best])) best = i;
      used[best] = 1;
    end
    for (int i = 0; i < N; i++) info.push_back(used[i]);
    return info;
  endfunction

  function automatic prog_t make_program(bitq_t info, int n, int x0, int x1,
                                         int xth, int max_r1);
    prog_t prog;
    int stk_t [$], stk_j [$];
    stk_t.push_back(1); stk_j.push_back(1);
    stk_t.push_back(1); stk_j.push_back(0);
    while (stk_t.size() > 0) begin
      int t = stk_t.pop_back();
      int j = stk_j.pop_back();
      int sz = 1 << (n - t);
      int iv = 0;
      instr_t ins;
      for (int i = j * sz; i < (j + 1) * sz; i++) iv += info[i];
      ins = '0;
      ins.layer = 4'(t);
      ins.is_right = j[0];
      if (iv == 0) ins.kind = K_R0;
      else if (iv == sz && sz <= max_r1) ins.kind = (iv > xth) ? K_R1H : K_R1CG;
      else if (iv < sz && iv <= x0 && sz <= x1) begin
        ins.kind = K_FP;
        for (int i = 0; i < sz; i++) ins.info_mask[i] = info[j * sz + i];
      end else ins.kind = K_INT;
      if (ins.kind == K_INT) begin
        stk_t.push_back(t + 1); stk_j.push_back(2 * j + 1);
        stk_t.push_back(t + 1); stk_j.push_back(2 * j);
      end else begin
        int e = (j + 1) * sz - 1;
        int te = 0;
        for (int b = 0; b < n; b++)
          if (((e >> b) & 1) == 0) begin te = n - b; break; end
        ins.te = 4'(te);
        ins.last = (te == 0);
      end
      prog.push_back(ins);
    end
    return prog;
  endfunction

  function automatic bitq_t encode_ref(bitq_t u, int n);
    bitq_t x;
    int N = 1 << n;
    for (int i = 0; i < N; i++) begin
      bit acc = 0;
      for (int k = 0; k < N; k++)
        if ((k & i) == i) acc ^= u[bitrev(k, n)];
      x.push_back(acc);
    end
    return x;
  endfunction

  // same transform with the butterfly (O(N log N)) for large N
  function automatic bitq_t encode_fast(bitq_t u, int n);
    bitq_t v;
    int N = 1 << n;
    for (int i = 0; i < N; i++) v.push_back(u[bitrev(i, n)]);
    for (int b = 0; b < n; b++)
      for (int i = 0; i < N; i++)
        if (((i >> b) & 1) == 0) v[i] ^= v[i | (1 << b)];
    return v;
  endfunction

  function automatic bit [31:0] crc_ref(bitq_t bits);
    bit [31:0] c = '0;
    foreach (bits[i]) begin
      bit fb = c[31] ^ bits[i];
      c = {c[30:0], 1'b0} ^ (fb ? 32'h04C11DB7 : 32'h0);
    end
    return c;
  endfunction

  // random data word with CRC on its last 32 information bits
  function automatic bitq_t make_u(bitq_t info);
    bitq_t u, msg;
    int nk = 0, pos = 0;
    bit [31:0] c;
    foreach (info[i]) nk += info[i];
    for (int i = 0; i < nk - 32; i++) msg.push_back(1'($urandom));
    c = crc_ref(msg);
    for (int i = 0; i < 32; i++) msg.push_back(c[31 - i]);
    foreach (info[i]) begin
      if (info[i]) begin u.push_back(msg[pos]); pos++; end
      else u.push_back(0);
    end
    return u;
  endfunction

  function automatic int expected_cycles(prog_t prog, int n, int tl, int l);
    int c = 0;
    foreach (prog[p]) begin
      int sl = n - int'(prog[p].layer);
      int nl = (sl > tl) ? (1 << (sl - tl)) : 1;
      bit multi = sl > tl;
      case (prog[p].kind)
        K_INT:  c += nl;
        K_R0:   c += 1;
        K_R1H:  c += nl + (multi ? 3 : 2);
        K_R1CG: c += nl + (multi ? 4 : 2);
        default: c += nl + np_fp($countones(prog[p].info_mask), l);
      endcase
    end
    return c;
  endfunction

  // approximately Gaussian sample, unit variance (sum of 12 uniforms)
  function automatic real gauss();
    real s = 0.0;
    for (int i = 0; i < 12; i++) s += real'($urandom % 65536) / 65536.0;
    return s - 6.0;
  endfunction
endpackage
