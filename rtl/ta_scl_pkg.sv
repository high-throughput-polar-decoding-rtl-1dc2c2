// ta_scl_pkg: types, constants and pure functions shared by the blocks of the
// two-staged adaptive SCL (TA-SCL) polar decoder.
//
// * LLRs inside the small-list decoder D_s are QS=7-bit two's complement
//   numbers, path metrics QPM=8-bit unsigned; both widths are the
//   quantisation the design uses for D_s.  Arithmetic saturates.
// * The F and G functions are the min-sum forms
//     F(a,b) = sign(a)sign(b) min(|a|,|b|),   G(a,b,ps) = (-1)^ps a + b.
// * polar_enc16 computes x = u F^{(x)4} restricted to the first T bits of a
//   16-bit vector (u must be zero above T).  The transform is its own inverse,
//   so the same function turns a codeword back into source bits.
// * Special-node classes of a T-bit node (frozen mask f, 1 = frozen):
//     Rate-0 (all frozen), Rate-1 (none), Rep (all but the last), SPC (only the
//     first), Rep2 (all but the last two), SPC2 (only the first two).  Rep2 and
//     SPC2 split into two independent half-length Rep / SPC codes on the
//     even-indexed and odd-indexed codeword bits.
// * decompose16 splits a 16-bit sub-code into special nodes, scanning left to
//   right and always taking the largest aligned special node, which is the
//   same as a top-down recursive split of the sub-tree.
package ta_scl_pkg;

  localparam int QS   = 7;            // LLR width inside D_s
  localparam int QPM  = 8;            // path metric width
  localparam int MAX_SN = 3;          // max special nodes per sub-code
  localparam int NCAND  = 2 << MAX_SN; // candidates before list pruning (16)
  localparam int NIN    = 1 << MAX_SN; // candidates entering the last SND step (8)

  typedef logic signed [QS-1:0] llr_t;
  typedef logic [QPM-1:0]       pm_t;

  typedef enum logic [2:0] {
    NT_RATE0, NT_RATE1, NT_REP, NT_SPC, NT_REP2, NT_SPC2
  } node_type_e;

  typedef struct packed {
    logic [3:0]  off;    // first bit of the node inside the sub-code
    logic [2:0]  lgt;    // log2 of the node length T (0..4)
    node_type_e  ntype;
  } sn_desc_t;

  typedef struct packed {
    logic [1:0]  num;    // number of special nodes (1..3)
    logic        ok;     // 0: the sub-code needs more than MAX_SN nodes
    sn_desc_t [MAX_SN-1:0] sn;
  } sn_plan_t;

  localparam llr_t LLR_MAX = llr_t'((1 << (QS-1)) - 1);
  localparam llr_t LLR_MIN = -LLR_MAX;

  function automatic llr_t sat_llr(input logic signed [QS:0] v);
    if (v > $signed({1'b0, LLR_MAX})) return LLR_MAX;
    if (v < $signed({1'b1, LLR_MIN})) return LLR_MIN;
    return llr_t'(v);
  endfunction

  function automatic llr_t abs_llr(input llr_t a);
    return (a < 0) ? llr_t'(-a) : a;
  endfunction

  function automatic llr_t f_func(input llr_t a, input llr_t b);
    llr_t ma, mb, m;
    ma = abs_llr(a);
    mb = abs_llr(b);
    m  = (ma < mb) ? ma : mb;
    return ((a < 0) ^ (b < 0)) ? llr_t'(-m) : m;
  endfunction

  function automatic llr_t g_func(input llr_t a, input llr_t b, input logic ps);
    logic signed [QS:0] s;
    s = ps ? ($signed({b[QS-1], b}) - $signed({a[QS-1], a}))
           : ($signed({b[QS-1], b}) + $signed({a[QS-1], a}));
    return sat_llr(s);
  endfunction

  function automatic pm_t sat_add_pm(input pm_t a, input logic [10:0] b);
    logic [11:0] s;
    s = {4'd0, a} + {1'b0, b};
    return (s > 12'(2**QPM - 1)) ? pm_t'(2**QPM - 1) : pm_t'(s);
  endfunction

  // x_j = XOR of u_i over all i whose bits contain j's bits (j < T).
  function automatic logic [15:0] polar_enc16(input logic [15:0] u, input logic [2:0] lgt);
    logic [15:0] x;
    x = u;
    for (int s = 0; s < 4; s++) begin
      if (s < int'(lgt)) begin
        for (int j = 0; j < 16; j++)
          if (((j >> s) & 1) == 0) x[j] = x[j] ^ x[j | (1 << s)];
      end
    end
    return x;
  endfunction

  function automatic logic [15:0] len_mask(input logic [2:0] lgt);
    return 16'((32'd1 << (32'd1 << lgt)) - 1);
  endfunction

  // Is the T=2^lgt node whose frozen bits are f[T-1:0] special, and which kind.
  function automatic logic classify(input logic [15:0] f, input logic [2:0] lgt,
                                    output node_type_e nt);
    logic [15:0] m, fm;
    m  = len_mask(lgt);
    fm = f & m;
    nt = NT_RATE0;
    if (fm == m)                               begin nt = NT_RATE0; return 1'b1; end
    if (fm == 16'd0)                           begin nt = NT_RATE1; return 1'b1; end
    if (lgt >= 1 && fm == (m >> 1))            begin nt = NT_REP;   return 1'b1; end
    if (lgt >= 2 && fm == 16'd1)               begin nt = NT_SPC;   return 1'b1; end
    if (lgt >= 2 && fm == (m >> 2))            begin nt = NT_REP2;  return 1'b1; end
    if (lgt >= 3 && fm == 16'd3)               begin nt = NT_SPC2;  return 1'b1; end
    return 1'b0;
  endfunction

  function automatic sn_plan_t decompose16(input logic [15:0] frozen16);
    sn_plan_t   p;
    int         pos, cnt;
    node_type_e nt;
    logic       found;
    p   = '0;
    pos = 0;
    cnt = 0;
    p.ok = 1'b1;
    for (int it = 0; it < 16; it++) begin
      if (pos < 16) begin
        found = 1'b0;
        for (int l = 4; l >= 0; l--) begin
          if (!found && (pos % (1 << l)) == 0 &&
              classify(16'(frozen16 >> pos), 3'(l), nt)) begin
            found = 1'b1;
            if (cnt < MAX_SN) begin
              p.sn[cnt].off   = 4'(pos);
              p.sn[cnt].lgt   = 3'(l);
              p.sn[cnt].ntype = nt;
            end else begin
              p.ok = 1'b0;
            end
            cnt = cnt + 1;
            pos = pos + (1 << l);
          end
        end
      end
    end
    p.num = (cnt > MAX_SN) ? 2'(MAX_SN) : 2'(cnt);
    return p;
  endfunction

  // LLRs of the node (off, 2^lgt) of a 16-leaf sub-tree, given the sub-code
  // LLRs and the source bits already decided in front of the node.
  function automatic void node_llr(input llr_t a16 [16], input logic [15:0] u,
                                   input logic [3:0] off, input logic [2:0] lgt,
                                   output llr_t o [16]);
    llr_t cur [16];
    llr_t nxt [16];
    int   base, len, half;
    logic [15:0] ps;
    cur  = a16;
    base = 0;
    len  = 16;
    for (int lv = 0; lv < 4; lv++) begin
      if (len > (1 << lgt)) begin
        half = len / 2;
        nxt  = cur;
        if (int'(off) < base + half) begin
          for (int j = 0; j < 8; j++)
            if (j < half) nxt[j] = f_func(cur[j], cur[j + half]);
        end else begin
          ps = polar_enc16(16'(u >> base) & len_mask(3'($clog2(half))), 3'($clog2(half)));
          for (int j = 0; j < 8; j++)
            if (j < half) nxt[j] = g_func(cur[j], cur[j + half], ps[j]);
          base = base + half;
        end
        cur = nxt;
        len = half;
      end
    end
    o = cur;
  endfunction

  // Number of special nodes per 16-bit sub-code as a function of its number of
  // frozen bits, for the nested frozen patterns of real polar codes.
  function automatic int msn_of_frozen_count(input int f);
    if (f == 0 || f == 1 || f == 2 || f == 14 || f == 15 || f == 16) return 1;
    if (f == 7 || f == 8 || f == 9) return 2;
    return 3;
  endfunction

endpackage
