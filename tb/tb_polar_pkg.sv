// tb_polar_pkg: reference helpers for the testbenches of the TA-SCL decoder.
// Everything here is computed independently of the RTL:
//  * frozen-set generator for the two code sizes the testbenches use.  Each
//    16-bit sub-code i receives a number of frozen bits F_i, frozen in the
//    nested order ORD16 (least reliable first).  The counts reproduce, for
//    N = 1024 and K = 512, the numbers of sub-codes per latency group of the
//    paper's code P1 (32 / 13 / 2 / 17 sub-codes with 1 / 2 / 3 / 4 cycles),
//    for N = 256, K = 128 those of P3 (6 / 4 / 2 / 4), and, through
//    make_frozen_p2, for N = 1024, K = 768 those of P2 (38 / 12 / 2 / 12).
//  * CRC (MSB-first, zero start), polar encoder x = u F^{(x)n},
//  * the latency formula of D_s from the paper,
//  * a plain successive-cancellation decoder (min-sum) used by the stand-in
//    of the large-list decoder.
package tb_polar_pkg;

  localparam int ORD16 [16] = '{0, 1, 2, 4, 8, 3, 5, 6, 9, 10, 12, 7, 11, 13, 14, 15};

  function automatic int frozen_count(input int n, input int i);
    // per-sub-code frozen-bit counts, in sub-code order
    int c1024 [8] = '{16, 15, 10, 8, 5, 4, 1, 0};
    int r1024 [8] = '{16,  7,  9, 2, 7, 1, 6, 16};
    int c256  [8] = '{16, 15, 10, 8, 6, 1, 0, 0};
    int r256  [8] = '{ 3,  2,  2, 2, 2, 2, 3, 0};
    int acc = 0;
    for (int g = 0; g < 8; g++) begin
      int r = (n == 1024) ? r1024[g] : r256[g];
      if (i < acc + r) return (n == 1024) ? c1024[g] : c256[g];
      acc += r;
    end
    return 0;
  endfunction

  function automatic void make_frozen(input int n, output logic fz [1024]);
    for (int j = 0; j < 1024; j++) fz[j] = 1'b0;
    for (int s = 0; s < n / 16; s++) begin
      int f = frozen_count(n, s);
      for (int t = 0; t < f; t++) fz[16 * s + ORD16[t]] = 1'b1;
    end
  endfunction

  // Code P2 (N = 1024, K = 768): 6 x 16, 12 x 10, 2 x 8, 12 x 2, 32 x 0 frozen.
  function automatic void make_frozen_p2(output logic fz [1024]);
    int c [5] = '{16, 10, 8, 2, 0};
    int r [5] = '{ 6, 12, 2, 12, 32};
    int s = 0;
    for (int j = 0; j < 1024; j++) fz[j] = 1'b0;
    for (int g = 0; g < 5; g++)
      for (int k = 0; k < r[g]; k++) begin
        for (int t = 0; t < c[g]; t++) fz[16 * s + ORD16[t]] = 1'b1;
        s++;
      end
  endfunction

  // paper: M_SN(F) for 16-bit sub-codes and C_sort (list size 2)
  function automatic int subcode_cycles(input int f);
    int msn;
    if (f == 0 || f == 1 || f == 2 || f == 14 || f == 15 || f == 16) msn = 1;
    else if (f == 7 || f == 8 || f == 9) msn = 2;
    else msn = 3;
    return msn + ((f == 0 || f == 16) ? 0 : 1);
  endfunction

  function automatic int expected_cs(input int n, input int p);
    int c = n / (2 * p) + n / 16 - 1;
    for (int s = 0; s < n / 16; s++) c += subcode_cycles(frozen_count(n, s));
    return c;
  endfunction

  function automatic logic [23:0] crc24(input logic bits [1024], input int nb);
    logic [23:0] r = '0;
    for (int j = 0; j < nb; j++)
      r = {r[22:0], 1'b0} ^ ((r[23] ^ bits[j]) ? 24'h864CFB : 24'h0);
    return r;
  endfunction

  // Generic r-bit CRC (r <= 32), MSB first, zero start.
  function automatic logic [31:0] crc_gen(input logic bits [1024], input int nb,
                                          input int r, input logic [31:0] poly);
    logic [31:0] c = '0;
    for (int j = 0; j < nb; j++)
      c = ((c << 1) ^ ((c[r-1] ^ bits[j]) ? poly : 32'h0)) & ((32'h1 << r) - 1);
    return c;
  endfunction

  // Random message + r-bit CRC placed on the information set.
  function automatic void make_source_r(input int n, input logic fz [1024], input int r,
                                        input logic [31:0] poly, output logic u [1024]);
    logic msg [1024];
    int k = 0, kk = 0;
    logic [31:0] c;
    for (int j = 0; j < n; j++) if (!fz[j]) k++;
    for (int j = 0; j < 1024; j++) msg[j] = 1'b0;
    for (int j = 0; j < k - r; j++) msg[j] = 1'($urandom);
    c = crc_gen(msg, k - r, r, poly);
    for (int j = 0; j < r; j++) msg[k - r + j] = c[r - 1 - j];
    for (int j = 0; j < 1024; j++) u[j] = 1'b0;
    for (int j = 0; j < n; j++) if (!fz[j]) begin u[j] = msg[kk]; kk++; end
  endfunction

  // Random message + CRC placed on the information set.
  function automatic void make_source(input int n, input logic fz [1024], output logic u [1024]);
    logic msg [1024];
    int k = 0, kk = 0;
    logic [23:0] c;
    for (int j = 0; j < n; j++) if (!fz[j]) k++;
    for (int j = 0; j < 1024; j++) msg[j] = 1'b0;
    for (int j = 0; j < k - 24; j++) msg[j] = 1'($urandom);
    c = crc24(msg, k - 24);
    for (int j = 0; j < 24; j++) msg[k - 24 + j] = c[23 - j];
    for (int j = 0; j < 1024; j++) u[j] = 1'b0;
    for (int j = 0; j < n; j++) if (!fz[j]) begin u[j] = msg[kk]; kk++; end
  endfunction

  function automatic void encode(input int n, input logic u [1024], output logic x [1024]);
    x = u;
    for (int s = 1; s < n; s = s * 2)
      for (int j = 0; j < n; j++)
        if ((j & s) == 0) x[j] = x[j] ^ x[j | s];
  endfunction

  // Q-bit LLRs of a BPSK codeword: amplitude amp plus uniform noise in
  // [-nz, nz] (sum of two uniforms), saturated to +-(2^(Q-1)-1).
  function automatic void modulate(input int n, input logic x [1024], input int amp,
                                   input int nz, input int q, output int llr [1024]);
    int lim = (1 << (q - 1)) - 1;
    for (int j = 0; j < 1024; j++) llr[j] = 0;
    for (int j = 0; j < n; j++) begin
      int v = x[j] ? -amp : amp;
      if (nz > 0) v += int'($urandom_range(2 * nz)) - nz + int'($urandom_range(2 * nz)) - nz;
      if (v > lim) v = lim;
      if (v < -lim) v = -lim;
      llr[j] = v;
    end
  endfunction

  function automatic int fmin(input int a, input int b);
    int ma = a < 0 ? -a : a;
    int mb = b < 0 ? -b : b;
    int m = ma < mb ? ma : mb;
    return ((a < 0) != (b < 0)) ? -m : m;
  endfunction

  // Successive-cancellation decoding, min-sum, stage arrays.
  function automatic void sc_decode(input int n, input logic fz [1024], input int llr [1024],
                                    output logic u [1024]);
    int   lg = $clog2(n);
    int   L [11][1024];
    logic PS [11][1024];
    for (int j = 0; j < 1024; j++) begin u[j] = 0; L[lg][j] = llr[j]; end
    for (int i = 0; i < n; i++) begin
      int top = lg - 1;
      if (i > 0) begin top = 0; while (((i >> top) & 1) == 0) top++; end
      for (int s = top; s >= 0; s--) begin
        int w = 1 << s;
        for (int j = 0; j < w; j++)
          if (((i >> s) & 1) == 0) L[s][j] = fmin(L[s+1][j], L[s+1][j + w]);
          else L[s][j] = (PS[s][j] ? -L[s+1][j] : L[s+1][j]) + L[s+1][j + w];
      end
      u[i] = fz[i] ? 1'b0 : (L[0][0] <= 0);
      begin
        logic cw [1024];
        cw[0] = u[i];
        for (int s = 0; s < lg; s++) begin
          int w = 1 << s;
          if (((i >> s) & 1) == 0) begin
            for (int j = 0; j < w; j++) PS[s][j] = cw[j];
            break;
          end
          for (int j = 0; j < w; j++) begin cw[j + w] = cw[j]; cw[j] = PS[s][j] ^ cw[j]; end
        end
      end
    end
  endfunction

endpackage
