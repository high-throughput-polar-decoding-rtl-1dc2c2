// ds_decoder: the small-list decoder D_s of the TA-SCL decoder, a low-latency
// successive-cancellation list (LL-SCL) decoder with list size 2.
//
// Operation of one frame (N channel LLRs, list size 2):
//  1. Load: N LLRs arrive as CRW = N/2P words of 2P LLRs (in_valid); the last
//     word starts decoding.                                    C_rw cycles
//  2. High stages (stage > m = 4): the scheduling tree above the 16-bit
//     sub-codes is walked depth first.  Visiting an internal node takes one
//     cycle in which the PE arrays (one of N/4 PEs per path, pe_array) produce
//     the F outputs of the left child and both look-ahead G outputs of the
//     right child.  A right child later takes the G output picked by its
//     partial sums, with no extra cycle.                  N/16 - 1 cycles
//  3. Low stages: each 16-bit sub-code is split into at most three special
//     nodes (ta_scl_pkg::decompose16).  One cycle per special node: every
//     candidate path gets its node LLRs from the sub-code LLRs and its own
//     decisions so far, and snd_unit doubles it.  All candidates are kept
//     until the end of the sub-code, when lm_sorter keeps the best two (one
//     more cycle).  A sub-code that is all frozen or all information takes a
//     single cycle and no sort: each path keeps its own best word.
//  4. At the end the surviving path that passes CRC with the smaller path
//     metric is chosen (the smaller-metric path if none passes).
// So C_s = C_rw + (N/16 - 1) + sum over sub-codes of (M_SN + C_sort), the
// latency formula of the paper.
//
// Interface: `done` pulses for one cycle C_s cycles after the first input
// word, when crc_ok is valid and the first of CRW output words (2P decoded
// source bits u_hat each, bit j of word w = u_hat[2P*w + j]) appears on
// out_data; the rest follow on consecutive cycles.  in_ready is high in that
// same cycle, so a new frame can be loaded back to back while the previous
// result streams out.  `frozen` (1 = frozen bit) must be stable while a frame
// is decoded; cfg_err flags a sub-code that needs more than three special
// nodes, which the hardware does not support.
//
// Follows the paper: list size 2, 16-bit multi-bit sub-codes, G-node
// look-ahead, full parallelism at high stages, special-node classes,
// one sort per sub-code, Q_s,LLR = 7 and Q_s,PM = 8.  This design's own
// choices: the LLR memories are registers; every stage of each path keeps its
// F and both G outputs (the paper shares one N/2-LLR F memory), so a list
// pruning step copies a path's whole state in one clock edge; path metrics
// saturate instead of being normalised; the channel LLR width Q = 6 is the
// width the LLR buffer carries and is sign-extended to 7 bits.
module ds_decoder
  import ta_scl_pkg::*;
#(
  parameter int N = 1024,
  parameter int P = 64,
  parameter int Q = 6,
  parameter int CRC_R = 24,
  parameter logic [CRC_R-1:0] CRC_POLY = 24'h864CFB
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N-1:0]        frozen,
  input  logic                in_valid,
  input  logic signed [Q-1:0] in_llr [2*P],
  output logic                in_ready,
  output logic                done,
  output logic                crc_ok,
  output logic                out_valid,
  output logic [2*P-1:0]      out_data,
  output logic                cfg_err
);
  localparam int LOGN   = $clog2(N);
  localparam int NSUB   = N / 16;
  localparam int LOGSUB = LOGN - 4;
  localparam int CRW    = N / (2 * P);
  localparam int NPE    = N / 4;

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_VISIT, S_SN, S_SORT} state_e;

  // ---------------- state -------------------------------------------------
  state_e state;
  logic [LOGSUB-1:0]          sub;       // current 16-bit sub-code
  logic [$clog2(LOGN+1)-1:0]  vs;        // stage of the node being visited
  logic [1:0]                 k;         // special node index in the sub-code
  logic [$clog2(CRW+1)-1:0]   lcnt;      // load word counter
  logic [$clog2(CRW+1)-1:0]   ocnt;      // output word counter

  llr_t ch [N];                          // channel LLR memory
  llr_t fb [2][LOGN][N/2];               // F-node LLRs, per path and stage
  llr_t g0 [2][LOGN][N/2];               // G-node LLRs, partial sum 0
  llr_t g1 [2][LOGN][N/2];               // G-node LLRs, partial sum 1
  logic [N/2-1:0] ps [2][LOGN];          // partial-sum memory
  logic [N-1:0]   pmem [2];              // path memory (decided source bits)
  pm_t            pm   [2];
  logic [CRC_R-1:0] crc [2];
  logic           pv   [2];              // path valid

  logic           cv   [NCAND];          // expanded candidates
  logic           cpar [NCAND];
  logic [15:0]    cu   [NCAND];
  pm_t            cpm  [NCAND];

  logic           done_r;
  logic [N-1:0]   obuf;

  // ---------------- high stages: node LLRs and PE arrays -------------------
  llr_t nin [2][N];
  llr_t pa [2][NPE], pb [2][NPE], pf [2][NPE], pg0 [2][NPE], pg1 [2][NPE];
  logic root;
  logic right_child;
  int   h;

  always_comb begin
    root        = (int'(vs) == LOGN);
    right_child = !root && sub[(int'(vs) - 4) % LOGSUB];
    h           = 1 << (int'(vs) - 1);
    for (int p = 0; p < 2; p++)
      for (int j = 0; j < N; j++) begin
        if (root)             nin[p][j] = ch[j];
        else if (j >= N/2)    nin[p][j] = '0;
        else if (right_child) nin[p][j] = ps[p][int'(vs) % LOGN][j] ? g1[p][int'(vs) % LOGN][j]
                                                                   : g0[p][int'(vs) % LOGN][j];
        else                  nin[p][j] = fb[p][int'(vs) % LOGN][j];
      end
    for (int p = 0; p < 2; p++)
      for (int j = 0; j < NPE; j++) begin
        if (root) begin               // stage n-1 is shared: each array does half
          pa[p][j] = ch[p * NPE + j];
          pb[p][j] = ch[p * NPE + j + N/2];
        end else begin
          pa[p][j] = nin[p][j];
          pb[p][j] = nin[p][(j + h) % N];
        end
      end
  end

  for (genvar p = 0; p < 2; p++) begin : g_pe
    pe_array #(.NPE(NPE)) u_pe (
      .a(pa[p]), .b(pb[p]), .f(pf[p]), .g0(pg0[p]), .g1(pg1[p]));
  end

  // ---------------- low stages: special nodes of the current sub-code ------
  sn_plan_t    plan;
  logic [15:0] frz16, info16;
  sn_desc_t    node;
  logic        whole;
  llr_t        a16 [2][16];

  always_comb begin
    frz16  = frozen[16 * int'(sub) +: 16];
    info16 = ~frz16;
    plan   = decompose16(frz16);
    node   = plan.sn[k];
    whole  = (plan.num == 2'd1) && (plan.sn[0].lgt == 3'd4) &&
             (plan.sn[0].ntype == NT_RATE0 || plan.sn[0].ntype == NT_RATE1);
    for (int p = 0; p < 2; p++)
      for (int j = 0; j < 16; j++)
        a16[p][j] = sub[0] ? (ps[p][4][j] ? g1[p][4][j] : g0[p][4][j]) : fb[p][4][j];
  end

  logic        iv   [NIN];
  logic        ipar [NIN];
  logic [15:0] iu   [NIN];
  pm_t         ipm  [NIN];
  llr_t        nl   [NIN][16];
  logic [15:0] sx0 [NIN], sx1 [NIN];
  logic [10:0] sp0 [NIN], sp1 [NIN];
  logic        sv1 [NIN];

  always_comb begin
    for (int c = 0; c < NIN; c++) begin
      if (k == 2'd0) begin
        iv[c]   = (c < 2) ? pv[c % 2] : 1'b0;
        ipar[c] = c[0];
        iu[c]   = '0;
        ipm[c]  = pm[c % 2];
      end else begin
        iv[c]   = cv[c];
        ipar[c] = cpar[c];
        iu[c]   = cu[c];
        ipm[c]  = cpm[c];
      end
      node_llr(a16[ipar[c]], iu[c], node.off, node.lgt, nl[c]);
    end
  end

  for (genvar c = 0; c < NIN; c++) begin : g_snd
    snd_unit u_snd (
      .alpha(nl[c]), .lgt(node.lgt), .ntype(node.ntype),
      .x0(sx0[c]), .x1(sx1[c]), .pen0(sp0[c]), .pen1(sp1[c]), .v1(sv1[c]));
  end

  logic        nv   [NCAND];
  logic        npar [NCAND];
  logic [15:0] nu   [NCAND];
  pm_t         npm  [NCAND];

  always_comb begin
    for (int c = 0; c < NIN; c++) begin
      nv[2*c]     = iv[c];
      nv[2*c+1]   = iv[c] && sv1[c];
      npar[2*c]   = ipar[c];
      npar[2*c+1] = ipar[c];
      nu[2*c]     = iu[c] | 16'(polar_enc16(sx0[c], node.lgt) << node.off);
      nu[2*c+1]   = iu[c] | 16'(polar_enc16(sx1[c], node.lgt) << node.off);
      npm[2*c]    = sat_add_pm(ipm[c], sp0[c]);
      npm[2*c+1]  = sat_add_pm(ipm[c], sp1[c]);
    end
  end

  logic [$clog2(NCAND)-1:0] w0, w1;
  logic wv0, wv1;
  lm_sorter #(.NC(NCAND)) u_sort (
    .valid(cv), .pm(cpm), .idx0(w0), .idx1(w1), .v0(wv0), .v1(wv1));

  // ---------------- commit of a sub-code ----------------------------------
  logic        cm_v   [2];
  logic        cm_par [2];
  logic [15:0] cm_u   [2];
  pm_t         cm_pm  [2];
  logic [CRC_R-1:0] cm_crc_in [2], cm_crc [2];
  logic [N/2-1:0] psn [2][LOGN];
  logic [N-1:0]   cw;
  logic [N-1:0]   msk;
  logic           stored;

  always_comb begin
    for (int q = 0; q < 2; q++) begin
      if (state == S_SN) begin          // whole Rate-0 / Rate-1 sub-code
        cm_v[q]   = nv[2*q];
        cm_par[q] = npar[2*q];
        cm_u[q]   = nu[2*q];
        cm_pm[q]  = npm[2*q];
      end else begin
        cm_v[q]   = (q == 0) ? wv0 : wv1;
        cm_par[q] = (q == 0) ? cpar[w0] : cpar[w1];
        cm_u[q]   = (q == 0) ? cu[w0]   : cu[w1];
        cm_pm[q]  = (q == 0) ? cpm[w0]  : cpm[w1];
      end
      cm_crc_in[q] = crc[cm_par[q]];
      // partial sums: climb from stage 4 while the finished node is a right child
      psn[q] = ps[cm_par[q]];
      cw     = '0;
      cw[15:0] = polar_enc16(cm_u[q], 3'd4);
      stored = 1'b0;
      for (int s = 4; s < LOGN; s++) begin
        if (!stored) begin
          msk = (N'(1) << (1 << s)) - N'(1);
          if (!sub[(s - 4) % LOGSUB]) begin
            psn[q][s] = cw[N/2-1:0];
            stored    = 1'b1;
          end else begin
            cw = ((cw & msk) << (1 << s)) | (({{(N/2){1'b0}}, ps[cm_par[q]][s]} ^ cw) & msk);
          end
        end
      end
    end
  end

  for (genvar q = 0; q < 2; q++) begin : g_crc
    crc_update #(.R(CRC_R), .POLY(CRC_POLY)) u_crc (
      .crc_in(cm_crc_in[q]), .u(cm_u[q]), .info(info16), .crc_out(cm_crc[q]));
  end

  // ---------------- final selection --------------------------------------
  logic pass0, pass1, best;
  always_comb begin
    pass0  = pv[0] && (crc[0] == '0);
    pass1  = pv[1] && (crc[1] == '0);
    crc_ok = pass0 || pass1;
    if (pass0 && pass1)      best = (pm[1] < pm[0]);
    else if (pass0)          best = 1'b0;
    else if (pass1)          best = 1'b1;
    else                     best = pv[1] && (!pv[0] || pm[1] < pm[0]);
  end

  assign done      = done_r;
  assign in_ready  = (state == S_IDLE);
  assign out_valid = done_r || (ocnt != '0);
  assign out_data  = done_r ? pmem[best][2*P-1:0] : obuf[2*P*int'(ocnt) +: 2*P];

  logic commit, last_sub;
  logic [LOGSUB:0] nsub;
  int   tz;
  always_comb begin
    commit   = (state == S_SORT) || (state == S_SN && whole);
    last_sub = (sub == LOGSUB'(NSUB - 1));
    nsub     = {1'b0, sub} + 1'b1;
    tz = 0;
    for (int b = LOGSUB - 1; b >= 0; b--) if (nsub[b]) tz = b;
  end

  // ---------------- sequential part --------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      sub     <= '0;
      vs      <= '0;
      k       <= '0;
      lcnt    <= '0;
      ocnt    <= '0;
      done_r  <= 1'b0;
      cfg_err <= 1'b0;
      for (int q = 0; q < 2; q++) begin
        pv[q] <= 1'b0; pm[q] <= '0; crc[q] <= '0;
      end
      for (int c = 0; c < NCAND; c++) begin
        cv[c] <= 1'b0; cpar[c] <= 1'b0; cu[c] <= '0; cpm[c] <= '0;
      end
    end else begin
      done_r <= 1'b0;
      // output stream of the previous result
      if (done_r) begin
        obuf <= pmem[best];
        ocnt <= (CRW > 1) ? 1 : 0;
      end else if (ocnt != '0) begin
        ocnt <= (int'(ocnt) == CRW - 1) ? '0 : ocnt + 1'b1;
      end

      unique case (state)
        S_IDLE, S_LOAD: begin
          if (in_valid) begin
            for (int j = 0; j < 2 * P; j++)
              ch[2 * P * int'(lcnt) + j] <= llr_t'(in_llr[j]);
            if (int'(lcnt) == CRW - 1) begin
              lcnt  <= '0;
              state <= S_VISIT;
              vs    <= ($clog2(LOGN+1))'(LOGN);
              sub   <= '0;
              k     <= '0;
              pv[0] <= 1'b1; pv[1] <= 1'b0;
              pm[0] <= '0;   pm[1] <= '0;
              crc[0] <= '0;  crc[1] <= '0;
            end else begin
              lcnt  <= lcnt + 1'b1;
              state <= S_LOAD;
            end
          end
        end

        S_VISIT: begin
          for (int p = 0; p < 2; p++)
            for (int j = 0; j < NPE; j++) begin
              if (root) begin
                for (int pp = 0; pp < 2; pp++) begin
                  fb[pp][LOGN-1][p * NPE + j] <= pf[p][j];
                  g0[pp][LOGN-1][p * NPE + j] <= pg0[p][j];
                  g1[pp][LOGN-1][p * NPE + j] <= pg1[p][j];
                end
              end else if (j < h) begin
                fb[p][(int'(vs) - 1) % LOGN][j] <= pf[p][j];
                g0[p][(int'(vs) - 1) % LOGN][j] <= pg0[p][j];
                g1[p][(int'(vs) - 1) % LOGN][j] <= pg1[p][j];
              end
            end
          if (int'(vs) == 5) begin
            state <= S_SN;
            k     <= '0;
          end else begin
            vs <= vs - 1'b1;
          end
        end

        S_SN: begin
          if (!plan.ok) cfg_err <= 1'b1;
          if (!whole) begin
            for (int c = 0; c < NCAND; c++) begin
              cv[c] <= nv[c]; cpar[c] <= npar[c]; cu[c] <= nu[c]; cpm[c] <= npm[c];
            end
            if (k == plan.num - 2'd1) state <= S_SORT;
            else                      k     <= k + 1'b1;
          end
        end

        S_SORT: ;

        default: state <= S_IDLE;
      endcase

      if (commit) begin
        for (int q = 0; q < 2; q++) begin
          pv[q] <= cm_v[q];
          if (cm_v[q]) begin
            pm[q]   <= cm_pm[q];
            crc[q]  <= cm_crc[q];
            for (int j = 0; j < N; j++)
              pmem[q][j] <= (j / 16 == int'(sub)) ? cm_u[q][j % 16] : pmem[cm_par[q]][j];
            for (int s = 0; s < LOGN; s++) begin
              ps[q][s] <= psn[q][s];
              for (int j = 0; j < N/2; j++) begin
                fb[q][s][j] <= fb[cm_par[q]][s][j];
                g0[q][s][j] <= g0[cm_par[q]][s][j];
                g1[q][s][j] <= g1[cm_par[q]][s][j];
              end
            end
          end
        end
        k <= '0;
        if (last_sub) begin
          state  <= S_IDLE;
          done_r <= 1'b1;
        end else begin
          sub <= nsub[LOGSUB-1:0];
          if (tz == 0) state <= S_SN;
          else begin
            state <= S_VISIT;
            vs    <= ($clog2(LOGN+1))'(4 + tz);
          end
        end
      end
    end
  end

endmodule
