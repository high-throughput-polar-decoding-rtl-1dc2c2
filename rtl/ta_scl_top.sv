// ta_scl_top: two-staged adaptive SCL (TA-SCL) polar decoder.
//
// Every frame is decoded first by the fast list-2 decoder D_s (ds_decoder),
// which accepts one frame every C_S cycles, so the input data rate is fixed
// whatever the channel.  A frame whose result fails the CRC is decoded again
// by the slow large-list decoder D_l, which needs C_L cycles per frame
// (beta = C_L / C_S).  D_l is outside this module: its start, LLR stream and
// result stream are ports.
//
//  * LLR buffer (llr_buffer, ZETA+1 frames): every incoming frame is written
//    to a free slot while D_s loads it.  If D_s passes, the slot is free
//    again; if it fails, the slot waits in a FIFO for D_l.
//  * Overflow rule: let W be the work D_l still has (its remaining cycles plus
//    C_L per waiting frame) when D_s reports a failure.  The frame is queued
//    only if W <= ZETA * C_L; otherwise it is dropped (overflow pulse) and the
//    wrong D_s result stands.  In the units of the paper's Markov model this
//    is the hazard condition X > beta*zeta + 1 on the state at the start of
//    the frame, where the frame in D_s is thrown away.
//  * D_l is started in the first cycle it is idle and a frame waits (or in
//    the cycle of the failure, if nothing waits); it receives the frame as
//    N/2P words of 2P LLRs on consecutive cycles, one cycle after dl_start.
//  * Output buffer (output_buffer, FRAMES = floor((ZETA+1)*C_L/C_S) + 1
//    frames): frame f goes to slot f mod FRAMES.  Port A takes the D_s result
//    (N/2P words, starting in D_s's done cycle) and the final reads; port B
//    takes the D_l result, which overwrites D_s's.  Frame f is read out
//    C_S + (ZETA+1)*C_L + N/2P cycles after its first input word, i.e.
//    C_s + C_s(beta*zeta + beta) + C_rw as in the paper, and appears on
//    out_data one cycle later (registered RAM read).
//
// Timing contract of the D_l ports: dl_out_valid words (N/2P of them, 2P
// decoded bits each, in order) must start exactly C_L cycles after dl_start;
// a new dl_start may come in that same cycle.
//
// Follows the paper: the four sub-blocks and their port widths, buffer sizes,
// system latency, the choice to drop the frame in D_s on overflow.  This
// design's own choices: slot allocation (lowest free slot), FIFO order for
// D_l, the exact cycle-level overflow test above, and that the input source
// must present a frame every C_S cycles (in_ready shows when D_s can load).
// CRC_R / CRC_POLY are passed to D_s so that shorter codes with a shorter
// CRC can be built.  Two lint notes stand: port B of the output buffer is
// only written, so its read data is left open; rst_n is also sampled by the
// assertions' disable condition, which verilator reports as a synchronous use.
module ta_scl_top
  import ta_scl_pkg::*;
#(
  parameter int N    = 1024,
  parameter int P    = 64,
  parameter int Q    = 6,
  parameter int ZETA = 2,
  parameter int C_S  = 203,
  parameter int C_L  = 647,
  parameter int CRC_R = 24,
  parameter logic [CRC_R-1:0] CRC_POLY = 24'h864CFB,
  localparam int CRW    = N / (2 * P),
  localparam int SLOTS  = ZETA + 1,
  localparam int FRAMES = ((ZETA + 1) * C_L) / C_S + 1,
  localparam int LAT    = C_S + (ZETA + 1) * C_L + CRW
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N-1:0]        frozen,
  // channel side
  input  logic                in_valid,
  input  logic signed [Q-1:0] in_llr [2*P],
  output logic                in_ready,
  // decoded output, in input order
  output logic                out_valid,
  output logic                out_sof,
  output logic [2*P-1:0]      out_data,
  // large-list decoder D_l
  output logic                dl_start,
  output logic                dl_llr_valid,
  output logic signed [Q-1:0] dl_llr [2*P],
  input  logic                dl_out_valid,
  input  logic [2*P-1:0]      dl_out_data,
  // status
  output logic                ds_fail,
  output logic                overflow,
  output logic                cfg_err
);
  localparam int LAW = $clog2(CRW * SLOTS);
  localparam int OAW = $clog2(CRW * FRAMES);
  localparam int SW  = (SLOTS > 1) ? $clog2(SLOTS) : 1;
  localparam int FW  = (FRAMES > 1) ? $clog2(FRAMES) : 1;
  localparam int CW  = $clog2(CRW + 1);

  // ---------------- D_s ----------------------------------------------------
  logic ds_done, ds_crc_ok, ds_out_valid;
  logic [2*P-1:0] ds_out_data;

  ds_decoder #(.N(N), .P(P), .Q(Q), .CRC_R(CRC_R), .CRC_POLY(CRC_POLY)) u_ds (
    .clk, .rst_n, .frozen, .in_valid, .in_llr, .in_ready,
    .done(ds_done), .crc_ok(ds_crc_ok), .out_valid(ds_out_valid),
    .out_data(ds_out_data), .cfg_err);

  // ---------------- time base ----------------------------------------------
  logic [31:0] now;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) now <= '0; else now <= now + 1'b1;

  // ---------------- input side: slot allocation ----------------------------
  logic [CW-1:0]  ld_cnt;
  logic [SW-1:0]  ld_slot, ds_slot;
  logic [FW-1:0]  in_frame_slot, ld_oslot, ds_oslot;
  logic [SLOTS-1:0] busy;                // slot holds a frame that is needed
  logic [SLOTS-1:0] release_now;
  logic [SW-1:0]  new_slot;
  logic           first_word, last_word;

  // ---------------- D_l queue and work counter ------------------------------
  logic [SW-1:0]  q_slot  [SLOTS];
  logic [FW-1:0]  q_oslot [SLOTS];
  logic [SW:0]    q_cnt;
  logic [31:0]    rem;                   // D_l busy cycles left, this cycle included
  logic [31:0]    work;
  logic           keep, push, start, from_q;
  logic [SW-1:0]  st_slot;
  logic [FW-1:0]  st_oslot;

  always_comb begin
    first_word = in_valid && in_ready && (ld_cnt == '0);
    last_word  = in_valid && (int'(ld_cnt) == CRW - 1);
    work       = rem + 32'(q_cnt) * 32'(C_L);
    ds_fail    = ds_done && !ds_crc_ok;
    keep       = ds_fail && (work <= 32'(ZETA * C_L));
    overflow   = ds_fail && !keep;
    push       = keep;
    start      = (rem == '0) && (q_cnt != '0 || push);
    from_q     = (q_cnt != '0);
    st_slot    = from_q ? q_slot[0]  : ds_slot;
    st_oslot   = from_q ? q_oslot[0] : ds_oslot;
    // slots freed in this cycle: D_s result passed or dropped, or D_l starts
    // reading the slot (a write may follow a read of the same word)
    release_now = '0;
    if (ds_done && !keep) release_now[ds_slot] = 1'b1;
    if (start)            release_now[st_slot] = 1'b1;
    new_slot = '0;
    for (int s = SLOTS - 1; s >= 0; s--)
      if (!(busy[s] && !release_now[s])) new_slot = SW'(s);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_cnt <= '0; ld_slot <= '0; ds_slot <= '0; ld_oslot <= '0; ds_oslot <= '0;
      in_frame_slot <= '0; busy <= '0; q_cnt <= '0; rem <= '0;
      for (int s = 0; s < SLOTS; s++) begin q_slot[s] <= '0; q_oslot[s] <= '0; end
    end else begin
      // load counter and slot of the frame being loaded
      if (in_valid && (in_ready || ld_cnt != '0))
        ld_cnt <= (int'(ld_cnt) == CRW - 1) ? '0 : ld_cnt + 1'b1;
      busy <= (busy & ~release_now) |
              (first_word ? (SLOTS'(1) << new_slot) : '0);
      if (push && !(start && !from_q)) busy[ds_slot] <= 1'b1;
      if (first_word) begin
        ld_slot       <= new_slot;
        ld_oslot      <= in_frame_slot;
        in_frame_slot <= (int'(in_frame_slot) == FRAMES - 1) ? '0 : in_frame_slot + 1'b1;
      end
      if (last_word) begin
        ds_slot  <= first_word ? new_slot : ld_slot;
        ds_oslot <= first_word ? in_frame_slot : ld_oslot;
      end
      // queue
      begin
        logic [SW:0] n;
        n = q_cnt;
        if (start && from_q) begin
          for (int s = 0; s < SLOTS - 1; s++) begin
            q_slot[s]  <= q_slot[s+1];
            q_oslot[s] <= q_oslot[s+1];
          end
          n = n - 1'b1;
        end
        if (push && !(start && !from_q)) begin
          q_slot[SW'(n)]  <= ds_slot;
          q_oslot[SW'(n)] <= ds_oslot;
          n = n + 1'b1;
        end
        q_cnt <= n;
      end
      if (start)            rem <= 32'(C_L - 1);
      else if (rem != '0)   rem <= rem - 1'b1;
    end
  end

  // ---------------- LLR buffer ---------------------------------------------
  logic            lb_re;
  logic [LAW-1:0]  lb_raddr, lb_waddr;
  logic [2*P*Q-1:0] lb_wdata, lb_rdata;
  logic [SW-1:0]   rd_slot;
  logic [CW-1:0]   rd_cnt;
  logic            rd_act, rd_act_q;

  always_comb begin
    for (int j = 0; j < 2 * P; j++) lb_wdata[Q*j +: Q] = in_llr[j];
    lb_waddr = LAW'((first_word ? int'(new_slot) : int'(ld_slot)) * CRW + int'(ld_cnt));
    lb_re    = start || rd_act;
    lb_raddr = start ? LAW'(int'(st_slot) * CRW) : LAW'(int'(rd_slot) * CRW + int'(rd_cnt));
    for (int j = 0; j < 2 * P; j++) dl_llr[j] = lb_rdata[Q*j +: Q];
  end

  llr_buffer #(.N(N), .P(P), .Q(Q), .ZETA(ZETA)) u_lb (
    .clk, .we(in_valid && (in_ready || ld_cnt != '0)), .waddr(lb_waddr), .wdata(lb_wdata),
    .re(lb_re), .raddr(lb_raddr), .rdata(lb_rdata));

  logic [FW-1:0] dl_oslot, dlw_oslot;
  logic [CW-1:0] dlw_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_act <= 1'b0; rd_act_q <= 1'b0; rd_cnt <= '0; rd_slot <= '0; dl_oslot <= '0;
    end else begin
      rd_act_q <= lb_re;
      if (start) begin
        rd_slot  <= st_slot;
        dl_oslot <= st_oslot;
        rd_cnt   <= CW'(1);
        rd_act   <= (CRW > 1);
      end else if (rd_act) begin
        rd_cnt <= rd_cnt + 1'b1;
        if (int'(rd_cnt) == CRW - 1) rd_act <= 1'b0;
      end
    end
  end

  assign dl_start     = start;
  assign dl_llr_valid = rd_act_q;

  // ---------------- output buffer ------------------------------------------
  logic [CW-1:0]  dsw_cnt;
  logic [FW-1:0]  dsw_oslot;
  logic [FW-1:0]  due_oslot [FRAMES+1];
  logic [31:0]    due_time  [FRAMES+1];
  logic [$clog2(FRAMES+2)-1:0] due_cnt;
  logic           rdo_act, rdo_start, rdo_q, rdo_sof_q;
  logic [CW-1:0]  rdo_cnt;
  logic [FW-1:0]  rdo_oslot;
  logic           a_we, a_en;
  logic [OAW-1:0] a_addr, b_addr;
  logic [2*P-1:0] a_rdata;

  always_comb begin
    rdo_start = (due_cnt != '0) && (due_time[0] == now);
    a_we   = ds_out_valid;
    a_en   = ds_out_valid || rdo_start || rdo_act;
    if (ds_out_valid)
      a_addr = OAW'((ds_done ? int'(ds_oslot) : int'(dsw_oslot)) * CRW + (ds_done ? 0 : int'(dsw_cnt)));
    else if (rdo_start)
      a_addr = OAW'(int'(due_oslot[0]) * CRW);
    else
      a_addr = OAW'(int'(rdo_oslot) * CRW + int'(rdo_cnt));
    b_addr = OAW'(((dlw_cnt == '0) ? int'(dl_oslot) : int'(dlw_oslot)) * CRW + int'(dlw_cnt));
  end

  output_buffer #(.N(N), .P(P), .FRAMES(FRAMES)) u_ob (
    .clk,
    .en_a(a_en), .we_a(a_we), .addr_a(a_addr), .wdata_a(ds_out_data), .rdata_a(a_rdata),
    .en_b(dl_out_valid), .we_b(1'b1), .addr_b(b_addr), .wdata_b(dl_out_data), .rdata_b());

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dsw_cnt <= '0; dsw_oslot <= '0; dlw_cnt <= '0; dlw_oslot <= '0;
      due_cnt <= '0; rdo_act <= 1'b0; rdo_cnt <= '0; rdo_oslot <= '0;
      rdo_q <= 1'b0; rdo_sof_q <= 1'b0;
      for (int i = 0; i <= FRAMES; i++) begin due_oslot[i] <= '0; due_time[i] <= '0; end
    end else begin
      // D_s result words
      if (ds_done) begin
        dsw_oslot <= ds_oslot;
        dsw_cnt   <= CW'(1);
      end else if (ds_out_valid) begin
        dsw_cnt <= (int'(dsw_cnt) == CRW - 1) ? '0 : dsw_cnt + 1'b1;
      end
      // D_l result words
      if (dl_out_valid) begin
        if (dlw_cnt == '0) dlw_oslot <= dl_oslot;
        dlw_cnt <= (int'(dlw_cnt) == CRW - 1) ? '0 : dlw_cnt + 1'b1;
      end
      // read schedule: one entry per input frame
      begin
        logic [$clog2(FRAMES+2)-1:0] n;
        n = due_cnt;
        if (rdo_start) begin
          for (int i = 0; i < FRAMES; i++) begin
            due_time[i]  <= due_time[i+1];
            due_oslot[i] <= due_oslot[i+1];
          end
          n = n - 1'b1;
        end
        if (first_word) begin
          due_time[n]  <= now + 32'(LAT);
          due_oslot[n] <= in_frame_slot;
          n = n + 1'b1;
        end
        due_cnt <= n;
      end
      if (rdo_start) begin
        rdo_oslot <= due_oslot[0];
        rdo_cnt   <= CW'(1);
        rdo_act   <= (CRW > 1);
      end else if (rdo_act) begin
        rdo_cnt <= rdo_cnt + 1'b1;
        if (int'(rdo_cnt) == CRW - 1) rdo_act <= 1'b0;
      end
      rdo_q     <= rdo_start || rdo_act;
      rdo_sof_q <= rdo_start;
    end
  end

  assign out_valid = rdo_q;
  assign out_sof   = rdo_sof_q;
  assign out_data  = a_rdata;

  // ---------------- rules ---------------------------------------------------
  a_no_port_a_clash: assert property (@(posedge clk) disable iff (!rst_n)
    !(ds_out_valid && (rdo_start || rdo_act)));
  a_slot_free: assert property (@(posedge clk) disable iff (!rst_n)
    first_word |-> !(busy[new_slot] && !release_now[new_slot]));
  a_queue_bound: assert property (@(posedge clk) disable iff (!rst_n)
    int'(q_cnt) <= SLOTS);

endmodule
