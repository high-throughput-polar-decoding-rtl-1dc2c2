// ta_scl_top_d3_tb: end-to-end test of the TA-SCL decoder sized for the
// paper's short code (design D3: N = 256, K = 128 with an 8-bit CRC,
// P = 64, Q = 6, zeta = 2, C_l = 168), with the behavioural D_l stand-in
// dl_model.  The frozen set used here has the paper's numbers of sub-codes
// per latency group for this code, so D_s takes C_s = 53 cycles as in the
// paper; the CRC generator is the 8-bit polynomial 0x9B (own choice).  Otherwise it is the same test as
// the full-size one:
//
// Frames arrive back to back, one every C_s cycles.  "Good" frames are
// codewords with mild noise, which D_s decodes; "bad" frames are pure noise,
// which fail the CRC in D_s and go to D_l.  A burst of bad frames fills the
// LLR buffer.  The testbench runs its own copy of the paper's buffer model:
// with X the D_l work left (in cycles) at the start of a frame, a failing
// frame is dropped when X > zeta*C_l + C_s (hazard state), otherwise
// X grows by C_l; X falls by C_s per frame.  Checks:
//  * D_s finishes each frame exactly C_s cycles after its first word,
//  * ds_fail exactly on the bad frames, overflow exactly where the model
//    predicts, D_l started exactly for the kept bad frames,
//  * every frame comes out in input order, C_s + (zeta+1)C_l + C_rw + 1
//    cycles after its first input word,
//  * good frames carry the transmitted word, kept bad frames carry D_l's
//    result (which overwrote D_s's in the output buffer),
//  * each mechanism happened: D_s pass, D_l start while idle, queueing
//    behind a busy D_l, overflow, out-of-order completion.
//
// The buffer model and the sizes follow the paper; the cycle-exact keep rule,
// the D_l interface timing and the fixed output latency are this design's own.
module ta_scl_top_d3_tb;
  import tb_polar_pkg::*;
  localparam int N = 256, P = 64, Q = 6, ZETA = 2, C_S = 53, C_L = 168;
  localparam int CRC_R = 8;
  localparam logic [7:0] CRC_POLY = 8'h9B;
  localparam int CRW = N / (2 * P);
  localparam int LAT = C_S + (ZETA + 1) * C_L + CRW;
  localparam int NF = 30;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] frozen;
  logic in_valid, in_ready, out_valid, out_sof;
  logic signed [Q-1:0] in_llr [2*P];
  logic [2*P-1:0] out_data;
  logic dl_start, dl_llr_valid, dl_out_valid;
  logic signed [Q-1:0] dl_llr [2*P];
  logic [2*P-1:0] dl_out_data;
  logic ds_fail, overflow, cfg_err;

  ta_scl_top #(.N(N), .P(P), .Q(Q), .ZETA(ZETA), .C_S(C_S), .C_L(C_L),
               .CRC_R(CRC_R), .CRC_POLY(CRC_POLY)) dut (.*);

  dl_model #(.N(N), .P(P), .Q(Q), .C_L(C_L)) u_dl (
    .clk, .frozen, .start(dl_start), .llr_valid(dl_llr_valid), .llr(dl_llr),
    .out_valid(dl_out_valid), .out_data(dl_out_data));

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic fz [1024];
  logic usrc [NF][1024];
  bit   bad [NF];
  bit   exp_drop [NF];
  int   llr [NF][1024];
  int   tin [NF];

  // mechanism counters
  int n_pass = 0, n_idle_start = 0, n_queued = 0, n_overflow = 0, n_reorder = 0;

  task automatic finish_tb();
    $display("mechanisms: ds_pass=%0d dl_start_idle=%0d queued=%0d overflow=%0d out_of_order=%0d",
             n_pass, n_idle_start, n_queued, n_overflow, n_reorder);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (NF * C_S + LAT + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    finish_tb();
  end

  // stimulus and the reference buffer model
  initial begin
    logic x [1024];
    int X, Xb;
    make_frozen(N, fz);
    for (int j = 0; j < N; j++) frozen[j] = fz[j];
    for (int f = 0; f < NF; f++)
      bad[f] = (f == 3) || (f == 6) || (f == 7) || (f >= 10 && f <= 15) || (f == 20);
    X = 0;
    for (int f = 0; f < NF; f++) begin
      Xb = (X > C_S) ? X - C_S : 0;          // work left when D_s finishes f
      exp_drop[f] = 0;
      if (bad[f]) begin
        if (X > ZETA * C_L + C_S) exp_drop[f] = 1;
        else Xb += C_L;
      end
      X = Xb;
    end
    for (int f = 0; f < NF; f++) begin
      make_source_r(N, fz, CRC_R, 32'(CRC_POLY), usrc[f]);
      encode(N, usrc[f], x);
      if (bad[f]) modulate(N, x, 0, 15, Q, llr[f]);
      else        modulate(N, x, 9, 3, Q, llr[f]);
    end
    in_valid = 0;
    for (int j = 0; j < 2 * P; j++) in_llr[j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    #1;
    for (int f = 0; f < NF; f++) begin
      tin[f] = cyc;
      checks++;
      if (!in_ready) begin failures++; $display("frame %0d: D_s not ready", f); end
      for (int w = 0; w < C_S; w++) begin
        in_valid = (w < CRW);
        for (int j = 0; j < 2 * P; j++) in_llr[j] = (w < CRW) ? Q'(llr[f][2 * P * w + j]) : '0;
        @(posedge clk);
        #1;
      end
    end
    in_valid = 0;
  end

  // status monitor: D_s outcome per frame, overflow, D_l starts
  int nd = 0, n_dl_exp = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ds.done) begin
      checks++;
      if (cyc != tin[nd] + C_S) begin
        failures++; $display("frame %0d: D_s took %0d cycles, expected %0d", nd, cyc - tin[nd], C_S);
      end
      checks++;
      if (ds_fail != bad[nd]) begin
        failures++; $display("frame %0d: ds_fail=%0d, bad=%0d", nd, ds_fail, bad[nd]);
      end
      if (!ds_fail) n_pass++;
      checks++;
      if (overflow != (bad[nd] && exp_drop[nd])) begin
        failures++; $display("frame %0d: overflow=%0d, model %0d", nd, overflow, exp_drop[nd]);
      end
      if (overflow) n_overflow++;
      if (ds_fail && !overflow) begin
        n_dl_exp++;
        if (dl_start && dut.q_cnt == 0) n_idle_start++;
        else n_queued++;
      end
      nd++;
    end
    checks++;
    if (cfg_err) begin failures++; $display("cfg_err"); end
  end

  // output monitor
  initial begin
    int f = 0, kept = 0;
    logic [N-1:0] got;
    bit ok;
    @(posedge rst_n);
    while (f < NF) begin
      @(posedge clk);
      #1;
      if (out_sof) begin
        checks++;
        if (cyc != tin[f] + LAT + 1) begin
          failures++; $display("frame %0d: output at %0d, expected %0d", f, cyc - tin[f], LAT + 1);
        end
        for (int w = 0; w < CRW; w++) begin
          checks++;
          if (!out_valid) begin failures++; $display("frame %0d word %0d not valid", f, w); end
          got[2 * P * w +: 2 * P] = out_data;
          if (w < CRW - 1) begin @(posedge clk); #1; end
        end
        checks++;
        if (!bad[f]) begin
          ok = 1;
          for (int j = 0; j < N; j++) if (got[j] != usrc[f][j]) ok = 0;
          if (!ok) begin failures++; $display("good frame %0d wrong", f); end
        end else if (!exp_drop[f]) begin
          if (kept >= u_dl.hist.size() || got != u_dl.hist[kept]) begin
            failures++; $display("bad frame %0d: output is not D_l's result", f);
          end else n_reorder++;
          kept++;
        end else begin
          if (kept < u_dl.hist.size() && got == u_dl.hist[kept]) begin
            failures++; $display("dropped frame %0d carries a D_l result", f);
          end
        end
        f++;
      end
    end
    checks++;
    if (u_dl.ndec != n_dl_exp) begin
      failures++; $display("D_l decoded %0d frames, expected %0d", u_dl.ndec, n_dl_exp);
    end
    checks += 5;
    if (n_pass == 0)       begin failures++; $display("no D_s pass"); end
    if (n_idle_start == 0) begin failures++; $display("D_l never started from idle"); end
    if (n_queued == 0)     begin failures++; $display("no frame queued behind D_l"); end
    if (n_overflow == 0)   begin failures++; $display("no overflow"); end
    if (n_reorder == 0)    begin failures++; $display("no out-of-order result"); end
    finish_tb();
  end
endmodule
