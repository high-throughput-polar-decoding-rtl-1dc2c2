// ds_decoder_tb: self-checking test of the list-2 decoder D_s.
// Frames are polar codewords of a K-bit source word carrying a 24-bit CRC,
// sent as 6-bit LLRs.  Checks:
//  * clean and mildly noisy frames decode to the transmitted source word with
//    crc_ok = 1 (noisy frames exercise path splitting and list pruning),
//  * pure-noise frames report crc_ok = 0,
//  * the time from the first input word to `done` equals the paper's latency
//    formula C_s (203 cycles for N = 1024 with this frozen set),
//  * frames are loaded back to back (next load starts in the done cycle),
//  * every output word appears on consecutive cycles in order.
module ds_decoder_tb;
  import tb_polar_pkg::*;
  localparam int N = 1024, P = 64, Q = 6, CRW = N / (2 * P);
  localparam int NFR = 14;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] frozen;
  logic in_valid;
  logic signed [Q-1:0] in_llr [2*P];
  logic in_ready, done, crc_ok, out_valid, cfg_err;
  logic [2*P-1:0] out_data;

  ds_decoder #(.N(N), .P(P), .Q(Q)) dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic fz [1024];
  logic usrc [NFR][1024];
  int   kind [NFR];           // 0 clean, 1 noisy, 2 pure noise
  int   llr  [NFR][1024];
  int   tstart [NFR];
  int   exp_cs;

  // watchdog
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // driver: frames back to back
  initial begin
    logic x [1024];
    make_frozen(N, fz);
    for (int j = 0; j < N; j++) frozen[j] = fz[j];
    exp_cs = expected_cs(N, P);
    for (int f = 0; f < NFR; f++) begin
      kind[f] = (f < 3) ? 0 : (f == 6 || f == 11) ? 2 : 1;
      make_source(N, fz, usrc[f]);
      encode(N, usrc[f], x);
      if (kind[f] == 0)      modulate(N, x, 20, 0, Q, llr[f]);
      else if (kind[f] == 1) modulate(N, x, 8, 5, Q, llr[f]);
      else                   modulate(N, x, 0, 15, Q, llr[f]);
    end
    in_valid = 0;
    for (int j = 0; j < 2 * P; j++) in_llr[j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int f = 0; f < NFR; f++) begin
      while (!in_ready) @(posedge clk);
      #1;
      tstart[f] = cyc;
      for (int w = 0; w < CRW; w++) begin
        in_valid = 1;
        for (int j = 0; j < 2 * P; j++) in_llr[j] = Q'(llr[f][2 * P * w + j]);
        @(posedge clk);
        #1;
      end
      in_valid = 0;
      @(posedge clk);
    end
  end

  // monitor
  int fdone = 0, noisy_ok = 0, list_gain = 0;
  initial begin
    logic [N-1:0] got;
    bit ok;
    @(posedge rst_n);
    while (fdone < NFR) begin
      @(posedge clk);
      if (done) begin
        int f, lat;
        f   = fdone;
        lat = cyc - tstart[f];
        checks++;
        if (lat != exp_cs) begin
          failures++;
          $display("frame %0d: latency %0d, expected %0d", f, lat, exp_cs);
        end
        // gather output words
        for (int w = 0; w < CRW; w++) begin
          if (!out_valid) begin failures++; $display("frame %0d: out_valid low at word %0d", f, w); end
          got[2 * P * w +: 2 * P] = out_data;
          checks++;
          if (w < CRW - 1) @(posedge clk);
        end
        checks++;
        if (cfg_err) begin failures++; $display("cfg_err set"); end
        ok = 1;
        for (int j = 0; j < N; j++) if (got[j] != usrc[f][j]) ok = 0;
        checks++;
        if (kind[f] == 0) begin
          if (!crc_ok_at_done[f] || !ok) begin failures++; $display("clean frame %0d wrong (crc %0d)", f, crc_ok_at_done[f]); end
        end else if (kind[f] == 1) begin
          if (crc_ok_at_done[f] && !ok) begin failures++; $display("noisy frame %0d: crc ok but wrong word", f); end
          if (ok) noisy_ok++;
          begin
            logic usc [1024];
            bit scok;
            sc_decode(N, fz, llr[f], usc);
            scok = 1;
            for (int j = 0; j < N; j++) if (usc[j] != usrc[f][j]) scok = 0;
            if (ok && !scok) list_gain++;
          end
        end else begin
          if (crc_ok_at_done[f]) begin failures++; $display("noise frame %0d passed CRC", f); end
        end
        fdone++;
      end
    end
    checks++;
    if (noisy_ok < 6) begin failures++; $display("only %0d noisy frames decoded", noisy_ok); end
    $display("noisy frames decoded: %0d of %0d (%0d where SC fails), C_s = %0d",
             noisy_ok, NFR - 5, list_gain, exp_cs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic crc_ok_at_done [NFR];
  int   dcount = 0;
  always @(posedge clk) if (done) begin crc_ok_at_done[dcount] <= crc_ok; dcount <= dcount + 1; end

endmodule
