// dl_model: behavioural stand-in for the large-list decoder D_l of the
// TA-SCL decoder (not synthesizable, testbench only).
//
// It honours the timing contract of ta_scl_top's D_l ports: after dl_start it
// collects N/2P words of 2P LLRs (dl_llr_valid), decodes them, and exactly C_L
// cycles after dl_start streams the N decoded bits as N/2P words of 2P bits.
// A new start may arrive in the first output cycle.  The decoding itself is
// plain successive cancellation (tb_polar_pkg::sc_decode), which stands in
// for the real large-list decoder; every decoded vector is also kept in
// `hist` so a testbench can compare the top's output with it.
module dl_model
  import tb_polar_pkg::*;
#(
  parameter int N   = 1024,
  parameter int P   = 64,
  parameter int Q   = 6,
  parameter int C_L = 647
) (
  input  logic                clk,
  input  logic [N-1:0]        frozen,
  input  logic                start,
  input  logic                llr_valid,
  input  logic signed [Q-1:0] llr [2*P],
  output logic                out_valid,
  output logic [2*P-1:0]      out_data
);
  localparam int CRW = N / (2 * P);

  int   cnt = -1;            // cycles since start, -1 = idle
  int   widx = 0;
  int   lbuf [1024];
  logic res [1024];
  logic ores [1024];
  int   ocnt = -1;
  int   ndec = 0;
  logic [N-1:0] hist [$];

  always @(posedge clk) begin
    if (start) begin
      cnt  <= 1;
      widx <= 0;
    end else if (cnt >= 0) begin
      cnt <= cnt + 1;
    end
    if (llr_valid) begin
      for (int j = 0; j < 2 * P; j++) lbuf[2 * P * widx + j] = int'(llr[j]);
      widx <= widx + 1;
      if (widx == CRW - 1) begin
        logic fz [1024];
        logic [N-1:0] hv;
        for (int j = 0; j < 1024; j++) fz[j] = (j < N) ? frozen[j] : 1'b1;
        sc_decode(N, fz, lbuf, res);
        for (int j = 0; j < N; j++) hv[j] = res[j];
        hist.push_back(hv);
        ndec <= ndec + 1;
      end
    end
    if (cnt == C_L - 1) begin
      ores = res;
      ocnt <= 0;
      cnt  <= start ? 1 : -1;
    end else if (ocnt >= 0) begin
      ocnt <= (ocnt == CRW - 1) ? -1 : ocnt + 1;
    end
  end

  always_comb begin
    out_valid = (ocnt >= 0);
    for (int j = 0; j < 2 * P; j++) out_data[j] = (ocnt >= 0) ? ores[2 * P * ocnt + j] : 1'b0;
  end
endmodule
