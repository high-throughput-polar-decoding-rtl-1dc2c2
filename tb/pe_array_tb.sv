// pe_array_tb: checks the processing-element array of D_s against integer
// reference formulas.  For random LLR pairs (a, b) in the symmetric range
// [-63, 63] it expects
//   f  = sign(a) sign(b) min(|a|, |b|)          (min-sum F)
//   g0 = clamp(b + a),  g1 = clamp(b - a)       (G for partial sum 0 / 1)
// with clamp to [-63, 63].  The array is combinational, so there is no
// cycle count to check; a clock only paces the vectors and drives the
// watchdog.
//
// The min-sum F and the look-ahead pair of G outputs follow the paper;
// the symmetric clamp range is this design's own choice.
module pe_array_tb;
  import ta_scl_pkg::*;
  localparam int NPE = 256;
  logic clk = 0;
  always #5 clk = ~clk;
  llr_t a [NPE], b [NPE], f [NPE], g0 [NPE], g1 [NPE];
  pe_array #(.NPE(NPE)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int clamp(input int v);
    return (v > 63) ? 63 : (v < -63) ? -63 : v;
  endfunction

  initial begin
    int ia, ib, ef, m;
    for (int t = 0; t < 20; t++) begin
      for (int j = 0; j < NPE; j++) begin
        // include the extreme values regularly
        a[j] = llr_t'((t < 2) ? ((j % 2) ? 63 : -63) : int'($urandom_range(126)) - 63);
        b[j] = llr_t'((t == 1) ? ((j % 3) ? -63 : 63) : int'($urandom_range(126)) - 63);
      end
      @(posedge clk);
      #1;
      for (int j = 0; j < NPE; j++) begin
        ia = int'(a[j]); ib = int'(b[j]);
        m  = ((ia < 0) ? -ia : ia) < ((ib < 0) ? -ib : ib) ? ((ia < 0) ? -ia : ia) : ((ib < 0) ? -ib : ib);
        ef = ((ia < 0) != (ib < 0)) ? -m : m;
        checks += 3;
        if (int'(f[j]) != ef)                begin failures++; $display("f(%0d,%0d)=%0d", ia, ib, f[j]); end
        if (int'(g0[j]) != clamp(ib + ia))   begin failures++; $display("g0(%0d,%0d)=%0d", ia, ib, g0[j]); end
        if (int'(g1[j]) != clamp(ib - ia))   begin failures++; $display("g1(%0d,%0d)=%0d", ia, ib, g1[j]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
