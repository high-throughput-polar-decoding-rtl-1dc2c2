// lm_sorter_tb: checks the list-management sorter of D_s.  For random path
// metrics and random valid masks over the 16 candidates it works out, by a
// plain scan, the smallest and second-smallest valid metric with ties taken
// by the lower index, and compares indices and valid flags.  Metric values
// are drawn from a small range so that ties are frequent.  Combinational
// block: no cycle count.
//
// The 16-candidate width follows the paper (three special nodes per
// sub-code); the lower-index tie rule is this design's own.
module lm_sorter_tb;
  import ta_scl_pkg::*;
  localparam int NC = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic valid [NC];
  pm_t  pm [NC];
  logic [3:0] idx0, idx1;
  logic v0, v1;
  lm_sorter #(.NC(NC)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e0, e1, nv;
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < NC; i++) begin
        valid[i] = (t % 4 == 0) ? ($urandom_range(7) == 0) : ($urandom_range(3) != 0);
        pm[i]    = pm_t'((t % 2) ? $urandom_range(7) : $urandom_range(255));
      end
      e0 = -1; e1 = -1; nv = 0;
      for (int i = 0; i < NC; i++) if (valid[i]) begin
        nv++;
        if (e0 < 0 || pm[i] < pm[e0]) e0 = i;
      end
      for (int i = 0; i < NC; i++) if (valid[i] && i != e0)
        if (e1 < 0 || pm[i] < pm[e1]) e1 = i;
      @(posedge clk);
      #1;
      checks += 2;
      if (v0 != (nv >= 1) || v1 != (nv >= 2)) begin
        failures++; $display("valid flags %0d %0d for %0d candidates", v0, v1, nv);
      end
      if ((nv >= 1 && int'(idx0) != e0) || (nv >= 2 && int'(idx1) != e1)) begin
        failures++; $display("indices %0d %0d, expected %0d %0d", idx0, idx1, e0, e1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
