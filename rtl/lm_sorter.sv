// lm_sorter: list-management sorter of D_s (list size 2).
//
// After the special nodes of a 16-bit sub-code have expanded every surviving
// path, up to NC = 2^(max M_SN + 1) = 16 candidates exist.  The sorter picks
// the two valid candidates with the smallest path metrics (ties go to the
// lower index) and reports their indices.  Combinational, one cycle of the
// decoder; a full sort is not needed for list size 2, so the radix-16 sorter
// is built as a minimum search followed by a second minimum search.
module lm_sorter
  import ta_scl_pkg::*;
#(
  parameter int NC = 16
) (
  input  logic             valid [NC],
  input  pm_t              pm    [NC],
  output logic [$clog2(NC)-1:0] idx0,
  output logic [$clog2(NC)-1:0] idx1,
  output logic             v0,
  output logic             v1
);
  always_comb begin
    idx0 = '0; idx1 = '0; v0 = 1'b0; v1 = 1'b0;
    for (int i = 0; i < NC; i++)
      if (valid[i] && (!v0 || pm[i] < pm[idx0])) begin
        idx0 = ($clog2(NC))'(i);
        v0   = 1'b1;
      end
    for (int i = 0; i < NC; i++)
      if (valid[i] && (i != int'(idx0)) && (!v1 || pm[i] < pm[idx1])) begin
        idx1 = ($clog2(NC))'(i);
        v1   = 1'b1;
      end
  end
endmodule
