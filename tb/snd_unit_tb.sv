// snd_unit_tb: checks the special-node decoder against exhaustive search.
// For each node type and length T (2..16) the testbench builds the node's
// code from its frozen pattern with its own polar transform (Rate-0: all
// frozen; Rate-1: none; Rep: all but the last bit; SPC: only bit 0; Rep2:
// all but the last two; SPC2: bits 0 and 1), lists every codeword, and
// computes each codeword's penalty (sum of |alpha| where it disagrees with
// the hard decision).  The unit must return a codeword of the code with the
// smallest penalty as its first candidate, and a different codeword with the
// second-smallest penalty as its second (none for Rate-0).  Penalties are
// compared rather than codewords, because ties may be broken either way.
// Combinational block: no cycle count.
//
// The node classes follow the paper's table of special nodes; the
// penalty metric and the two-candidates-per-node rule are this design's own.
module snd_unit_tb;
  import ta_scl_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  llr_t        alpha [16];
  logic [2:0]  lgt;
  node_type_e  ntype;
  logic [15:0] x0, x1;
  logic [10:0] pen0, pen1;
  logic        v1;
  snd_unit dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // x_j = XOR of u_i over all i whose bits include those of j
  function automatic logic [15:0] enc(input logic [15:0] u, input int t);
    logic [15:0] x;
    x = '0;
    for (int j = 0; j < t; j++)
      for (int i = 0; i < t; i++)
        if ((i & j) == j) x[j] = x[j] ^ u[i];
    return x;
  endfunction

  function automatic logic [15:0] frozen_of(input node_type_e nt, input int t);
    logic [15:0] m;
    m = (t == 16) ? 16'hffff : 16'((1 << t) - 1);
    case (nt)
      NT_RATE0: return m;
      NT_RATE1: return '0;
      NT_REP:   return m & ~(16'd1 << (t - 1));
      NT_SPC:   return 16'd1;
      NT_REP2:  return m & ~(16'd3 << (t - 2));
      default:  return 16'd3;
    endcase
  endfunction

  function automatic int penalty(input logic [15:0] x, input int t);
    int p = 0;
    for (int j = 0; j < t; j++)
      if (x[j] != (alpha[j] <= 0)) p += (alpha[j] < 0) ? -int'(alpha[j]) : int'(alpha[j]);
    return p;
  endfunction

  function automatic bit in_code(input logic [15:0] x, input node_type_e nt, input int t);
    logic [15:0] u;
    u = enc(x, t);                       // the transform is its own inverse
    return (u & frozen_of(nt, t)) == 0 && (t == 16 || (x >> t) == 0);
  endfunction

  initial begin
    node_type_e types [6] = '{NT_RATE0, NT_RATE1, NT_REP, NT_SPC, NT_REP2, NT_SPC2};
    int t, best, second, p, nfree;
    logic [15:0] fz, u;
    for (int rep = 0; rep < 12; rep++)
      for (int k = 0; k < 6; k++)
        for (int l = 1; l <= 4; l++) begin
          if ((types[k] == NT_REP2 || types[k] == NT_SPC2) && l < 2) continue;
          t = 1 << l;
          for (int j = 0; j < 16; j++)
            alpha[j] = llr_t'((rep == 0) ? 0 : int'($urandom_range(126)) - 63);
          if (rep == 1) alpha[3] = llr_t'(0);
          lgt = 3'(l);
          ntype = types[k];
          // exhaustive search over the information bits
          fz = frozen_of(types[k], t);
          best = 1 << 30; second = 1 << 30;
          for (int v = 0; v < (1 << t); v++) begin
            u = 16'(v);
            if ((u & fz) != 0) continue;
            p = penalty(enc(u, t), t);
            if (p < best) begin second = best; best = p; end
            else if (p < second) second = p;
          end
          @(posedge clk);
          #1;
          checks += 3;
          if (!in_code(x0, types[k], t)) begin failures++; $display("type %0d T=%0d: x0 not a codeword", k, t); end
          if (int'(pen0) != best || penalty(x0, t) != best) begin
            failures++; $display("type %0d T=%0d: pen0=%0d best=%0d", k, t, pen0, best);
          end
          if (types[k] == NT_RATE0) begin
            if (v1) begin failures++; $display("Rate-0 with a second candidate"); end
          end else begin
            if (!v1 || !in_code(x1, types[k], t) || x1 == x0 || int'(pen1) != second ||
                penalty(x1, t) != second) begin
              failures++; $display("type %0d T=%0d: pen1=%0d second=%0d v1=%0d", k, t, pen1, second, v1);
            end
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
