// snd_unit: special-node decoder (SND) of the low-latency SCL decoder D_s.
//
// For one path and one special node of length T = 2^lgt (T <= 16) it returns,
// in a single combinational step, the two most likely codewords of the node
// and the path-metric increment of each.  The increment of a codeword x is the
// sum of |alpha_j| over the positions where x_j disagrees with the hard
// decision of alpha_j, the usual hardware-friendly path-metric update.
//
//   Rate-0 : x = 0 only (second candidate invalid).
//   Rate-1 : hard decision; hard decision with the least reliable bit flipped.
//   Rep    : all-zero and all-one word, best first.
//   SPC    : parity of the hard decision even -> hard decision, and the
//            hard decision with the two least reliable bits flipped;
//            parity odd -> flip the least reliable bit, or the second least.
//   Rep2 / SPC2 : decoded as two independent half-length Rep / SPC codes on
//            the even- and odd-indexed codeword bits; the best candidate joins
//            the two best halves, the second swaps in the cheaper runner-up.
//
// The node classes follow the paper's table of special nodes and its remark
// that Rep2/SPC2 split into two half-length nodes decoded concurrently.  The
// exact candidate lists of the SPC and Rate-1 nodes are this design's choice
// (the paper cites other work for them).  Codeword bits above T are zero.
// Hard decision: bit 1 when alpha <= 0, as in the paper's decision rule.
module snd_unit
  import ta_scl_pkg::*;
(
  input  llr_t        alpha [16],
  input  logic [2:0]  lgt,
  input  node_type_e  ntype,
  output logic [15:0] x0,
  output logic [15:0] x1,
  output logic [10:0] pen0,
  output logic [10:0] pen1,
  output logic        v1
);

  typedef struct packed {
    logic [15:0] xb, xs;     // best / second codeword bits on the subset
    logic [10:0] pb, ps;     // their increments
  } sub_t;

  logic [15:0] h, tmask;
  logic [5:0]  mag [16];

  always_comb begin
    tmask = len_mask(lgt);
    for (int j = 0; j < 16; j++) begin
      h[j]   = (alpha[j] <= 0) && tmask[j];
      mag[j] = 6'(abs_llr(alpha[j]));
    end
  end

  // Repetition code on subset s (all bits of s equal).
  function automatic sub_t rep_sub(input logic [15:0] s, input logic [15:0] hh,
                                   input logic [5:0] m [16]);
    sub_t r;
    logic [10:0] p0, p1;
    p0 = '0; p1 = '0;
    for (int j = 0; j < 16; j++)
      if (s[j]) begin
        if (hh[j]) p0 = p0 + 11'(m[j]);
        else       p1 = p1 + 11'(m[j]);
      end
    if (p0 <= p1) begin r.xb = '0; r.pb = p0; r.xs = s;  r.ps = p1; end
    else          begin r.xb = s;  r.pb = p1; r.xs = '0; r.ps = p0; end
    return r;
  endfunction

  // Two least reliable positions of subset s.
  function automatic void two_min(input logic [15:0] s, input logic [5:0] m [16],
                                  output int i1, output int i2);
    logic [6:0] b1, b2;
    b1 = 7'h7f; b2 = 7'h7f; i1 = 0; i2 = 0;
    for (int j = 0; j < 16; j++)
      if (s[j]) begin
        if ({1'b0, m[j]} < b1) begin
          b2 = b1; i2 = i1; b1 = {1'b0, m[j]}; i1 = j;
        end else if ({1'b0, m[j]} < b2) begin
          b2 = {1'b0, m[j]}; i2 = j;
        end
      end
  endfunction

  // Single parity check code on subset s (even parity).
  function automatic sub_t spc_sub(input logic [15:0] s, input logic [15:0] hh,
                                   input logic [5:0] m [16]);
    sub_t r;
    int i1, i2;
    logic [15:0] hs;
    hs = hh & s;
    two_min(s, m, i1, i2);
    if (^hs == 1'b0) begin
      r.xb = hs;                                  r.pb = '0;
      r.xs = hs ^ (16'd1 << i1) ^ (16'd1 << i2);  r.ps = 11'(m[i1]) + 11'(m[i2]);
    end else begin
      r.xb = hs ^ (16'd1 << i1);                  r.pb = 11'(m[i1]);
      r.xs = hs ^ (16'd1 << i2);                  r.ps = 11'(m[i2]);
    end
    return r;
  endfunction

  sub_t se, so, sa;
  logic [15:0] evn, odd;
  int  i1;
  logic [10:0] p0sum;

  always_comb begin
    evn = 16'h5555 & tmask;
    odd = 16'haaaa & tmask;
    x0 = '0; x1 = '0; pen0 = '0; pen1 = '0; v1 = 1'b1;
    se = '0; so = '0; sa = '0;
    p0sum = '0;
    i1 = 0;
    for (int j = 15; j >= 0; j--)
      if (tmask[j] && mag[j] <= mag[i1]) i1 = j;
    unique case (ntype)
      NT_RATE0: begin
        for (int j = 0; j < 16; j++) if (h[j]) p0sum = p0sum + 11'(mag[j]);
        pen0 = p0sum;
        v1   = 1'b0;
      end
      NT_RATE1: begin
        x0 = h;                    pen0 = '0;
        x1 = h ^ (16'd1 << i1);    pen1 = 11'(mag[i1]);
      end
      NT_REP: begin
        sa = rep_sub(tmask, h, mag);
        x0 = sa.xb; pen0 = sa.pb; x1 = sa.xs; pen1 = sa.ps;
      end
      NT_SPC: begin
        sa = spc_sub(tmask, h, mag);
        x0 = sa.xb; pen0 = sa.pb; x1 = sa.xs; pen1 = sa.ps;
      end
      NT_REP2, NT_SPC2: begin
        if (ntype == NT_REP2) begin
          se = rep_sub(evn, h, mag);
          so = rep_sub(odd, h, mag);
        end else begin
          se = spc_sub(evn, h, mag);
          so = spc_sub(odd, h, mag);
        end
        x0   = se.xb | so.xb;
        pen0 = se.pb + so.pb;
        if (se.ps + so.pb <= se.pb + so.ps) begin
          x1 = se.xs | so.xb; pen1 = se.ps + so.pb;
        end else begin
          x1 = se.xb | so.xs; pen1 = se.pb + so.ps;
        end
      end
      default: v1 = 1'b0;
    endcase
  end

endmodule
