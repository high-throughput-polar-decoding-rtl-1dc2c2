// output_buffer: the output buffer of the TA-SCL decoder, a true dual-port
// RAM whose two ports can each read or write.
//
// Frames may finish out of order: a frame that D_s could not decode is
// decoded again by D_l several frame periods later.  Every decoded vector of
// D_s is written here, a later result of D_l for the same frame overwrites
// it, and the frames are read out in input order.  The buffer holds
// FRAMES = floor(beta*zeta + beta + 1) frames of N bits, as 2P-bit words
// (depth N/2P * FRAMES), the sizes of the paper's architecture figure.  Each
// port has an enable, a write enable, an address and registered read data
// (one cycle).  The two ports must not write the same address in one cycle
// (asserted).
module output_buffer #(
  parameter int N      = 1024,
  parameter int P      = 64,
  parameter int FRAMES = 10,
  localparam int W     = 2 * P,
  localparam int DEPTH = (N / (2 * P)) * FRAMES,
  localparam int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          en_a,
  input  logic          we_a,
  input  logic [AW-1:0] addr_a,
  input  logic [W-1:0]  wdata_a,
  output logic [W-1:0]  rdata_a,
  input  logic          en_b,
  input  logic          we_b,
  input  logic [AW-1:0] addr_b,
  input  logic [W-1:0]  wdata_b,
  output logic [W-1:0]  rdata_b
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en_a) begin
      if (we_a) mem[addr_a] <= wdata_a;
      else      rdata_a <= mem[addr_a];
    end
    if (en_b) begin
      if (we_b) mem[addr_b] <= wdata_b;
      else      rdata_b <= mem[addr_b];
    end
  end

  a_no_double_write: assert property (@(posedge clk)
    !(en_a && we_a && en_b && we_b && addr_a == addr_b));
endmodule
