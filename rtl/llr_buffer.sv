// llr_buffer: the LLR buffer of the TA-SCL decoder, a simple dual-port RAM
// (one write port, one read port).
//
// It holds ZETA+1 frames of channel LLRs: ZETA frames waiting for the
// large-list decoder D_l and the frame D_s is decoding right now.  A word is
// 2P LLRs of Q bits, so a frame is N/2P words and the depth is
// N/2P * (ZETA+1), the sizes of the paper's architecture figure.  Writes and
// reads take one clock; read data appear one cycle after the address
// (registered read).  A read and a write of the same address in one cycle
// return the old data, so a frame may be overwritten word by word right
// behind a read of it.  The RAM is written as an array; a memory compiler
// macro would replace it in a chip.
module llr_buffer #(
  parameter int N    = 1024,
  parameter int P    = 64,
  parameter int Q    = 6,
  parameter int ZETA = 2,
  localparam int W     = 2 * P * Q,
  localparam int DEPTH = (N / (2 * P)) * (ZETA + 1),
  localparam int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
