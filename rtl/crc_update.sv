// crc_update: advances one path's CRC register by the information bits of one
// 16-bit sub-code (frozen bits are skipped).
//
// The register is a plain MSB-first linear feedback shift register with zero
// initial value.  When the transmitter appends the R-bit remainder of the
// message to the message (the last R information bits carry the checksum),
// running all K information bits through this register leaves zero, which is
// the pass condition D_s uses.  R and the generator are parameters; the
// default is the 24-bit generator 0x864CFB (the CRC24A of 5G NR), chosen here
// because the paper gives only r = 24.  Combinational.
module crc_update #(
  parameter int          R    = 24,
  parameter logic [R-1:0] POLY = 24'h864CFB
) (
  input  logic [R-1:0] crc_in,
  input  logic [15:0]  u,
  input  logic [15:0]  info,
  output logic [R-1:0] crc_out
);
  always_comb begin
    crc_out = crc_in;
    for (int j = 0; j < 16; j++)
      if (info[j])
        crc_out = {crc_out[R-2:0], 1'b0} ^ ((crc_out[R-1] ^ u[j]) ? POLY : '0);
  end
endmodule
