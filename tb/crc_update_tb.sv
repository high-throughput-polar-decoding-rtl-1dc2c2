// crc_update_tb: checks the 16-bit-per-step CRC update of D_s.  A chain of
// random 16-bit groups, each with a random mask of information positions,
// is fed through the unit starting from an all-zero register; the
// information bits are also collected in order and the CRC-24A of the whole
// sequence (generator 0x864CFB, MSB first, zero start) is computed bit by bit
// for comparison after every step.  A codeword with its CRC appended must
// leave a zero register, which is checked at the end.  Combinational block:
// no cycle count.
//
// The CRC length (24) follows the paper; the generator polynomial and bit
// order are this design's own choice.
module crc_update_tb;
  import tb_polar_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [23:0] crc_in, crc_out;
  logic [15:0] u, info;
  crc_update dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic bits [1024];
    int nb;
    logic [23:0] c;
    for (int run = 0; run < 4; run++) begin
      crc_in = '0; nb = 0;
      for (int s = 0; s < 40; s++) begin
        u    = 16'($urandom);
        info = (s % 5 == 0) ? 16'hffff : (s % 7 == 0) ? 16'h0 : 16'($urandom);
        for (int j = 0; j < 16; j++) if (info[j]) begin bits[nb] = u[j]; nb++; end
        @(posedge clk);
        #1;
        checks++;
        if (crc_out != crc24(bits, nb)) begin
          failures++; $display("run %0d step %0d: crc %h, expected %h", run, s, crc_out, crc24(bits, nb));
        end
        crc_in = crc_out;
      end
      // append the CRC itself, MSB first, in 16 + 8 bit groups
      c = crc_in;
      u = c[23:8];
      for (int j = 0; j < 16; j++) u[j] = c[23 - j];
      info = 16'hffff;
      @(posedge clk); #1;
      crc_in = crc_out;
      u = '0;
      for (int j = 0; j < 8; j++) u[j] = c[7 - j];
      info = 16'h00ff;
      @(posedge clk); #1;
      checks++;
      if (crc_out != '0) begin failures++; $display("codeword with CRC leaves %h", crc_out); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
