// output_buffer_tb: checks the true dual-port output buffer against an array
// model at a reduced size (N = 64, P = 4, 10 frames of 8 words of 8 bits).
// Both ports read and write at random in the same cycles; writes of both
// ports never target one address together (the decoder never does that).
// A read returns the word stored before the clock edge, one clock after
// its address, also when the other port writes that word in the same cycle.
//
// Two read/write ports follow the paper; registered reads and the
// collision rules are this design's own.
module output_buffer_tb;
  localparam int N = 64, P = 4, FRAMES = 10;
  localparam int W = 2 * P, DEPTH = FRAMES * (N / (2 * P)), AW = $clog2(DEPTH);
  logic clk = 0;
  always #5 clk = ~clk;
  logic en_a, we_a, en_b, we_b;
  logic [AW-1:0] addr_a, addr_b;
  logic [W-1:0] wdata_a, wdata_b, rdata_a, rdata_b;
  output_buffer #(.N(N), .P(P), .FRAMES(FRAMES)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] model [DEPTH];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] ea, eb;
    bit va, vb;
    en_a = 0; we_a = 0; en_b = 0; we_b = 0;
    addr_a = '0; addr_b = '0; wdata_a = '0; wdata_b = '0;
    for (int a = 0; a < DEPTH; a++) begin
      model[a] = W'($urandom);
      @(negedge clk);
      en_a = 1; we_a = 1; addr_a = AW'(a); wdata_a = model[a];
    end
    @(negedge clk);
    en_a = 0; we_a = 0;
    va = 0; vb = 0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      checks += 2;
      if (va && rdata_a != ea) begin failures++; $display("port A read %h, expected %h", rdata_a, ea); end
      if (vb && rdata_b != eb) begin failures++; $display("port B read %h, expected %h", rdata_b, eb); end
      en_a = ($urandom_range(3) != 0);
      en_b = ($urandom_range(3) != 0);
      we_a = ($urandom_range(1) == 1);
      we_b = ($urandom_range(1) == 1);
      addr_a = AW'($urandom_range(DEPTH - 1));
      addr_b = (t % 4 == 0) ? addr_a : AW'($urandom_range(DEPTH - 1));
      if (en_a && we_a && en_b && we_b && addr_a == addr_b) we_b = 0;
      wdata_a = W'($urandom);
      wdata_b = W'($urandom);
      va = en_a && !we_a; ea = model[addr_a];
      vb = en_b && !we_b; eb = model[addr_b];
      if (en_a && we_a) model[addr_a] = wdata_a;
      if (en_b && we_b) model[addr_b] = wdata_b;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
