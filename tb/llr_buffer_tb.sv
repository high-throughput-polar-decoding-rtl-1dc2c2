// llr_buffer_tb: checks the LLR buffer (one write and one read port) against
// an array model, at a reduced frame size (N = 64, P = 4, so 8 words of 48
// bits per frame and 24 words in all).  Random writes and reads run
// together, including reads of the address being written in the same
// cycle, which must return the old word.  Read data must appear exactly
// one clock after the read address.
//
// One read and one write port follow the paper; registered reads and the
// read-old collision rule are this design's own.
module llr_buffer_tb;
  localparam int N = 64, P = 4, Q = 6, ZETA = 2;
  localparam int W = 2 * P * Q, DEPTH = (N / (2 * P)) * (ZETA + 1), AW = $clog2(DEPTH);
  logic clk = 0;
  always #5 clk = ~clk;
  logic we, re;
  logic [AW-1:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  llr_buffer #(.N(N), .P(P), .Q(Q), .ZETA(ZETA)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] model [DEPTH];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] exp_d;
    bit exp_v;
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      model[a] = {$urandom, $urandom};
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = model[a];
    end
    @(negedge clk);
    we = 0;
    exp_v = 0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      if (exp_v) begin
        checks++;
        if (rdata != exp_d) begin failures++; $display("cycle %0d: read %h, expected %h", t, rdata, exp_d); end
      end
      re = ($urandom_range(3) != 0);
      raddr = AW'($urandom_range(DEPTH - 1));
      we = ($urandom_range(1) == 1);
      waddr = (t % 5 == 0) ? raddr : AW'($urandom_range(DEPTH - 1));
      wdata = {$urandom, $urandom};
      exp_v = re;
      exp_d = model[raddr];                  // old data on a collision
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
