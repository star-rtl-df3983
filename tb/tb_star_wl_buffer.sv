// tb_star_wl_buffer -- checks the wordline buffer.
//
// Fills all 8192 words with random data, then reads them back in a random
// order with random read enables: rdata must show the addressed word one
// cycle after a read and hold it while re is low. Simultaneous write and
// read of different words is also checked.
module tb_star_wl_buffer;

  localparam int DEPTH = 8192;

  logic clk = 0;
  always #5 clk = ~clk;

  logic        we, re;
  logic [12:0] waddr, raddr;
  logic [63:0] wdata, rdata;

  star_wl_buffer #(.DATA_W(64), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  logic [63:0] m [DEPTH];
  logic [63:0] last;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = 13'(a); wdata = {$urandom(), $urandom()}; m[a] = wdata;
    end
    @(negedge clk) we = 0;
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      re    = (n == 0) || ($urandom_range(0, 2) != 0);
      raddr = 13'($urandom());
      we    = $urandom_range(0, 3) == 0;
      waddr = raddr ^ 13'h1;
      wdata = {$urandom(), $urandom()};
      if (re) last = m[raddr];
      if (we) m[waddr] = wdata;
      @(posedge clk);
      #1 chk(rdata == last, "read data / hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
