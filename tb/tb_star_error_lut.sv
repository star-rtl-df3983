// tb_star_error_lut -- checks the error-change LUT.
//
// After reset every entry must read zero. Then all 256 entries are written
// with random signed values in random order, some several times; after each
// write the whole table must match a reference copy.
module tb_star_error_lut;
  import star_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic               we;
  state_t             wstate;
  flip_t              wflip;
  logic signed [15:0] wdata;
  logic signed [15:0] table_o [16][16];
  logic signed [15:0] ref_t [16][16];

  star_error_lut #(.LUT_W(16)) dut (.*);

  int checks = 0, failures = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic compare();
    for (int s = 0; s < 16; s++)
      for (int f = 0; f < 16; f++)
        chk(table_o[s][f] == ref_t[s][f], "entry");
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; wstate = '0; wflip = '0; wdata = '0;
    for (int s = 0; s < 16; s++) for (int f = 0; f < 16; f++) ref_t[s][f] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    compare();
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      we     = $urandom_range(0, 3) != 0;
      wstate = 4'($urandom());
      wflip  = 4'($urandom());
      wdata  = 16'($urandom());
      if (we) ref_t[wstate][wflip] = wdata;
      @(posedge clk);
      #1 compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
