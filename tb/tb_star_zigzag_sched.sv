// tb_star_zigzag_sched -- checks zig-zag IO scheduling over a full wordline.
//
// The buffer read port is modelled by an array whose word a holds a value
// that encodes a itself, so each beat tells which word was read. At the
// default sizes (16 KiB pages, 128-cell groups, 64-bit beats) the 8192 beats
// must come in the order group g, page LSB..TSB, 2 beats per chunk, i.e.
// word p*2048 + 2g + b, with the right page/glast/wlast flags, under random
// back-pressure in the first wordline and none in the second, where one beat
// per cycle is required (8192 beats in 8192 cycles after the first).
module tb_star_zigzag_sched;
  import star_pkg::*;

  localparam int PAGE_WORDS = 2048, GROUPS = 1024;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        start, busy, re, out_valid, out_ready;
  logic [12:0] raddr;
  logic [63:0] rdata, out_data;
  beat_meta_t  out_meta;

  star_zigzag_sched #(.DATA_W(64), .PAGE_BYTES(16384), .GROUP_CELLS(128)) dut (.*);

  // buffer model: one cycle read latency, holds while re is low
  always @(posedge clk) if (re) rdata <= {32'hA5A5_0000 | 32'(raddr), 32'(raddr) ^ 32'hFFFF_FFFF};

  int checks = 0, failures = 0;
  int n = 0;
  bit stalls = 1;
  longint t_first, t_last;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t (beat %0d)", what, $time, n);
    end
  endtask

  initial begin
    #3000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready <= stalls ? ($urandom_range(0, 2) != 0) : 1'b1;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int g, p, b, a;
    g = (n / 8) % GROUPS; p = (n / 2) % 4; b = n % 2;
    a = p * PAGE_WORDS + 2 * g + b;
    chk(out_data == {32'hA5A5_0000 | 32'(a), 32'(a) ^ 32'hFFFF_FFFF}, "word order");
    chk(out_meta.page == page_e'(p), "page");
    chk(out_meta.glast == (p == 3 && b == 1), "glast");
    chk(out_meta.wlast == (p == 3 && b == 1 && g == GROUPS - 1), "wlast");
    if ((n % 8192) == 0) t_first = longint'($time / 10);
    if ((n % 8192) == 8191) t_last = longint'($time / 10);
    n++;
    if (n % 8192 == 0) n = 0;
  end

  initial begin
    start = 0; out_ready = 1;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int wl = 0; wl < 2; wl++) begin
      stalls = wl == 0;
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      chk(busy, "busy after start");
      wait (!busy);
      @(negedge clk);
      chk(n == 0, "whole wordline");
      if (wl == 1) chk(t_last - t_first == 8191, "one beat per cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
