// tb_star_fib_buffer -- checks FIB collection and the per-page FIB stream.
//
// Two wordlines of 1024 random 4-bit FIBs each, handed over with random
// gaps. After the last one the buffer must send 4 x 16 words, LSB page first,
// word w of page p holding FIB bit p of groups 64w..64w+63 (bit 0 = lowest
// group), under random back-pressure, with out_last and done on the 64th
// word only. `clear` before each wordline must restart the group count.
module tb_star_fib_buffer;
  import star_pkg::*;

  localparam int GROUPS = 1024, WORDS = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        clear, fib_valid, out_valid, out_ready, out_last, done;
  flip_t       fib;
  logic [63:0] out_data;
  page_e       out_page;

  star_fib_buffer #(.DATA_W(64), .GROUPS(GROUPS)) dut (.*);

  int checks = 0, failures = 0;
  flip_t f_ref [GROUPS];
  int nw = 0, ndone = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t word %0d", what, $time, nw);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready <= $urandom_range(0, 2) != 0;

  always @(posedge clk) if (rst_n) begin
    if (done) ndone++;
    if (out_valid && out_ready) begin
      int p, w;
      logic [63:0] e;
      p = nw / WORDS; w = nw % WORDS;
      for (int i = 0; i < 64; i++) e[i] = f_ref[w * 64 + i][p];
      chk(out_data == e, "fib word");
      chk(out_page == page_e'(p), "page");
      chk(out_last == (nw == 4 * WORDS - 1), "last");
      chk(done == out_last, "done");
      nw++;
    end
  end

  initial begin
    clear = 0; fib_valid = 0; fib = '0; out_ready = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int wl = 0; wl < 2; wl++) begin
      @(negedge clk) clear = 1;
      @(negedge clk) clear = 0;
      nw = 0;
      for (int g = 0; g < GROUPS; g++) begin
        f_ref[g] = 4'($urandom());
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) begin fib_valid = 0; @(negedge clk); end
        fib_valid = 1; fib = f_ref[g];
      end
      @(negedge clk) fib_valid = 0;
      wait (nw == 4 * WORDS);
      @(negedge clk);
      chk(!out_valid, "stream ended");
    end
    chk(ndone == 2, "done pulses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
