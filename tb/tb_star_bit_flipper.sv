// tb_star_bit_flipper -- checks the bit flipper and the FIB it emits.
//
// 300 random groups, each with a random f*, are handed over with random
// valid gaps and random output stalls. Each group must come out as 8 beats
// in zig-zag order (LSB, CSB, MSB, TSB chunks, 2 beats each), beat data
// inverted exactly when bit page of f* is set, with correct page/glast/wlast
// side-band, and one FIB pulse equal to f* with the last beat. With no stalls
// the flipper must emit one beat per cycle with no gap between groups.
module tb_star_bit_flipper;
  import star_pkg::*;

  localparam int NG = 300;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              grp_valid, grp_ready, grp_wlast;
  logic [3:0][127:0] grp_bits;
  flip_t             grp_flip;
  logic              out_valid, out_ready, fib_valid;
  logic [63:0]       out_data;
  beat_meta_t        out_meta;
  flip_t             fib;

  star_bit_flipper #(.DATA_W(64), .GROUP_CELLS(128)) dut (.*);

  int checks = 0, failures = 0;
  logic [63:0] exp_d [$];
  beat_meta_t  exp_m [$];
  flip_t       exp_f [$];
  bit          stalls = 1;
  int          nbeat = 0, nfib = 0;

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

  always @(negedge clk) out_ready <= stalls ? ($urandom_range(0, 3) != 0) : 1'b1;

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      chk(exp_d.size() > 0, "unexpected beat");
      if (exp_d.size() > 0) begin
        chk(out_data == exp_d.pop_front(), "data");
        chk(out_meta == exp_m.pop_front(), "meta");
      end
      nbeat++;
    end
    chk(fib_valid == (out_valid && out_ready && out_meta.glast), "fib strobe");
    if (fib_valid) begin
      chk(exp_f.size() > 0 && fib == exp_f.pop_front(), "fib value");
      nfib++;
    end
    if (!stalls && nbeat > 8 * (NG / 2) + 16 && nbeat < 8 * NG - 8)
      chk(out_valid, "no gap without stalls");
  end

  initial begin
    grp_valid = 0; grp_bits = '0; grp_flip = '0; grp_wlast = 0; out_ready = 1;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < NG; n++) begin
      logic [3:0][127:0] g;
      flip_t f;
      bit fire;
      for (int p = 0; p < 4; p++) g[p] = {$urandom(), $urandom(), $urandom(), $urandom()};
      f = 4'($urandom());
      if (n == NG / 2) begin
        @(negedge clk) grp_valid = 0;
        wait (exp_d.size() == 0);
        stalls = 0;
      end
      for (int k = 0; k < 8; k++) begin
        beat_meta_t m;
        m.page  = page_e'(k / 2);
        m.glast = k == 7;
        m.wlast = (k == 7) && (n == NG - 1);
        exp_d.push_back(g[k / 2][(k % 2) * 64 +: 64] ^ {64{f[k / 2]}});
        exp_m.push_back(m);
      end
      exp_f.push_back(f);
      forever begin
        @(negedge clk);
        grp_valid = stalls ? ($urandom_range(0, 2) != 0) : 1'b1;
        grp_bits  = g;
        grp_flip  = f;
        grp_wlast = n == NG - 1;
        #1 fire = grp_valid && grp_ready;
        @(posedge clk);
        if (fire) break;
      end
    end
    @(negedge clk) grp_valid = 0;
    wait (exp_d.size() == 0);
    repeat (3) @(posedge clk);
    chk(nbeat == 8 * NG, "beat count");
    chk(nfib == NG, "fib count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
