// tb_star_eg_estimator -- checks group error estimation and the f* choice.
//
// The LUT input is filled with e_f(s)-e_s from a per-state error profile.
// 200 groups are sent in zig-zag beat order: random data, constant data
// (every cell in one state) and data made of a single state pair. For each
// group the expected f* and its Delta E_G,f* come from summing
// e_f(s_i)-e_s_i over the 128 cells for all 16 flips (ties to the lowest f).
// The first 100 groups run with random input gaps and output stalls, the
// rest stall-free, where a group must come out every 8 cycles, grp_valid
// rising 9 cycles after the edge that took its last beat (taken at the 10th). A second profile is loaded half way.
module tb_star_eg_estimator;
  import star_pkg::*;
  import tb_star_ref_pkg::*;

  localparam int NG = 200;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                    in_valid, in_ready;
  logic [63:0]             in_data;
  beat_meta_t              in_meta;
  logic signed [15:0]      lut_table [16][16];
  logic                    grp_valid, grp_ready, grp_wlast;
  logic [3:0][127:0]       grp_bits;
  flip_t                   grp_flip;
  logic signed [23:0]      grp_delta;

  star_eg_estimator #(.DATA_W(64), .GROUP_CELLS(128), .LUT_W(16)) dut (.*);

  int checks = 0, failures = 0;
  int prof [16];
  logic [3:0][127:0] grp_q [$];
  int   expf_q [$], expd_q [$];
  bit   stalls = 1;
  longint cyc, last_in_cyc [$], prev_out_cyc = -1;
  int   nout = 0;

  // cycle number of the current rising edge
  function automatic longint cyc_now();
    return longint'($time / 10);
  endfunction

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_profile(int seed_mode);
    for (int k = 0; k < 16; k++)
      prof[k] = seed_mode == 0 ? E_PROFILE[k] : $urandom_range(0, 500);
    for (int s = 0; s < 16; s++)
      for (int f = 0; f < 16; f++)
        lut_table[s][f] = 16'(ref_dlt(prof, s, f[3:0]));
  endtask

  task automatic expect_group(logic [3:0][127:0] g);
    int best_f, best_d;
    best_f = 0; best_d = 0;
    for (int f = 0; f < 16; f++) begin
      int d = 0;
      for (int i = 0; i < 128; i++) begin
        int s = ref_state({g[3][i], g[2][i], g[1][i], g[0][i]});
        d += ref_dlt(prof, s, f[3:0]);
      end
      if (f == 0 || d < best_d) begin best_d = d; best_f = f; end
    end
    expf_q.push_back(best_f);
    expd_q.push_back(best_d);
  endtask

  always @(negedge clk) grp_ready <= stalls ? ($urandom_range(0, 2) != 0) : 1'b1;

  always @(posedge clk) if (rst_n && grp_valid && grp_ready) begin
    cyc = cyc_now();
    chk(expf_q.size() > 0, "unexpected group");
    if (expf_q.size() > 0) begin
      logic [3:0][127:0] g;
      g = grp_q.pop_front();
      chk(grp_bits == g, "group bits");
      if (grp_bits != g && failures < 3) $display("nout=%0d got %h exp %h", nout, grp_bits, g);
      chk(int'(grp_flip) == expf_q.pop_front(), "f*");
      chk(int'(grp_delta) == expd_q.pop_front(), "delta E");
      chk(grp_wlast == (nout == NG - 1), "wlast");
      if (!stalls && nout > 110) begin
        chk(cyc - prev_out_cyc == 8, "one group per 8 cycles");
        if (cyc - prev_out_cyc != 8 || cyc - last_in_cyc[0] != 10)
          $display("interval %0d latency %0d", cyc - prev_out_cyc, cyc - last_in_cyc[0]);
        chk(cyc - last_in_cyc[0] == 10, "latency");
      end
    end
    void'(last_in_cyc.pop_front());
    prev_out_cyc = cyc;
    nout++;
  end

  initial begin
    logic [3:0][127:0] g;
    in_valid = 0; in_data = '0; in_meta = '0; grp_ready = 1;
    load_profile(0);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < NG; n++) begin
      int kind = n % 5;
      if (n == 100) begin
        // let the pipe drain, switch profile, run stall-free
        @(negedge clk) in_valid = 0;
        wait (expf_q.size() == 0);
        @(negedge clk);
        stalls = 0;
        load_profile(1);
      end
      for (int i = 0; i < 128; i++) begin
        logic [3:0] b;
        case (kind)
          0, 1, 2: b = 4'($urandom());
          3:       b = ref_bits(n % 16);
          default: b = ($urandom_range(0, 1) != 0) ? ref_bits(0) : ref_bits(15);
        endcase
        for (int p = 0; p < 4; p++) g[p][i] = b[p];
      end
      grp_q.push_back(g);
      expect_group(g);
      for (int k = 0; k < 8; k++) begin
        forever begin
          bit fire;
          @(negedge clk);
          in_data       = g[k / 2][(k % 2) * 64 +: 64];
          in_meta.page  = page_e'(k / 2);
          in_meta.glast = k == 7;
          in_meta.wlast = (k == 7) && (n == NG - 1);
          in_valid = stalls ? ($urandom_range(0, 3) != 0) : 1'b1;
          #1 fire = in_valid && in_ready;
          @(posedge clk);
          if (fire) break;
        end
        if (k == 7) last_in_cyc.push_back(cyc_now());
      end
    end
    @(negedge clk) in_valid = 0;
    wait (expf_q.size() == 0);
    repeat (5) @(posedge clk);
    chk(nout == NG, "group count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
