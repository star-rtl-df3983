// tb_star_weak_patterns -- weak-pattern suppression against group size, and
// the 32-bit datapath option.
//
// Runs tb_star_wp_run (eight wordlines of random data each, every beat
// checked) on seven builds of star_top at once: the 64-bit datapath with
// groups of 64, 128, 256, 512 and 1024 cells, and the 32-bit datapath with
// groups of 32 and 128 cells. Groups of 16 cells, the smallest size the
// source sweeps, are narrower than a 32-bit beat and cannot be built. For
// each build it prints the count of the ten worst QLC weak patterns and of
// E-P15-E with plain randomization and with STAR, their ratio, and the FIB
// cost (4 bits per group, one per page, over 4*GROUP_CELLS data bits).
// Checks, on top of those inside each run: STAR leaves fewer top-10 patterns
// than plain randomization for every group size up to 256 cells, and fewer
// E-P15-E patterns at 128 cells; smaller groups remove more (ratio at 64
// cells below the ratio at 256, and that below the ratio at 1024). The
// error profile is the test profile E_PROFILE, not measured data.
module tb_star_weak_patterns;

  localparam int NR = 7;
  localparam int RDW [NR] = '{64, 64, 64, 64, 64, 32, 32};
  localparam int RGC [NR] = '{64, 128, 256, 512, 1024, 32, 128};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic done [NR];
  int   c [NR], f [NR], t10r [NR], t10s [NR], epr [NR], eps [NR];
  int   checks = 0, failures = 0;

  for (genvar i = 0; i < NR; i++) begin : g_run
    tb_star_wp_run #(.DW(RDW[i]), .GC(RGC[i]), .NWL(8), .PRINT(i == 1)) u_run (
      .clk, .rst_n, .done(done[i]), .checks(c[i]), .failures(f[i]),
      .top10_r(t10r[i]), .top10_s(t10s[i]), .ep15e_r(epr[i]), .ep15e_s(eps[i]));
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic real ratio(int s, int r);
    return (r == 0) ? 0.0 : 100.0 * real'(s) / real'(r);
  endfunction

  initial begin
    #150000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    do begin
      @(posedge clk);
      all = 1;
      for (int i = 0; i < NR; i++) all &= done[i];
    end while (!all);
    $display("DATA_W GROUP  FIB%%   top10 LFSR  STAR  ratio%%   E-P15-E LFSR STAR ratio%%");
    for (int i = 0; i < NR; i++) begin
      checks += c[i];
      failures += f[i];
      $display("%6d %5d %5.2f   %10d %5d  %5.1f   %12d %4d %5.1f", RDW[i], RGC[i],
               100.0 / real'(RGC[i]), t10r[i], t10s[i], ratio(t10s[i], t10r[i]),
               epr[i], eps[i], ratio(eps[i], epr[i]));
    end
    for (int i = 0; i < NR; i++)
      if (RGC[i] <= 256) chk(t10s[i] < t10r[i], $sformatf("fewer top-10 patterns, group %0d", RGC[i]));
    chk(eps[1] < epr[1], "fewer E-P15-E patterns, group 128");
    chk(ratio(t10s[0], t10r[0]) < ratio(t10s[2], t10r[2]), "group 64 beats group 256");
    chk(ratio(t10s[2], t10r[2]) < ratio(t10s[4], t10r[4]), "group 256 beats group 1024");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
