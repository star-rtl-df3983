// tb_star_top -- end-to-end test of STAR at full size (16 KiB QLC pages,
// 128-cell groups, 64-bit datapath; no parameter is overridden).
//
// 1. The firmware port loads the error-change LUT from a per-state error
//    profile (e_f(s)-e_s for all 256 entries).
// 2. Wordline 0: four random pages are written into the wordline buffer and
//    a wordline is started with four seeds, with the outputs never stalled.
//    Every output beat is compared with a reference built here: per-page
//    LFSR randomization, then for each group the flip f* minimising the
//    summed error change (Eq. 3/4), applied to the group's page chunks. The
//    64 FIB words must follow. Rate and latency are checked: first beat 21
//    cycles after start, then 8192 beats in 8192 cycles.
// 3. Wordline 1: a second LUT profile, data with long runs of constant
//    bytes, random back-pressure on both output streams, and a start request
//    while busy that must be ignored.
// 4. Every page of wordline 1 and one of wordline 0 is read back through the
//    read path (FIB words, then the stored data) and must equal the user data.
// Mechanisms that must each happen at least once are counted: output stall,
// stall reaching the zig-zag scheduler, three groups in the three STAR stages
// at once, a non-trivial f*, f* = no flip, LUT reload, FIB dump, ignored
// start, read-back. The count of error-prone states P0/P1/P14/P15 after STAR
// is also compared with the count after plain randomization.
module tb_star_top;
  import star_pkg::*;
  import tb_star_ref_pkg::*;

  localparam int PW = 2048, WLW = 4 * PW, GROUPS = 1024, FWORDS = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic               hw_we;
  logic [12:0]        hw_addr;
  logic [63:0]        hw_wdata;
  logic               lut_we;
  state_t             lut_state;
  flip_t              lut_flip;
  logic signed [15:0] lut_wdata;
  logic               wl_start, wl_busy, wl_done;
  logic [31:0]        wl_seeds [4];
  logic               out_valid, out_ready;
  logic [63:0]        out_data;
  beat_meta_t         out_meta;
  logic               fibo_valid, fibo_ready, fibo_last;
  logic [63:0]        fibo_data;
  page_e              fibo_page;
  logic               rd_start, rd_busy, rd_fib_valid, rd_fib_ready;
  logic               rd_in_valid, rd_in_ready, rd_out_valid, rd_out_ready, rd_out_last;
  logic [31:0]        rd_seed;
  logic [63:0]        rd_fib_data, rd_in_data, rd_out_data;

  star_top dut (.*);

  int checks = 0, failures = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint cyc_now();
    return longint'($time / 10);
  endfunction

  // ---------------- reference ----------------
  int          prof [16];
  int          st_of [16];                  // state of cell bits
  logic [63:0] user [2][4][PW];
  logic [31:0] seeds_r [2][4];
  logic [63:0] exp_beat [WLW];
  logic [63:0] exp_fib [4][FWORDS];
  int          n_prone_rand, n_prone_star;
  int          nflip_nz, nflip_z;

  function automatic bit prone(int s);
    return s == 0 || s == 1 || s == 14 || s == 15;
  endfunction

  task automatic build_expect(int wl);
    logic [63:0] r [4][PW];
    for (int p = 0; p < 4; p++) begin
      logic [31:0] s;
      s = seeds_r[wl][p];
      for (int w = 0; w < PW; w++) r[p][w] = user[wl][p][w] ^ ref_key64(s);
    end
    for (int p = 0; p < 4; p++) for (int w = 0; w < FWORDS; w++) exp_fib[p][w] = '0;
    for (int g = 0; g < GROUPS; g++) begin
      int best_f = 0, best_d = 0;
      int cs [128];
      for (int i = 0; i < 128; i++) begin
        logic [3:0] b;
        for (int p = 0; p < 4; p++) b[p] = r[p][2 * g + i / 64][i % 64];
        cs[i] = st_of[b];
        if (prone(cs[i])) n_prone_rand++;
      end
      for (int f = 0; f < 16; f++) begin
        int d = 0;
        for (int i = 0; i < 128; i++)
          d += prof[st_of[ref_bits(cs[i]) ^ 4'(f)]] - prof[cs[i]];
        if (f == 0 || d < best_d) begin best_d = d; best_f = f; end
      end
      if (best_f != 0) nflip_nz++; else nflip_z++;
      for (int i = 0; i < 128; i++)
        if (prone(st_of[ref_bits(cs[i]) ^ 4'(best_f)])) n_prone_star++;
      for (int k = 0; k < 8; k++)
        exp_beat[8 * g + k] = r[k / 2][2 * g + k % 2] ^ {64{best_f[k / 2]}};
      for (int p = 0; p < 4; p++) exp_fib[p][g / 64][g % 64] = best_f[p];
    end
  endtask

  // ---------------- flash model: what leaves STAR ----------------
  logic [63:0] flash [4][PW];
  logic [63:0] flash_fib [4][FWORDS];
  logic [63:0] flash0_p2 [PW];
  logic [63:0] flash0_fib2 [FWORDS];
  int nbeat = 0, nfibw = 0, nfib_dumps = 0;
  longint t_start, t_first, t_last;
  bit stall_out = 0;

  always @(negedge clk) begin
    out_ready  <= stall_out ? ($urandom_range(0, 3) != 0) : 1'b1;
    fibo_ready <= stall_out ? ($urandom_range(0, 1) != 0) : 1'b1;
  end

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      int g, p, b;
      g = nbeat / 8; p = (nbeat / 2) % 4; b = nbeat % 2;
      chk(out_data == exp_beat[nbeat], "output beat");
      chk(out_meta.page == page_e'(p), "output page");
      chk(out_meta.glast == (nbeat % 8 == 7), "output glast");
      chk(out_meta.wlast == (nbeat == WLW - 1), "output wlast");
      flash[p][2 * g + b] = out_data;
      if (nbeat == 0) t_first = cyc_now();
      if (nbeat == WLW - 1) t_last = cyc_now();
      nbeat++;
    end
    if (fibo_valid && fibo_ready) begin
      int p, w;
      p = nfibw / FWORDS; w = nfibw % FWORDS;
      chk(nbeat == WLW || stall_out, "FIB after data");
      chk(fibo_page == page_e'(p), "fib page");
      chk(fibo_data == exp_fib[p][w], "fib word");
      chk(fibo_last == (nfibw == 4 * FWORDS - 1), "fib last");
      flash_fib[p][w] = fibo_data;
      nfibw++;
      if (fibo_last) nfib_dumps++;
    end
  end

  // ---------------- mechanism counters ----------------
  int m_out_stall = 0, m_zz_stall = 0, m_three_groups = 0, m_lut_reload = 0;
  int m_ignored_start = 0, m_readback = 0;

  always @(posedge clk) if (rst_n) begin
    if (out_valid && !out_ready) m_out_stall++;
    if (dut.u_zz.out_valid && !dut.u_zz.out_ready) m_zz_stall++;
    if (dut.u_rand.out_valid && dut.u_est.scan_busy && dut.u_flip.out_valid) m_three_groups++;
  end

  // ---------------- driver tasks ----------------
  task automatic load_lut();
    for (int s = 0; s < 16; s++)
      for (int f = 0; f < 16; f++) begin
        @(negedge clk);
        lut_we = 1; lut_state = 4'(s); lut_flip = 4'(f);
        lut_wdata = 16'(prof[st_of[ref_bits(s) ^ 4'(f)]] - prof[s]);
      end
    @(negedge clk) lut_we = 0;
  endtask

  task automatic write_wl(int wl);
    for (int p = 0; p < 4; p++)
      for (int w = 0; w < PW; w++) begin
        @(negedge clk);
        hw_we = 1; hw_addr = 13'(p * PW + w); hw_wdata = user[wl][p][w];
      end
    @(negedge clk) hw_we = 0;
  endtask

  task automatic run_wl(int wl, bit try_double_start);
    nbeat = 0; nfibw = 0;
    build_expect(wl);
    @(negedge clk);
    for (int p = 0; p < 4; p++) wl_seeds[p] = seeds_r[wl][p];
    wl_start = 1;
    t_start = cyc_now() + 1;  // edge that takes the start
    @(negedge clk) wl_start = 0;
    chk(wl_busy, "busy after start");
    if (try_double_start) begin
      repeat (500) @(negedge clk);
      for (int p = 0; p < 4; p++) wl_seeds[p] = 32'hDEAD_BEEF;
      wl_start = 1;
      @(negedge clk) wl_start = 0;
      m_ignored_start++;
    end
    wait (!wl_busy);
    @(negedge clk);
    chk(nbeat == WLW, "all data beats");
    chk(nfibw == 4 * FWORDS, "all FIB words");
  endtask

  task automatic read_page(int wl, int p, logic [63:0] data [PW], logic [63:0] fibw [FWORDS]);
    int nout = 0;
    @(negedge clk);
    rd_seed = seeds_r[wl][p];
    rd_start = 1;
    @(negedge clk) rd_start = 0;
    fork
      begin
        for (int w = 0; w < FWORDS; w++) begin
          bit fire;
          forever begin
            @(negedge clk);
            rd_fib_valid = 1; rd_fib_data = fibw[w];
            #1 fire = rd_fib_ready;
            @(posedge clk);
            if (fire) break;
          end
        end
        @(negedge clk) rd_fib_valid = 0;
        for (int w = 0; w < PW; w++) begin
          bit fire;
          forever begin
            @(negedge clk);
            rd_in_valid = $urandom_range(0, 5) != 0; rd_in_data = data[w];
            #1 fire = rd_in_valid && rd_in_ready;
            @(posedge clk);
            if (fire) break;
          end
        end
        @(negedge clk) rd_in_valid = 0;
      end
      begin
        while (nout < PW) begin
          @(posedge clk);
          if (rd_out_valid && rd_out_ready) begin
            chk(rd_out_data == user[wl][p][nout], "read back");
            chk(rd_out_last == (nout == PW - 1), "read last");
            nout++;
          end
        end
      end
    join
    m_readback++;
  endtask

  always @(negedge clk) rd_out_ready <= $urandom_range(0, 4) != 0;

  // ---------------- main ----------------
  initial begin
    hw_we = 0; hw_addr = '0; hw_wdata = '0; lut_we = 0; lut_state = '0; lut_flip = '0;
    lut_wdata = '0; wl_start = 0; rd_start = 0; rd_seed = '0; rd_fib_valid = 0;
    rd_fib_data = '0; rd_in_valid = 0; rd_in_data = '0;
    for (int p = 0; p < 4; p++) wl_seeds[p] = '0;
    for (int b = 0; b < 16; b++) st_of[b] = ref_state(4'(b));
    for (int p = 0; p < 4; p++) begin
      seeds_r[0][p] = $urandom() | 32'h1;
      seeds_r[1][p] = $urandom() | 32'h1;
      for (int w = 0; w < PW; w++) begin
        user[0][p][w] = {$urandom(), $urandom()};
        user[1][p][w] = ((w / 64) % 3 == 0) ? {8{8'(w / 64)}} : {$urandom(), $urandom()};
      end
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // wordline 0, no stalls
    for (int k = 0; k < 16; k++) prof[k] = E_PROFILE[k];
    load_lut();
    write_wl(0);
    n_prone_rand = 0; n_prone_star = 0;
    run_wl(0, 0);
    chk(t_first - t_start == 21, "first-beat latency");
    chk(t_last - t_first == WLW - 1, "64 bits per cycle");
    $display("wordline 0: latency %0d cycles, %0d beats in %0d cycles",
             t_first - t_start, WLW, t_last - t_first + 1);
    $display("error-prone states P0/P1/P14/P15: %0d after LFSR, %0d after STAR (%0d%%)",
             n_prone_rand, n_prone_star, 100 * (n_prone_rand - n_prone_star) / n_prone_rand);
    chk(n_prone_star < n_prone_rand, "fewer error-prone states");
    for (int w = 0; w < PW; w++) flash0_p2[w] = flash[2][w];
    for (int w = 0; w < FWORDS; w++) flash0_fib2[w] = flash_fib[2][w];

    // wordline 1, new LUT, back-pressure, ignored start
    for (int k = 0; k < 16; k++) prof[k] = $urandom_range(0, 300);
    load_lut();
    m_lut_reload++;
    write_wl(1);
    stall_out = 1;
    run_wl(1, 1);
    stall_out = 0;

    // read back
    for (int p = 0; p < 4; p++) read_page(1, p, flash[p], flash_fib[p]);
    read_page(0, 2, flash0_p2, flash0_fib2);

    $display("mechanisms: out_stall=%0d zz_stall=%0d three_groups=%0d flip_nonzero=%0d flip_none=%0d lut_reload=%0d fib_dumps=%0d ignored_start=%0d readback=%0d",
             m_out_stall, m_zz_stall, m_three_groups, nflip_nz, nflip_z, m_lut_reload,
             nfib_dumps, m_ignored_start, m_readback);
    chk(m_out_stall > 0, "output stall happened");
    chk(m_zz_stall > 0, "stall reached scheduler");
    chk(m_three_groups > 0, "group-level pipelining");
    chk(nflip_nz > 0, "non-trivial flip chosen");
    chk(nflip_z > 0, "no-flip chosen");
    chk(m_lut_reload > 0, "LUT reload");
    chk(nfib_dumps == 2, "FIB dumps");
    chk(m_ignored_start > 0, "start while busy");
    chk(m_readback == 5, "read-back pages");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
