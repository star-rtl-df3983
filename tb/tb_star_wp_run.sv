// tb_star_wp_run -- one weak-pattern run of star_top at a given datapath width
// and group size, used by tb_star_weak_patterns.
//
// NWL wordlines of random user data (16 KiB QLC pages) go through its own
// star_top #(DATA_W, GROUP_CELLS), one after the other, each with new seeds.
// Every output beat is checked against the reference (per page LFSR, then
// the flip of least summed error change for each group), as are the FIB word
// count and the rate: a wordline's beats leave in consecutive cycles. From
// the stored cells it then counts, for plain LFSR randomization and for STAR,
// the cells in each state and the vertical three-cell weak patterns on the
// wordlines that have a neighbour above and below. A pattern a-v-b is a
// victim cell in state v whose cells on the same bitline one wordline up
// and one down are in states a and b (in either order). top10 counts the ten
// QLC patterns ranked worst by the source: 0-15-0, 0-14-0, 0-15-1, 0-14-1,
// 0-13-0, 0-15-2, 1-15-1, 1-15-2, 1-14-1, 1-14-2; ep15e counts 0-15-0 alone.
// The error LUT is loaded from the test profile E_PROFILE before the first
// wordline. done rises when all wordlines are through and the counts are
// final; checks/failures accumulate like a testbench's own.
module tb_star_wp_run #(
  parameter int DW = 64,
  parameter int GC = 128,
  parameter int NWL = 8,
  parameter bit PRINT = 0
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures,
  output int   top10_r,
  output int   top10_s,
  output int   ep15e_r,
  output int   ep15e_s
);
  import star_pkg::*;
  import tb_star_ref_pkg::*;

  localparam int PW = 16384 * 8 / DW, WLW = 4 * PW, CPW = 16384 * 8;
  localparam int GROUPS = CPW / GC, FWORDS = GROUPS / DW, CH = GC / DW;
  localparam int AW = $clog2(WLW);

  logic               hw_we;
  logic [AW-1:0]      hw_addr;
  logic [DW-1:0]      hw_wdata;
  logic               lut_we;
  state_t             lut_state;
  flip_t              lut_flip;
  logic signed [15:0] lut_wdata;
  logic               wl_start, wl_busy, wl_done;
  logic [31:0]        wl_seeds [4];
  logic               out_valid, out_ready;
  logic [DW-1:0]      out_data;
  beat_meta_t         out_meta;
  logic               fibo_valid, fibo_ready, fibo_last;
  logic [DW-1:0]      fibo_data;
  page_e              fibo_page;
  logic               rd_start, rd_busy, rd_fib_valid, rd_fib_ready;
  logic               rd_in_valid, rd_in_ready, rd_out_valid, rd_out_ready, rd_out_last;
  logic [31:0]        rd_seed;
  logic [DW-1:0]      rd_fib_data, rd_in_data, rd_out_data;

  star_top #(.DATA_W(DW), .GROUP_CELLS(GC)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL DW=%0d GC=%0d %s at %0t", DW, GC, what, $time);
    end
  endtask

  int            st_of [16];
  logic [3:0]    st_rand [NWL][CPW];   // cell states after LFSR only
  logic [3:0]    st_star [NWL][CPW];   // cell states as STAR stores them
  logic [DW-1:0] exp_beat [WLW];
  logic [DW-1:0] user [4][PW];
  int nbeat, nfibw;
  longint t_first, t_last;

  function automatic bit is_top10(int a, int v, int b);
    int lo = (a < b) ? a : b, hi = (a < b) ? b : a;
    case (v)
      15: return (lo == 0 && hi <= 2) || (lo == 1 && hi <= 2);
      14: return lo <= 1 && hi <= 2 && !(lo == 0 && hi == 2);
      13: return lo == 0 && hi == 0;
      default: return 0;
    endcase
  endfunction

  task automatic build_expect(int wl, logic [31:0] seeds [4]);
    logic [CPW-1:0] r [4];
    for (int p = 0; p < 4; p++) begin
      logic [31:0] s;
      s = seeds[p];
      for (int w = 0; w < PW; w++)
        for (int i = 0; i < DW; i++) r[p][w * DW + i] = user[p][w][i] ^ ref_lfsr_bit(s);
    end
    for (int g = 0; g < GROUPS; g++) begin
      int best_f = 0, best_d = 0;
      for (int i = 0; i < GC; i++) begin
        int c = g * GC + i;
        st_rand[wl][c] = 4'(st_of[{r[3][c], r[2][c], r[1][c], r[0][c]}]);
      end
      for (int f = 0; f < 16; f++) begin
        int d = 0;
        for (int i = 0; i < GC; i++) begin
          int s = st_rand[wl][g * GC + i];
          d += E_PROFILE[st_of[ref_bits(s) ^ 4'(f)]] - E_PROFILE[s];
        end
        if (f == 0 || d < best_d) begin best_d = d; best_f = f; end
      end
      for (int i = 0; i < GC; i++)
        st_star[wl][g * GC + i] = 4'(st_of[ref_bits(st_rand[wl][g * GC + i]) ^ 4'(best_f)]);
      for (int k = 0; k < 4 * CH; k++) begin
        int p = k / CH, b = k % CH;
        exp_beat[4 * CH * g + k] = r[p][(g * GC + b * DW) +: DW] ^ {DW{best_f[p]}};
      end
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      chk(out_data == exp_beat[nbeat], "output beat");
      chk(out_meta.page == page_e'((nbeat / CH) % 4), "page");
      if (nbeat == 0) t_first = longint'($time / 10);
      if (nbeat == WLW - 1) t_last = longint'($time / 10);
      nbeat++;
    end
    if (fibo_valid && fibo_ready) nfibw++;
  end

  initial begin
    int cnt_r [16], cnt_s [16];
    logic [31:0] seeds [4];
    done = 0; checks = 0; failures = 0;
    top10_r = 0; top10_s = 0; ep15e_r = 0; ep15e_s = 0;
    hw_we = 0; hw_addr = '0; hw_wdata = '0; lut_we = 0; lut_state = '0; lut_flip = '0;
    lut_wdata = '0; wl_start = 0; rd_start = 0; rd_seed = '0; rd_fib_valid = 0;
    rd_fib_data = '0; rd_in_valid = 0; rd_in_data = '0; out_ready = 1; fibo_ready = 1;
    rd_out_ready = 1;
    for (int p = 0; p < 4; p++) wl_seeds[p] = '0;
    for (int b = 0; b < 16; b++) st_of[b] = ref_state(4'(b));
    wait (rst_n);
    for (int s = 0; s < 16; s++)
      for (int f = 0; f < 16; f++) begin
        @(negedge clk);
        lut_we = 1; lut_state = 4'(s); lut_flip = 4'(f);
        lut_wdata = 16'(E_PROFILE[st_of[ref_bits(s) ^ 4'(f)]] - E_PROFILE[s]);
      end
    @(negedge clk) lut_we = 0;

    for (int wl = 0; wl < NWL; wl++) begin
      for (int p = 0; p < 4; p++) begin
        seeds[p] = $urandom() | 32'h1;
        for (int w = 0; w < PW; w++) user[p][w] = DW'({$urandom(), $urandom()});
      end
      for (int p = 0; p < 4; p++)
        for (int w = 0; w < PW; w++) begin
          @(negedge clk);
          hw_we = 1; hw_addr = AW'(p * PW + w); hw_wdata = user[p][w];
        end
      @(negedge clk) hw_we = 0;
      build_expect(wl, seeds);
      nbeat = 0; nfibw = 0;
      @(negedge clk);
      wl_seeds = seeds;
      wl_start = 1;
      @(negedge clk) wl_start = 0;
      wait (!wl_busy);
      @(negedge clk);
      chk(nbeat == WLW, "all beats");
      chk(nfibw == 4 * FWORDS, "all FIB words");
      chk(t_last - t_first == WLW - 1, "one beat per cycle");
    end

    for (int k = 0; k < 16; k++) begin cnt_r[k] = 0; cnt_s[k] = 0; end
    for (int wl = 0; wl < NWL; wl++)
      for (int c = 0; c < CPW; c++) begin
        cnt_r[st_rand[wl][c]]++;
        cnt_s[st_star[wl][c]]++;
      end
    for (int wl = 1; wl < NWL - 1; wl++)
      for (int c = 0; c < CPW; c++) begin
        if (is_top10(st_rand[wl - 1][c], st_rand[wl][c], st_rand[wl + 1][c])) top10_r++;
        if (is_top10(st_star[wl - 1][c], st_star[wl][c], st_star[wl + 1][c])) top10_s++;
        if (st_rand[wl][c] == 15 && st_rand[wl - 1][c] == 0 && st_rand[wl + 1][c] == 0) ep15e_r++;
        if (st_star[wl][c] == 15 && st_star[wl - 1][c] == 0 && st_star[wl + 1][c] == 0) ep15e_s++;
      end
    if (PRINT) begin
      $display("DW=%0d GC=%0d state counts over %0d wordlines", DW, GC, NWL);
      $display("state   LFSR    STAR   change");
      for (int k = 0; k < 16; k++)
        $display("P%-2d  %7d %7d  %4d%%", k, cnt_r[k], cnt_s[k],
                 100 * (cnt_s[k] - cnt_r[k]) / cnt_r[k]);
    end
    chk(cnt_s[0] < cnt_r[0] && cnt_s[15] < cnt_r[15], "fewer cells in P0 and P15");
    done = 1;
  end

endmodule
