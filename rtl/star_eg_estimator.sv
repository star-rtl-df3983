// star_eg_estimator -- stage 2 of STAR: group error (E_G) estimation with
// the parallel error estimator, and choice of the optimal bit-flip f*.
//
// Input is the randomized beat stream in zig-zag order: for each group of
// GROUP_CELLS cells, its LSB chunk, CSB chunk, MSB chunk and TSB chunk, each
// GROUP_CELLS/DATA_W beats long. Cell i of a group is bit i of the four
// chunks. The stage is double-buffered at group level:
//   * a fill buffer collects the beats of group N+1;
//   * a scan buffer holds group N, which sixteen star_flip_unit instances (one
//     per bit-flip operation f) scan linearly, SCAN_CELLS = DATA_W/4 cells per
//     cycle, each adding the LUT error change e_f(s)-e_s of every cell;
//   * when the scan ends, star_argmin picks f* = argmin Delta E_G,f and the
//     group, f* and its Delta E move to the output register.
// Scanning a group takes as many cycles as filling one (GROUP_CELLS*4/DATA_W,
// 8 at the defaults), so a new group can be accepted every 8 cycles with no
// bubble: this is the paper's group-level pipelining with its parallel error
// estimator. grp_valid rises SCAN_CYCLES+1 cycles after the edge that takes
// the last beat of a group (9 at the defaults); a ready consumer takes the
// group at the next edge. The Vth state of each cell comes from the Gray code
// of star_pkg. Output is a group-wide valid/ready handshake. The scan rate, the
// double buffering and the widths are this design's choices.
module star_eg_estimator
  import star_pkg::*;
#(
  parameter int unsigned DATA_W      = 64,
  parameter int unsigned GROUP_CELLS = 128,
  parameter int unsigned LUT_W       = 16,
  localparam int unsigned ACC_W      = LUT_W + $clog2(GROUP_CELLS) + 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // randomized beat stream
  input  logic                          in_valid,
  output logic                          in_ready,
  input  logic [DATA_W-1:0]             in_data,
  input  beat_meta_t                    in_meta,
  // error-change table
  input  logic signed [LUT_W-1:0]       lut_table [NSTATES][NFLIPS],
  // one group out
  output logic                          grp_valid,
  input  logic                          grp_ready,
  output logic [BPC-1:0][GROUP_CELLS-1:0] grp_bits,
  output flip_t                         grp_flip,
  output logic signed [ACC_W-1:0]       grp_delta,
  output logic                          grp_wlast
);

  localparam int unsigned CHUNK_BEATS = GROUP_CELLS / DATA_W;
  localparam int unsigned BEATS       = BPC * CHUNK_BEATS;
  localparam int unsigned SCAN_CELLS  = DATA_W / BPC;
  localparam int unsigned SCAN_CYCLES = GROUP_CELLS / SCAN_CELLS;
  localparam int unsigned CNT_W       = $clog2(BEATS);

  if (GROUP_CELLS % DATA_W != 0 || DATA_W % BPC != 0) begin : g_bad_size
    $error("GROUP_CELLS must be a multiple of DATA_W, DATA_W of 4");
  end

  // ---------------- fill buffer ----------------
  logic [BPC-1:0][GROUP_CELLS-1:0] fill_q;
  logic [CNT_W-1:0]                fill_cnt;
  logic                            fill_full, fill_wlast;
  logic                            in_fire, xfer;
  logic [1:0]                      fill_page;
  logic [CNT_W-1:0]                fill_off;

  assign fill_page = 2'(fill_cnt / CHUNK_BEATS);
  assign fill_off  = CNT_W'(fill_cnt % CHUNK_BEATS);

  // ---------------- scan buffer ----------------
  logic [BPC-1:0][GROUP_CELLS-1:0] scan_q;
  logic                            scan_busy, scan_wait, scan_wlast;
  logic [$clog2(SCAN_CYCLES+1)-1:0] scan_idx;
  logic                            scan_en, last_slice, finishing, out_free, release_grp;

  assign scan_en     = scan_busy && !scan_wait;
  assign last_slice  = scan_en && (int'(scan_idx) == SCAN_CYCLES - 1);
  assign finishing   = last_slice || scan_wait;
  assign out_free    = !grp_valid || grp_ready;
  assign release_grp = finishing && out_free;
  assign xfer        = fill_full && (!scan_busy || release_grp);
  assign in_ready    = !fill_full || xfer;
  assign in_fire     = in_valid && in_ready;

  // states of the cells in the current slice
  state_t slice_states [SCAN_CELLS];
  always_comb begin
    for (int unsigned c = 0; c < SCAN_CELLS; c++) begin
      int unsigned ci;
      ci = int'(scan_idx) * SCAN_CELLS + c;
      if (ci >= GROUP_CELLS) ci = 0;
      slice_states[c] = state_of_bits({scan_q[3][ci], scan_q[2][ci],
                                       scan_q[1][ci], scan_q[0][ci]});
    end
  end

  // ---------------- sixteen computation units ----------------
  logic signed [ACC_W-1:0] acc_sum [NFLIPS];

  for (genvar f = 0; f < NFLIPS; f++) begin : g_unit
    logic signed [LUT_W-1:0] col [NSTATES];
    for (genvar s = 0; s < NSTATES; s++) begin : g_col
      assign col[s] = lut_table[s][f];
    end
    star_flip_unit #(
      .SCAN_CELLS (SCAN_CELLS),
      .LUT_W      (LUT_W),
      .ACC_W      (ACC_W)
    ) u_unit (
      .clk     (clk),
      .rst_n   (rst_n),
      .clear   (xfer),
      .en      (scan_en),
      .states  (slice_states),
      .lut_col (col),
      .acc_sum (acc_sum[f]),
      .acc     ()
    );
  end

  flip_t                   best_f;
  logic signed [ACC_W-1:0] best_d;

  star_argmin #(.ACC_W(ACC_W)) u_argmin (
    .vals    (acc_sum),
    .idx     (best_f),
    .min_val (best_d)
  );

  // ---------------- sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill_q     <= '0;
      fill_cnt   <= '0;
      fill_full  <= 1'b0;
      fill_wlast <= 1'b0;
      scan_q     <= '0;
      scan_busy  <= 1'b0;
      scan_wait  <= 1'b0;
      scan_wlast <= 1'b0;
      scan_idx   <= '0;
      grp_valid  <= 1'b0;
      grp_bits   <= '0;
      grp_flip   <= '0;
      grp_delta  <= '0;
      grp_wlast  <= 1'b0;
    end else begin
      // output register
      if (release_grp) begin
        grp_valid <= 1'b1;
        grp_bits  <= scan_q;
        grp_flip  <= best_f;
        grp_delta <= best_d;
        grp_wlast <= scan_wlast;
      end else if (grp_ready) begin
        grp_valid <= 1'b0;
      end

      // scan buffer
      if (xfer) begin
        scan_q     <= fill_q;
        scan_wlast <= fill_wlast;
        scan_busy  <= 1'b1;
        scan_wait  <= 1'b0;
        scan_idx   <= '0;
      end else if (release_grp) begin
        scan_busy  <= 1'b0;
        scan_wait  <= 1'b0;
      end else if (last_slice) begin
        scan_wait  <= 1'b1;
      end else if (scan_en) begin
        scan_idx   <= scan_idx + 1'b1;
      end

      // fill buffer
      if (xfer) fill_full <= 1'b0;
      if (in_fire) begin
        fill_q[fill_page][fill_off*DATA_W +: DATA_W] <= in_data;
        if (fill_cnt == CNT_W'(BEATS - 1)) begin
          fill_cnt   <= '0;
          fill_full  <= 1'b1;
          fill_wlast <= in_meta.wlast;
        end else begin
          fill_cnt <= fill_cnt + 1'b1;
        end
      end
    end
  end

  // The beat side-band must agree with the zig-zag position.
  a_page_order: assert property (@(posedge clk) disable iff (!rst_n)
    in_fire |-> (in_meta.page == page_e'(fill_page)) &&
                (in_meta.glast == (fill_cnt == CNT_W'(BEATS - 1))));

endmodule
