// star_top -- STAR, the state-aware randomizer, in an SSD controller datapath.
//
// Write path (host buffer to ECC/flash), one QLC wordline at a time:
//   star_wl_buffer     the four pages of the wordline, written page by page
//   star_zigzag_sched  reads them group-interleaved (zig-zag IO scheduling)
//   star_randomizer    LFSR randomization, one key stream per page
//   star_eg_estimator  collects a group, sixteen units sum Delta E_G,f over
//                      its cells from star_error_lut, picks f* = argmin
//   star_bit_flipper   inverts the page bits chosen by f*, emits the FIB
//   star_out_fifo      output buffer towards ECC / flash channel
//   star_fib_buffer    the wordline's FIBs, sent per page after the data
// The three STAR stages (LFSR, E_G estimator, bit flipper) work on three
// consecutive groups at once (group-level pipelining); at the defaults a
// group is 8 beats of 64 bits and every stage spends 8 cycles on it, so the
// path sustains 64 bits per cycle. The first beat of a wordline appears on
// `out_*` 21 cycles after `wl_start` when nothing stalls.
// Read path: star_derandomizer restores one page from its FIB vector and
// seed. Ports are plain valid/ready streams; `wl_start` is taken only while
// `wl_busy` is low, and `wl_busy` falls with the last FIB word (`wl_done`).
// The host must not overwrite the wordline buffer while `wl_busy` is high.
// The chain of stages follows the paper's Fig. 7(a); buffers' sizes, widths
// and handshakes are this design's choices.
module star_top
  import star_pkg::*;
#(
  parameter int unsigned DATA_W      = 64,
  parameter int unsigned PAGE_BYTES  = 16384,
  parameter int unsigned GROUP_CELLS = 128,
  parameter int unsigned LUT_W       = 16,
  parameter int unsigned OFIFO_DEPTH = 16,
  localparam int unsigned PAGE_WORDS = PAGE_BYTES * 8 / DATA_W,
  localparam int unsigned AW         = $clog2(BPC * PAGE_WORDS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // host side: wordline buffer write port (page p at p*PAGE_WORDS)
  input  logic                    hw_we,
  input  logic [AW-1:0]           hw_addr,
  input  logic [DATA_W-1:0]       hw_wdata,
  // firmware: error-change LUT
  input  logic                    lut_we,
  input  state_t                  lut_state,
  input  flip_t                   lut_flip,
  input  logic signed [LUT_W-1:0] lut_wdata,
  // firmware: wordline control
  input  logic                    wl_start,
  input  logic [LFSR_W-1:0]       wl_seeds [BPC],
  output logic                    wl_busy,
  output logic                    wl_done,
  // randomized, flipped data towards ECC / flash (zig-zag order)
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [DATA_W-1:0]       out_data,
  output beat_meta_t              out_meta,
  // FIB words for the spare areas
  output logic                    fibo_valid,
  input  logic                    fibo_ready,
  output logic [DATA_W-1:0]       fibo_data,
  output page_e                   fibo_page,
  output logic                    fibo_last,
  // read path, one page
  input  logic                    rd_start,
  input  logic [LFSR_W-1:0]       rd_seed,
  output logic                    rd_busy,
  input  logic                    rd_fib_valid,
  output logic                    rd_fib_ready,
  input  logic [DATA_W-1:0]       rd_fib_data,
  input  logic                    rd_in_valid,
  output logic                    rd_in_ready,
  input  logic [DATA_W-1:0]       rd_in_data,
  output logic                    rd_out_valid,
  input  logic                    rd_out_ready,
  output logic [DATA_W-1:0]       rd_out_data,
  output logic                    rd_out_last
);

  localparam int unsigned GROUPS = PAGE_BYTES * 8 / GROUP_CELLS;
  localparam int unsigned FW     = DATA_W + $bits(beat_meta_t);

  logic go;
  assign go = wl_start && !wl_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       wl_busy <= 1'b0;
    else if (go)      wl_busy <= 1'b1;
    else if (wl_done) wl_busy <= 1'b0;
  end

  // ---------------- wordline buffer + zig-zag scheduler ----------------
  logic              buf_re;
  logic [AW-1:0]     buf_raddr;
  logic [DATA_W-1:0] buf_rdata;

  star_wl_buffer #(.DATA_W(DATA_W), .DEPTH(BPC * PAGE_WORDS)) u_buf (
    .clk   (clk),
    .we    (hw_we),
    .waddr (hw_addr),
    .wdata (hw_wdata),
    .re    (buf_re),
    .raddr (buf_raddr),
    .rdata (buf_rdata)
  );

  logic              zz_valid, zz_ready;
  logic [DATA_W-1:0] zz_data;
  beat_meta_t        zz_meta;

  star_zigzag_sched #(
    .DATA_W(DATA_W), .PAGE_BYTES(PAGE_BYTES), .GROUP_CELLS(GROUP_CELLS)
  ) u_zz (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (go),
    .busy      (),
    .re        (buf_re),
    .raddr     (buf_raddr),
    .rdata     (buf_rdata),
    .out_valid (zz_valid),
    .out_ready (zz_ready),
    .out_data  (zz_data),
    .out_meta  (zz_meta)
  );

  // ---------------- stage 1: LFSR ----------------
  logic              rn_valid, rn_ready;
  logic [DATA_W-1:0] rn_data;
  beat_meta_t        rn_meta;

  star_randomizer #(.DATA_W(DATA_W)) u_rand (
    .clk       (clk),
    .rst_n     (rst_n),
    .seed_load (go),
    .seeds     (wl_seeds),
    .in_valid  (zz_valid),
    .in_ready  (zz_ready),
    .in_data   (zz_data),
    .in_meta   (zz_meta),
    .out_valid (rn_valid),
    .out_ready (rn_ready),
    .out_data  (rn_data),
    .out_meta  (rn_meta)
  );

  // ---------------- stage 2: E_G estimator ----------------
  logic signed [LUT_W-1:0] lut_table [NSTATES][NFLIPS];

  star_error_lut #(.LUT_W(LUT_W)) u_lut (
    .clk     (clk),
    .rst_n   (rst_n),
    .we      (lut_we),
    .wstate  (lut_state),
    .wflip   (lut_flip),
    .wdata   (lut_wdata),
    .table_o (lut_table)
  );

  logic                            g_valid, g_ready, g_wlast;
  logic [BPC-1:0][GROUP_CELLS-1:0] g_bits;
  flip_t                           g_flip;

  star_eg_estimator #(
    .DATA_W(DATA_W), .GROUP_CELLS(GROUP_CELLS), .LUT_W(LUT_W)
  ) u_est (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (rn_valid),
    .in_ready  (rn_ready),
    .in_data   (rn_data),
    .in_meta   (rn_meta),
    .lut_table (lut_table),
    .grp_valid (g_valid),
    .grp_ready (g_ready),
    .grp_bits  (g_bits),
    .grp_flip  (g_flip),
    .grp_delta (),
    .grp_wlast (g_wlast)
  );

  // ---------------- stage 3: bit flipper ----------------
  logic              bf_valid, bf_ready, fib_valid;
  logic [DATA_W-1:0] bf_data;
  beat_meta_t        bf_meta;
  flip_t             fib;

  star_bit_flipper #(.DATA_W(DATA_W), .GROUP_CELLS(GROUP_CELLS)) u_flip (
    .clk       (clk),
    .rst_n     (rst_n),
    .grp_valid (g_valid),
    .grp_ready (g_ready),
    .grp_bits  (g_bits),
    .grp_flip  (g_flip),
    .grp_wlast (g_wlast),
    .out_valid (bf_valid),
    .out_ready (bf_ready),
    .out_data  (bf_data),
    .out_meta  (bf_meta),
    .fib_valid (fib_valid),
    .fib       (fib)
  );

  // ---------------- output buffer ----------------
  logic [FW-1:0] of_out;

  star_out_fifo #(.W(FW), .DEPTH(OFIFO_DEPTH)) u_ofifo (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (bf_valid),
    .in_ready  (bf_ready),
    .in_data   ({bf_meta, bf_data}),
    .out_valid (out_valid),
    .out_ready (out_ready),
    .out_data  (of_out)
  );

  assign out_data = of_out[DATA_W-1:0];
  assign out_meta = beat_meta_t'(of_out[FW-1:DATA_W]);

  // ---------------- FIB buffer ----------------
  star_fib_buffer #(.DATA_W(DATA_W), .GROUPS(GROUPS)) u_fibbuf (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear     (go),
    .fib_valid (fib_valid),
    .fib       (fib),
    .out_valid (fibo_valid),
    .out_ready (fibo_ready),
    .out_data  (fibo_data),
    .out_page  (fibo_page),
    .out_last  (fibo_last),
    .done      (wl_done)
  );

  // ---------------- read path ----------------
  star_derandomizer #(
    .DATA_W(DATA_W), .PAGE_BYTES(PAGE_BYTES), .GROUP_CELLS(GROUP_CELLS)
  ) u_derand (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (rd_start),
    .seed      (rd_seed),
    .busy      (rd_busy),
    .fib_valid (rd_fib_valid),
    .fib_ready (rd_fib_ready),
    .fib_data  (rd_fib_data),
    .in_valid  (rd_in_valid),
    .in_ready  (rd_in_ready),
    .in_data   (rd_in_data),
    .out_valid (rd_out_valid),
    .out_ready (rd_out_ready),
    .out_data  (rd_out_data),
    .out_last  (rd_out_last)
  );

endmodule
