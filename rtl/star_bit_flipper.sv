// star_bit_flipper -- stage 3 of STAR: apply the optimal bit-flip f* to the
// group and produce its Flip Indicator Bits (FIB).
//
// Takes one group (its four GROUP_CELLS-bit page chunks and f*) over a
// group-wide valid/ready handshake and sends it out again as beats in
// zig-zag order (LSB chunk, CSB, MSB, TSB), each beat of page p inverted in
// full when bit p of f* is set: flipping page bit p of every cell of the
// group is exactly the cell transform f(b_TSB,b_MSB,b_CSB,b_LSB) of the paper.
// With the last beat of the group it pulses `fib_valid` with FIB = f*, one bit
// per page ('1' = flipped), as the paper stores it in the spare area. A new
// group is taken in the cycle the last beat of the previous one leaves, so
// the stage runs at one beat per cycle; the first beat of a group is out one
// cycle after the group is accepted. The beat handshake is valid/ready.
module star_bit_flipper
  import star_pkg::*;
#(
  parameter int unsigned DATA_W      = 64,
  parameter int unsigned GROUP_CELLS = 128
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            grp_valid,
  output logic                            grp_ready,
  input  logic [BPC-1:0][GROUP_CELLS-1:0] grp_bits,
  input  flip_t                           grp_flip,
  input  logic                            grp_wlast,
  output logic                            out_valid,
  input  logic                            out_ready,
  output logic [DATA_W-1:0]               out_data,
  output beat_meta_t                      out_meta,
  output logic                            fib_valid,
  output flip_t                           fib
);

  localparam int unsigned CHUNK_BEATS = GROUP_CELLS / DATA_W;
  localparam int unsigned BEATS       = BPC * CHUNK_BEATS;
  localparam int unsigned CNT_W       = $clog2(BEATS);

  logic [BPC-1:0][GROUP_CELLS-1:0] bits_q;
  flip_t                           flip_q;
  logic                            wlast_q;
  logic [CNT_W-1:0]                cnt;
  logic                            out_fire, last_beat;
  logic [1:0]                      pg;
  logic [CNT_W-1:0]                off;

  assign pg        = 2'(cnt / CHUNK_BEATS);
  assign off       = CNT_W'(cnt % CHUNK_BEATS);
  assign out_fire  = out_valid && out_ready;
  assign last_beat = cnt == CNT_W'(BEATS - 1);
  assign grp_ready = !out_valid || (out_fire && last_beat);

  assign out_data       = bits_q[pg][off*DATA_W +: DATA_W] ^ {DATA_W{flip_q[pg]}};
  assign out_meta.page  = page_e'(pg);
  assign out_meta.glast = last_beat;
  assign out_meta.wlast = last_beat && wlast_q;
  assign fib_valid      = out_fire && last_beat;
  assign fib            = flip_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bits_q    <= '0;
      flip_q    <= '0;
      wlast_q   <= 1'b0;
      cnt       <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_fire) cnt <= last_beat ? '0 : cnt + 1'b1;
      if (grp_valid && grp_ready) begin
        bits_q    <= grp_bits;
        flip_q    <= grp_flip;
        wlast_q   <= grp_wlast;
        out_valid <= 1'b1;
      end else if (out_fire && last_beat) begin
        out_valid <= 1'b0;
      end
    end
  end

endmodule
