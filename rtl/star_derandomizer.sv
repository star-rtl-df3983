// star_derandomizer -- read path of STAR for one page.
//
// Reading a page back needs two steps, in this order: undo the group
// bit-flip, then undo the LFSR randomization. Because a bit-flip operation
// inverts page bit p of every cell of a group, undoing it for one page is an
// XOR of the page's data in that group with its FIB bit p. Because the write
// side keeps one LFSR per page, the page's key stream can be regenerated on
// its own from the page's seed. Operation:
//   1. `start` with the page's `seed` (loads the LFSR, enters LOAD);
//   2. FIB_WORDS words of the page's FIB vector on `fib_valid`/`fib_ready`
//      (bit g of the vector = FIB bit of group g, as star_fib_buffer sends it);
//   3. the PAGE_WORDS data words of the page, in address order, on
//      in_valid/in_ready; each comes out one cycle later on out_valid/out_ready
//      as data ^ {FIB bit of its group} ^ key, with `out_last` on the last.
// The two-step order follows the paper; the FIB word layout, the seed per
// page and the handshakes are this design's choices.
module star_derandomizer
  import star_pkg::*;
#(
  parameter int unsigned DATA_W      = 64,
  parameter int unsigned PAGE_BYTES  = 16384,
  parameter int unsigned GROUP_CELLS = 128
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [LFSR_W-1:0] seed,
  output logic              busy,
  input  logic              fib_valid,
  output logic              fib_ready,
  input  logic [DATA_W-1:0] fib_data,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [DATA_W-1:0] in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [DATA_W-1:0] out_data,
  output logic              out_last
);

  localparam int unsigned GROUPS      = PAGE_BYTES * 8 / GROUP_CELLS;
  localparam int unsigned PAGE_WORDS  = PAGE_BYTES * 8 / DATA_W;
  localparam int unsigned CHUNK_BEATS = GROUP_CELLS / DATA_W;
  localparam int unsigned FIB_WORDS   = (GROUPS + DATA_W - 1) / DATA_W;
  localparam int unsigned FW          = (FIB_WORDS > 1) ? $clog2(FIB_WORDS) : 1;
  localparam int unsigned PW          = $clog2(PAGE_WORDS);

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_DATA} state_e;

  state_e            st;
  logic [DATA_W-1:0] fib_q [FIB_WORDS];
  logic [FW-1:0]     fcnt;
  logic [PW-1:0]     wcnt;
  logic [DATA_W-1:0] key;
  logic              in_fire, fib_bit;
  int unsigned       grp;

  assign fib_ready = st == S_LOAD;
  assign in_ready  = (st == S_DATA) && (!out_valid || out_ready);
  assign in_fire   = in_valid && in_ready;
  assign busy      = (st != S_IDLE) || out_valid;
  assign grp       = int'(wcnt) / CHUNK_BEATS;
  assign fib_bit   = fib_q[grp / DATA_W][grp % DATA_W];

  star_lfsr #(.DATA_W(DATA_W)) u_lfsr (
    .clk     (clk),
    .rst_n   (rst_n),
    .load    (start && !busy),
    .seed    (seed),
    .advance (in_fire),
    .key     (key)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      fcnt      <= '0;
      wcnt      <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_last  <= 1'b0;
      for (int w = 0; w < FIB_WORDS; w++) fib_q[w] <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      unique case (st)
        S_IDLE: if (start && !busy) begin
          st   <= S_LOAD;
          fcnt <= '0;
          wcnt <= '0;
        end
        S_LOAD: if (fib_valid) begin
          fib_q[fcnt] <= fib_data;
          fcnt        <= fcnt + 1'b1;
          if (fcnt == FW'(FIB_WORDS - 1)) st <= S_DATA;
        end
        S_DATA: if (in_fire) begin
          out_valid <= 1'b1;
          out_data  <= in_data ^ {DATA_W{fib_bit}} ^ key;
          out_last  <= wcnt == PW'(PAGE_WORDS - 1);
          wcnt      <= wcnt + 1'b1;
          if (wcnt == PW'(PAGE_WORDS - 1)) st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
