// star_fib_buffer -- collects the Flip Indicator Bits (FIB) of one wordline
// and sends them out, page by page, for the pages' spare areas.
//
// Each group of a wordline has a 4-bit FIB (bit p = page p of the group was
// inverted). The bit flipper hands one FIB per group, in group order, on
// `fib_valid`. Bit p of group g is stored at bit g of page p's FIB vector, so
// page p gets a GROUPS-bit vector (1024 bits = 128 bytes per 16 KiB page at
// 128-cell groups, 0.7 % of the wordline as the paper states). After the
// last group of the wordline the buffer streams the vectors out as
// DATA_W-bit words (FIB_WORDS per page), LSB page first, with valid/ready,
// and pulses `done` with the last word. `clear` restarts the group count for
// a new wordline. While it streams, new FIBs must not arrive (asserted).
// The FIB content and its place in the spare area follow the paper; the
// word layout and the handshake are this design's choices.
module star_fib_buffer
  import star_pkg::*;
#(
  parameter int unsigned DATA_W = 64,
  parameter int unsigned GROUPS = 1024,
  localparam int unsigned FIB_WORDS = (GROUPS + DATA_W - 1) / DATA_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              fib_valid,
  input  flip_t             fib,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [DATA_W-1:0] out_data,
  output page_e             out_page,
  output logic              out_last,
  output logic              done
);

  localparam int unsigned GW = $clog2(GROUPS + 1);
  localparam int unsigned WW = (FIB_WORDS > 1) ? $clog2(FIB_WORDS) : 1;

  logic [DATA_W-1:0] mem [BPC][FIB_WORDS];
  logic [GW-1:0]     gcnt;
  logic              dumping;
  logic [1:0]        rp;
  logic [WW-1:0]     rw;
  logic              out_fire;
  int unsigned       gidx;

  assign gidx = int'(gcnt);

  assign out_valid = dumping;
  assign out_data  = mem[rp][rw];
  assign out_page  = page_e'(rp);
  assign out_last  = (rp == 2'(BPC - 1)) && (rw == WW'(FIB_WORDS - 1));
  assign out_fire  = out_valid && out_ready;
  assign done      = out_fire && out_last;

  // FIB store: emptied by `clear`, so unused bits of a partial last word
  // read as zero.
  always_ff @(posedge clk) begin
    if (clear) begin
      for (int p = 0; p < BPC; p++)
        for (int w = 0; w < FIB_WORDS; w++)
          mem[p][w] <= '0;
    end else if (fib_valid) begin
      for (int p = 0; p < BPC; p++)
        mem[p][gidx / DATA_W][gidx % DATA_W] <= fib[p];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gcnt    <= '0;
      dumping <= 1'b0;
      rp      <= '0;
      rw      <= '0;
    end else begin
      if (clear) begin
        gcnt <= '0;
      end else if (fib_valid) begin
        gcnt <= gcnt + 1'b1;
        if (gcnt == GW'(GROUPS - 1)) begin
          dumping <= 1'b1;
          rp      <= '0;
          rw      <= '0;
        end
      end
      if (out_fire) begin
        if (rw == WW'(FIB_WORDS - 1)) begin
          rw <= '0;
          rp <= rp + 1'b1;
          if (out_last) dumping <= 1'b0;
        end else begin
          rw <= rw + 1'b1;
        end
      end
    end
  end

  a_no_fib_while_dumping: assert property (@(posedge clk) disable iff (!rst_n)
    !(fib_valid && dumping));

endmodule
