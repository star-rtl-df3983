// star_zigzag_sched -- Zig-Zag IO Scheduling (ZIS) of one wordline.
//
// The four pages of a wordline sit page after page in the wordline buffer.
// Sent page by page, the cells of a group would only be complete when the TSB
// page arrives, a page later than its LSB bits. This scheduler instead reads
// the buffer group by group: for group g it reads the CHUNK_BEATS words of
// the LSB page that hold cells g*GROUP_CELLS.., then the same words of the
// CSB, MSB and TSB pages, then moves to group g+1. All four bits of a group
// thus reach STAR together, at DATA_W bits per cycle. Each beat carries its
// page, a last-beat-of-group flag and a last-beat-of-wordline flag.
// `start` begins a wordline; `busy` stays high until its last beat has been
// taken. The buffer has one cycle read latency; a read is issued only when the
// output register is free or being emptied, so back-pressure stalls the scan
// without losing a word. The order follows the paper's Fig. 7(b); addresses
// and flags are this design's.
module star_zigzag_sched
  import star_pkg::*;
#(
  parameter int unsigned DATA_W      = 64,
  parameter int unsigned PAGE_BYTES  = 16384,
  parameter int unsigned GROUP_CELLS = 128,
  localparam int unsigned PAGE_WORDS = PAGE_BYTES * 8 / DATA_W,
  localparam int unsigned AW         = $clog2(BPC * PAGE_WORDS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  // wordline buffer read port
  output logic              re,
  output logic [AW-1:0]     raddr,
  input  logic [DATA_W-1:0] rdata,
  // beat stream
  output logic              out_valid,
  input  logic              out_ready,
  output logic [DATA_W-1:0] out_data,
  output beat_meta_t        out_meta
);

  localparam int unsigned GROUPS      = PAGE_BYTES * 8 / GROUP_CELLS;
  localparam int unsigned CHUNK_BEATS = GROUP_CELLS / DATA_W;
  localparam int unsigned GW          = $clog2(GROUPS);
  localparam int unsigned BW          = (CHUNK_BEATS > 1) ? $clog2(CHUNK_BEATS) : 1;

  logic          running, advance, issue;
  logic [GW-1:0] g;
  logic [1:0]    p;
  logic [BW-1:0] b;
  logic          b_last, p_last, g_last;

  assign b_last  = b == BW'(CHUNK_BEATS - 1);
  assign p_last  = p == 2'(BPC - 1);
  assign g_last  = g == GW'(GROUPS - 1);
  assign advance = !out_valid || out_ready;
  assign issue   = running && advance;
  assign re      = issue;
  assign raddr   = AW'(p) * AW'(PAGE_WORDS) + AW'(g) * AW'(CHUNK_BEATS) + AW'(b);
  assign out_data = rdata;
  assign busy    = running || out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running   <= 1'b0;
      out_valid <= 1'b0;
      out_meta  <= '0;
      g         <= '0;
      p         <= '0;
      b         <= '0;
    end else begin
      if (start && !busy) begin
        running <= 1'b1;
        g       <= '0;
        p       <= '0;
        b       <= '0;
      end else if (issue) begin
        out_meta.page  <= page_e'(p);
        out_meta.glast <= b_last && p_last;
        out_meta.wlast <= b_last && p_last && g_last;
        if (!b_last) begin
          b <= b + 1'b1;
        end else begin
          b <= '0;
          if (!p_last) begin
            p <= p + 1'b1;
          end else begin
            p <= '0;
            g <= g + 1'b1;
            if (g_last) running <= 1'b0;
          end
        end
      end
      if (issue)        out_valid <= 1'b1;
      else if (advance) out_valid <= 1'b0;
    end
  end

endmodule
