// star_wl_buffer -- controller SRAM buffer holding one QLC wordline.
//
// DEPTH words of DATA_W bits: the four pages of one wordline, page p at word
// addresses p*PAGE_WORDS .. p*PAGE_WORDS+PAGE_WORDS-1 (16 KiB pages: 2048
// words of 64 bits each, 8192 words in all). One synchronous write port for
// the host side, one synchronous read port for the zig-zag scheduler: `rdata`
// shows the word addressed in the last cycle `re` was high and holds it
// otherwise. The paper only draws this buffer in front of STAR; holding a
// whole wordline is what zig-zag scheduling needs, because the TSB chunk of
// the first group is needed before the LSB chunk of the second.
module star_wl_buffer #(
  parameter int unsigned DATA_W = 64,
  parameter int unsigned DEPTH  = 8192,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [DATA_W-1:0] wdata,
  input  logic              re,
  input  logic [AW-1:0]     raddr,
  output logic [DATA_W-1:0] rdata
);

  logic [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
