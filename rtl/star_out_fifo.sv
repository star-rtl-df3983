// star_out_fifo -- output buffer between STAR and the ECC / flash side.
//
// A synchronous first-in first-out queue of DEPTH words of W bits with
// valid/ready on both sides. It lets the STAR pipeline keep running while the
// consumer stalls briefly and passes back-pressure on when it is full. Data
// written in one cycle can be read in the next (one cycle latency); full
// throughput. The paper draws an output buffer after the bit flipper holding
// whole groups but gives no size; DEPTH defaults to two groups of 8 beats,
// the two groups its figure shows in it.
module star_out_fifo #(
  parameter int unsigned W     = 68,
  parameter int unsigned DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic [AW:0]   count;
  logic          wr, rd;

  assign in_ready  = count != (AW+1)'(DEPTH);
  assign out_valid = count != '0;
  assign out_data  = mem[rptr];
  assign wr        = in_valid && in_ready;
  assign rd        = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (wr) mem[wptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (wr) wptr <= (wptr == AW'(DEPTH - 1)) ? '0 : wptr + 1'b1;
      if (rd) rptr <= (rptr == AW'(DEPTH - 1)) ? '0 : rptr + 1'b1;
      count <= count + (AW+1)'(wr) - (AW+1)'(rd);
    end
  end

endmodule
