// star_error_lut -- ERROR LUT of the parallel E_G estimator.
//
// Holds, for every Vth state s (P0..P15) and every bit-flip operation f, the
// pre-characterised error change e_f(s) - e_s as a signed LUT_W-bit number
// in a fixed unit of error probability chosen by the firmware. Firmware writes
// one entry per cycle (`we`, `wstate`, `wflip`, `wdata`); the whole table is
// visible at once on `table_o` so that the sixteen computation units can all
// read it in the same cycle. The paper gives the LUT's content (error-change
// values from offline profiling of real chips) but no numbers and no width;
// the table resets to zero, which makes f=0 win every group, i.e. plain
// randomization, until the firmware has loaded it.
module star_error_lut
  import star_pkg::*;
#(
  parameter int unsigned LUT_W = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    we,
  input  state_t                  wstate,
  input  flip_t                   wflip,
  input  logic signed [LUT_W-1:0] wdata,
  output logic signed [LUT_W-1:0] table_o [NSTATES][NFLIPS]
);

  logic signed [LUT_W-1:0] mem_q [NSTATES][NFLIPS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NSTATES; s++)
        for (int f = 0; f < NFLIPS; f++)
          mem_q[s][f] <= '0;
    end else if (we) begin
      mem_q[wstate][wflip] <= wdata;
    end
  end

  assign table_o = mem_q;

endmodule
