// star_flip_unit -- one of the sixteen computation units of the parallel
// E_G estimator, tied to one bit-flip operation f.
//
// Each cycle it receives the Vth states of SCAN_CELLS cells of the group
// being scanned and the LUT column of its own f (the error change
// e_f(s)-e_s for each of the sixteen states s). It looks up every cell's
// change, sums them and adds the sum to its accumulator, so that after
// GROUP_CELLS/SCAN_CELLS cycles the accumulator holds
// Delta E_G,f = sum_i (e_f(s_i) - e_s_i)  (Eq. 3 of the paper).
// `clear` empties the accumulator at the next edge for a new group (it wins
// over `en`); `acc_sum` is the accumulator plus this cycle's slice, so the
// caller can take the final sum in the cycle of the last slice. A linear scan with LUT look-ups is the paper's structure; the cells
// per cycle and the widths are this design's choices.
module star_flip_unit
  import star_pkg::*;
#(
  parameter int unsigned SCAN_CELLS = 16,
  parameter int unsigned LUT_W      = 16,
  parameter int unsigned ACC_W      = 24
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    en,
  input  state_t                  states [SCAN_CELLS],
  input  logic signed [LUT_W-1:0] lut_col [NSTATES],
  output logic signed [ACC_W-1:0] acc_sum,
  output logic signed [ACC_W-1:0] acc
);

  logic signed [ACC_W-1:0] slice_sum;

  always_comb begin
    slice_sum = '0;
    for (int unsigned c = 0; c < SCAN_CELLS; c++)
      slice_sum = slice_sum + ACC_W'(lut_col[states[c]]);
  end

  assign acc_sum = en ? acc + slice_sum : acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     acc <= '0;
    else if (clear) acc <= '0;
    else            acc <= acc_sum;
  end

endmodule
