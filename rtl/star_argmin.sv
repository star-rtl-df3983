// star_argmin -- f* = argmin_f Delta E_G,f over the sixteen accumulators.
//
// Purely combinational. Ties go to the lowest f, so f(0,0,0,0) (no flip) is
// kept when no operation lowers the group error. The minimum search follows
// Eq. 4 of the paper; the tie rule is this design's choice.
module star_argmin
  import star_pkg::*;
#(
  parameter int unsigned ACC_W = 24
) (
  input  logic signed [ACC_W-1:0] vals [NFLIPS],
  output flip_t                   idx,
  output logic signed [ACC_W-1:0] min_val
);

  always_comb begin
    idx     = '0;
    min_val = vals[0];
    for (int unsigned f = 1; f < NFLIPS; f++) begin
      if (vals[f] < min_val) begin
        idx     = flip_t'(f);
        min_val = vals[f];
      end
    end
  end

endmodule
