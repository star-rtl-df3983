// star_lfsr -- LFSR key-stream generator, DATA_W key bits per beat.
//
// Holds one 32-bit Fibonacci LFSR state (polynomial in star_pkg). `key` shows
// the next DATA_W output bits of the sequence, the first one at key[0]; a
// cycle with `advance` high moves the state DATA_W steps on, so the next beat
// sees the following DATA_W bits. `load` (priority over `advance`) sets the
// state to `seed` (a zero seed is replaced by a fixed non-zero value). The
// key is combinational from the state register; state updates on the rising
// clock edge. An LFSR XOR randomizer is the conventional scheme the paper
// builds on; the polynomial and the bit order are this design's choice.
module star_lfsr
  import star_pkg::*;
#(
  parameter int unsigned DATA_W = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load,
  input  logic [LFSR_W-1:0] seed,
  input  logic              advance,
  output logic [DATA_W-1:0] key
);

  logic [LFSR_W-1:0] state_q, state_adv;

  always_comb begin
    logic [LFSR_W-1:0] s;
    s = state_q;
    for (int unsigned i = 0; i < DATA_W; i++) begin
      key[i] = s[LFSR_W-1];
      s      = lfsr_step(s);
    end
    state_adv = s;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       state_q <= LFSR_ZERO_SEED_SUB;
    else if (load)    state_q <= (seed == '0) ? LFSR_ZERO_SEED_SUB : seed;
    else if (advance) state_q <= state_adv;
  end

endmodule
