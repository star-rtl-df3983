// star_pkg -- types, constants and functions shared by the STAR randomizer.
//
// STAR (state-aware randomizer) sits in the write datapath of an SSD
// controller. It randomizes QLC wordline data with a conventional LFSR and
// then, per group of cells, inverts the subset of the four page bits
// (LSB/CSB/MSB/TSB) that lowers the summed per-state error probability of the
// group. This package holds what every stage needs:
//   * the page index (LSB=0 .. TSB=3) and the beat side-band that travels with
//     each data beat through the pipeline;
//   * the QLC Gray code that maps the four bits of a cell to its Vth state
//     P0..P15, copied from the bit table printed in the paper's Fig. 1(b) and
//     cross-checked against the four cells of its Fig. 6 example;
//   * the LFSR step used by the randomizer and the de-randomizer. The paper
//     does not give the polynomial; x^32+x^22+x^2+x+1 (a maximal-length
//     Fibonacci LFSR) is this design's choice.
// Cell bits are held as {TSB,MSB,CSB,LSB}, which is also the bit order of a
// bit-flip operation f(b_TSB,b_MSB,b_CSB,b_LSB) and of the 4-bit FIB.
package star_pkg;

  localparam int unsigned BPC     = 4;   // bits per cell (QLC)
  localparam int unsigned NSTATES = 16;  // P0..P15
  localparam int unsigned NFLIPS  = 16;  // 2^4 bit-flip operations
  localparam int unsigned LFSR_W  = 32;

  typedef enum logic [1:0] {
    PG_LSB = 2'd0,
    PG_CSB = 2'd1,
    PG_MSB = 2'd2,
    PG_TSB = 2'd3
  } page_e;

  typedef logic [3:0] cellbits_t;  // {TSB,MSB,CSB,LSB}
  typedef logic [3:0] state_t;     // k of Pk
  typedef logic [3:0] flip_t;      // {b_TSB,b_MSB,b_CSB,b_LSB}

  // Side-band of one data beat in zig-zag order.
  typedef struct packed {
    page_e page;   // page the beat belongs to
    logic  glast;  // last beat of its group (the TSB chunk's last beat)
    logic  wlast;  // last beat of the wordline
  } beat_meta_t;

  // Vth state of a cell from its bits, per the QLC table of Fig. 1(b).
  function automatic state_t state_of_bits(cellbits_t b);
    unique case (b)
      4'b1111: return 4'd0;
      4'b0111: return 4'd1;
      4'b0011: return 4'd2;
      4'b0001: return 4'd3;
      4'b0101: return 4'd4;
      4'b1101: return 4'd5;
      4'b1100: return 4'd6;
      4'b1000: return 4'd7;
      4'b1001: return 4'd8;
      4'b1011: return 4'd9;
      4'b1010: return 4'd10;
      4'b0010: return 4'd11;
      4'b0000: return 4'd12;
      4'b0100: return 4'd13;
      4'b0110: return 4'd14;
      default: return 4'd15;  // 4'b1110
    endcase
  endfunction

  // Inverse of state_of_bits.
  function automatic cellbits_t bits_of_state(state_t s);
    unique case (s)
      4'd0:    return 4'b1111;
      4'd1:    return 4'b0111;
      4'd2:    return 4'b0011;
      4'd3:    return 4'b0001;
      4'd4:    return 4'b0101;
      4'd5:    return 4'b1101;
      4'd6:    return 4'b1100;
      4'd7:    return 4'b1000;
      4'd8:    return 4'b1001;
      4'd9:    return 4'b1011;
      4'd10:   return 4'b1010;
      4'd11:   return 4'b0010;
      4'd12:   return 4'b0000;
      4'd13:   return 4'b0100;
      4'd14:   return 4'b0110;
      default: return 4'b1110;
    endcase
  endfunction

  // One step of the Fibonacci LFSR: the output bit is s[31], the feedback
  // s[31]^s[21]^s[1]^s[0] shifts in at bit 0.
  function automatic logic [LFSR_W-1:0] lfsr_step(logic [LFSR_W-1:0] s);
    return {s[LFSR_W-2:0], s[31] ^ s[21] ^ s[1] ^ s[0]};
  endfunction

  // A zero seed would lock the LFSR; it is replaced by this constant.
  localparam logic [LFSR_W-1:0] LFSR_ZERO_SEED_SUB = 32'h1;

endpackage
