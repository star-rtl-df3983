// tb_star_ref_pkg -- reference model used by the STAR testbenches.
//
// Written apart from the RTL: the QLC Gray code is kept as the bit strings
// of the paper's state table (LSB,CSB,MSB,TSB order, left to right), the LFSR
// is stepped one bit at a time from a tap list, and the group error change
// Delta E_G,f is summed straight from per-state error values e_k as in
// Eq. 3, without any LUT. The e_k profile here is test stimulus only, shaped
// so that the edge states P0, P1, P14 and P15 are the error-prone ones.
package tb_star_ref_pkg;

  // state k -> "L C M T" bits
  localparam string GRAY_LCMT [16] = '{
    "1111", "1110", "1100", "1000", "1010", "1011", "0011", "0001",
    "1001", "1101", "0101", "0100", "0000", "0010", "0110", "0111"
  };

  // {TSB,MSB,CSB,LSB} of state k
  function automatic logic [3:0] ref_bits(int k);
    string s;
    s = GRAY_LCMT[k];
    return {s[3] == "1", s[2] == "1", s[1] == "1", s[0] == "1"};
  endfunction

  function automatic int ref_state(logic [3:0] b);
    for (int k = 0; k < 16; k++) if (ref_bits(k) == b) return k;
    return -1;
  endfunction

  // test error profile (arbitrary units)
  localparam int E_PROFILE [16] = '{
    90, 70, 30, 20, 12, 10, 11, 13, 14, 15, 18, 25, 40, 75, 95, 110
  };

  // error change of state s under flip f, for a profile e
  function automatic int ref_dlt(int e [16], int s, logic [3:0] f);
    return e[ref_state(ref_bits(s) ^ f)] - e[s];
  endfunction

  // 32-bit Fibonacci LFSR, taps 32,22,2,1; returns the output bit
  function automatic logic ref_lfsr_bit(ref logic [31:0] s);
    logic o, fb;
    o  = s[31];
    fb = s[31] ^ s[21] ^ s[1] ^ s[0];
    s  = {s[30:0], fb};
    return o;
  endfunction

  function automatic logic [63:0] ref_key64(ref logic [31:0] s);
    logic [63:0] k;
    for (int i = 0; i < 64; i++) k[i] = ref_lfsr_bit(s);
    return k;
  endfunction

endpackage
