// tvtf_pkg: constants and helpers shared by the time-varying transfer
// function (TVTF) switched-capacitor controller.
//
// The controller shuffles N_CAPS distributed load capacitors between the
// supply and the crypto core. Each crypto clock cycle is split into N_CAPS
// phases; in every phase one capacitor charges from VDD and another one
// supplies the core. The random choices come from two copies of a two-level
// PRNG: an 8-bit LFSR whose bit pairs are sub-sampled by a 4-bit LFSR into a
// 4-bit number. The numbers 10, 8 and 4 are the published configuration.
//
// The LFSR feedback polynomials are not part of the published description;
// lfsr_taps() returns standard maximal-length Fibonacci tap sets.
package tvtf_pkg;

  localparam int unsigned DEF_N_CAPS = 10;  // capacitors = phases per crypto clock
  localparam int unsigned DEF_MAIN_W = 8;   // main LFSR width (period 2^8-1)
  localparam int unsigned DEF_SEL_W  = 4;   // sub-sampling LFSR width
  localparam int unsigned DEF_RND_W  = 4;   // random number width (b3..b0)
  localparam int unsigned MAX_LFSR_W = 32;

  // Tap mask for a maximal-length Fibonacci LFSR of the given width.
  // Bit k-1 of the mask set means the polynomial has the term x^k.
  function automatic logic [MAX_LFSR_W-1:0] lfsr_taps(input int unsigned width);
    logic [MAX_LFSR_W-1:0] m;
    m = '0;
    case (width)
      2:  m = 32'h0000_0003;                              // x^2+x+1
      3:  m = 32'h0000_0006;                              // x^3+x^2+1
      4:  m = 32'h0000_000C;                              // x^4+x^3+1
      5:  m = 32'h0000_0014;                              // x^5+x^3+1
      6:  m = 32'h0000_0030;                              // x^6+x^5+1
      7:  m = 32'h0000_0060;                              // x^7+x^6+1
      8:  m = 32'h0000_00B8;                              // x^8+x^6+x^5+x^4+1
      9:  m = 32'h0000_0110;                              // x^9+x^5+1
      10: m = 32'h0000_0240;                              // x^10+x^7+1
      11: m = 32'h0000_0500;                              // x^11+x^9+1
      12: m = 32'h0000_0829;                              // x^12+x^6+x^4+x+1
      16: m = 32'h0000_D008;                              // x^16+x^15+x^13+x^4+1
      24: m = 32'h00E1_0000;                              // x^24+x^23+x^22+x^17+1
      32: m = 32'h8020_0003;                              // x^32+x^22+x^2+x+1
      default: m = '0;                                    // unsupported width
    endcase
    return m;
  endfunction

  // True when lfsr_taps() knows the width.
  function automatic bit lfsr_width_ok(input int unsigned width);
    return lfsr_taps(width) != '0;
  endfunction

endpackage
