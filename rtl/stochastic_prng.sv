// stochastic_prng: two-level stochastic pseudo-random number generator.
//
// A main LFSR (MAIN_W = 8 bits, r[7:0]) and a select LFSR (SEL_W = 4 bits,
// s[3:0]) advance together. Output bit b_i comes from a 2:1 multiplexer fed
// with the pair r[2i+1], r[2i] and steered by s_i, so the select LFSR
// sub-samples the main one into an RND_W = 4 bit number. Because 15 divides
// 255 the combined sequence has period 2^8-1 = 255.
//
// Interface and timing: rnd is combinational from the two registers, i.e. it
// changes right after each clk edge on which step=1. seed_we loads both
// seeds; there is no reset (see lfsr).
//
// The structure (8-bit LFSR, 4-bit LFSR, four 2:1 muxes on pairs r7/r6 ..
// r1/r0, selects s3..s0) follows the published block diagram. The mux
// polarity (s_i=1 picks the odd bit r[2i+1]) is this implementation's choice.
// A main LFSR wider than 2*RND_W (the periodicity knob) only lengthens the
// period; its extra bits are not multiplexed.
module stochastic_prng
#(
  parameter int unsigned MAIN_W = tvtf_pkg::DEF_MAIN_W,
  parameter int unsigned SEL_W  = tvtf_pkg::DEF_SEL_W,
  parameter int unsigned RND_W  = tvtf_pkg::DEF_RND_W
) (
  input  logic              clk,
  input  logic              step,
  input  logic              seed_we,
  input  logic [MAIN_W-1:0] seed_main,
  input  logic [SEL_W-1:0]  seed_sel,
  output logic [RND_W-1:0]  rnd
);

  logic [MAIN_W-1:0] r;
  logic [SEL_W-1:0]  s;

  lfsr #(.WIDTH(MAIN_W)) u_main (
    .clk, .step, .seed_we, .seed(seed_main), .state(r)
  );

  lfsr #(.WIDTH(SEL_W)) u_sel (
    .clk, .step, .seed_we, .seed(seed_sel), .state(s)
  );

  // Bank of 2:1 multiplexers: b_i = s_i ? r[2i+1] : r[2i]
  always_comb begin
    for (int i = 0; i < RND_W; i++)
      rnd[i] = s[i] ? r[2*i+1] : r[2*i];
  end

  initial begin
    assert (MAIN_W >= 2*RND_W && SEL_W >= RND_W)
      else $error("stochastic_prng: need MAIN_W >= 2*RND_W and SEL_W >= RND_W");
  end

endmodule
