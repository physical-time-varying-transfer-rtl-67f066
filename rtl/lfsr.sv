// lfsr: maximal-length Fibonacci linear feedback shift register.
//
// Used twice in each PRNG of the TVTF controller: WIDTH=8 as the main random
// source r[7:0] and WIDTH=4 for the sub-sampling selects s[3:0]. On each
// rising clk edge with step=1 the register shifts one place toward the MSB and
// the XOR of the tapped bits (tvtf_pkg::lfsr_taps) enters bit 0, giving a
// period of 2^WIDTH-1.
//
// Interface and timing: seed_we=1 loads 'seed' on the next edge (it wins over
// step); state is the registered value. There is deliberately no reset: the
// seed is programmed once and afterwards the register only advances, so the
// value reached at the end of one operation is the starting point of the
// next one instead of returning to the seed. That behaviour follows the
// published design. The tap polynomials and the escape from the all-zero
// lock-up state (loading 1, reachable only by a zero seed or at power-up)
// are this implementation's choices.
module lfsr
  import tvtf_pkg::lfsr_taps, tvtf_pkg::lfsr_width_ok, tvtf_pkg::MAX_LFSR_W;
#(
  parameter int unsigned WIDTH = 8
) (
  input  logic             clk,
  input  logic             step,
  input  logic             seed_we,
  input  logic [WIDTH-1:0] seed,
  output logic [WIDTH-1:0] state
);

  localparam logic [MAX_LFSR_W-1:0] TAPS_ALL = lfsr_taps(WIDTH);
  localparam logic [WIDTH-1:0]      TAPS     = TAPS_ALL[WIDTH-1:0];

  logic [WIDTH-1:0] q;
  logic             fb;

  assign fb = ^(q & TAPS);

  always_ff @(posedge clk) begin
    if (seed_we)
      q <= seed;
    else if (q == '0)
      q <= WIDTH'(1);
    else if (step)
      q <= {q[WIDTH-2:0], fb};
  end

  assign state = q;

  initial begin
    assert (WIDTH >= 2 && WIDTH <= MAX_LFSR_W && lfsr_width_ok(WIDTH))
      else $error("lfsr: no tap table entry for WIDTH=%0d", WIDTH);
  end

endmodule
