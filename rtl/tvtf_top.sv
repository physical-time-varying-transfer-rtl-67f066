// tvtf_top: digital controller of the time-varying transfer function (TVTF)
// switched-capacitor power side-channel countermeasure.
//
// The crypto core is never supplied from VDD directly. It draws its current
// from one of N_CAPS distributed capacitors, and a different, randomly
// chosen capacitor recharges from VDD in each of the N_CAPS phases of a
// crypto clock cycle. The charge the core took in one phase is therefore
// paid back to the supply at a random later time, which scrambles the
// supply-current trace in time. This module holds everything of that scheme
// that is logic: two copies of the two-level stochastic PRNG (copy 0 chooses
// the capacitor to charge, copy 1 the capacitor that supplies the core) and
// the shuffling logic that turns the choices into the 2*N_CAPS switch
// enables. The capacitors, the power switches and the core are outside.
//
// Interface:
//   clk          phase clock, N_CAPS times the crypto clock (1.25 GHz for a
//                125 MHz core and 10 phases)
//   rst_n        resets the shuffling logic only; the LFSRs keep their state
//   enc_active   high while the core runs an encryption
//   seed_we      loads seed_main[k] / seed_sel[k] into PRNG copy k
//   sw[9:0]      charging switches, capacitor i to VDD
//   sw[19:10]    discharging switches, capacitor i to the core
//   running      the core is being supplied through the shuffled capacitors
// Timing: see shuffle_ctrl; the PRNGs advance once per running phase.
//
// The block structure and the numbers (10 capacitors, 8-bit and 4-bit LFSRs,
// two PRNG copies) follow the published design; which PRNG copy serves which
// array, the seed port layout and the reset scheme are this implementation's
// choices.
module tvtf_top
#(
  parameter int unsigned N_CAPS           = tvtf_pkg::DEF_N_CAPS,
  parameter int unsigned MAIN_W           = tvtf_pkg::DEF_MAIN_W,
  parameter int unsigned SEL_W            = tvtf_pkg::DEF_SEL_W,
  parameter int unsigned RND_W            = tvtf_pkg::DEF_RND_W,
  parameter int unsigned PRECHARGE_PHASES = 10
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                enc_active,
  input  logic                seed_we,
  input  logic [MAIN_W-1:0]   seed_main [2],
  input  logic [SEL_W-1:0]    seed_sel  [2],
  output logic [2*N_CAPS-1:0] sw,
  output logic                running
);

  logic [RND_W-1:0] rnd [2];
  logic             prng_step;

  for (genvar k = 0; k < 2; k++) begin : g_prng
    stochastic_prng #(
      .MAIN_W(MAIN_W), .SEL_W(SEL_W), .RND_W(RND_W)
    ) u_prng (
      .clk,
      .step      (prng_step),
      .seed_we,
      .seed_main (seed_main[k]),
      .seed_sel  (seed_sel[k]),
      .rnd       (rnd[k])
    );
  end

  shuffle_ctrl #(
    .N_CAPS(N_CAPS), .RND_W(RND_W), .PRECHARGE_PHASES(PRECHARGE_PHASES)
  ) u_ctrl (
    .clk,
    .rst_n,
    .enc_active,
    .rnd_chg   (rnd[0]),
    .rnd_aes   (rnd[1]),
    .sw,
    .prng_step,
    .running
  );

endmodule
