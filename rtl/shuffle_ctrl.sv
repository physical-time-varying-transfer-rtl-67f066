// shuffle_ctrl: capacitor shuffling logic (the "digital logic" that runs the
// obfuscation algorithm of the TVTF countermeasure).
//
// N_CAPS capacitors are kept in two arrays: to_be_charged and to_supply_aes.
// After a precharge of all capacitors, in every phase (one phase-clock cycle)
// the block picks one capacitor from each array with the two random numbers,
// closes that capacitor's charging switch (to VDD) and the other one's
// discharging switch (to the crypto core) for the whole phase, and swaps the
// two capacitors between the arrays. A capacitor that has just supplied the
// core therefore always recharges before it can supply the core again, and
// the two chosen capacitors are different by construction, so the core is
// never connected to VDD through a capacitor.
//
// Interface:
//   sw[i]          closes the switch from VDD to capacitor i        (sw[9:0])
//   sw[N_CAPS+i]   closes the switch from capacitor i to the core   (sw[19:10])
//   enc_active     level, high while an encryption runs
//   rnd_chg/rnd_aes random numbers; array position = rnd mod (N_CAPS/2)
//   prng_step      high on every edge that consumes the random numbers
//   running        high while the core is supplied by the shuffled capacitors
// Timing: all outputs are registered on the phase clock. enc_active rising
// starts PRECHARGE_PHASES phases with every charging switch closed and the
// core disconnected; the next edge makes the first choice and raises
// running; from then on every edge makes one new choice. enc_active low
// opens all switches on the next edge.
//
// What follows the published design: n = 10 capacitors/phases, one capacitor
// each for charging and for supplying the core per phase, the two arrays and
// the swap after every phase, and the switch numbering sw[9:0] / sw[19:10].
// This implementation's choices: equal array halves with C1..C5 starting in
// to_supply_aes, position = rnd mod (N_CAPS/2), active-high enables, the
// precharge length (one crypto clock cycle by default) and precharging at the
// start of every operation.
module shuffle_ctrl
#(
  parameter int unsigned N_CAPS           = tvtf_pkg::DEF_N_CAPS,
  parameter int unsigned RND_W            = tvtf_pkg::DEF_RND_W,
  parameter int unsigned PRECHARGE_PHASES = 10
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  enc_active,
  input  logic [RND_W-1:0]      rnd_chg,
  input  logic [RND_W-1:0]      rnd_aes,
  output logic [2*N_CAPS-1:0]   sw,
  output logic                  prng_step,
  output logic                  running
);

  localparam int unsigned HALF  = N_CAPS / 2;
  localparam int unsigned CAP_W = $clog2(N_CAPS);
  localparam int unsigned POS_W = (HALF > 1) ? $clog2(HALF) : 1;
  localparam int unsigned PRE_W = (PRECHARGE_PHASES > 1) ? $clog2(PRECHARGE_PHASES) : 1;

  typedef enum logic [1:0] {IDLE, PRECHARGE, RUN} state_e;
  typedef logic [CAP_W-1:0] cap_idx_t;

  state_e          state;
  cap_idx_t        to_be_charged [HALF];
  cap_idx_t        to_supply_aes [HALF];
  logic [PRE_W-1:0] pre_cnt;

  logic            pick;
  logic [POS_W-1:0] pos_chg, pos_aes;
  cap_idx_t        cap_chg, cap_aes;

  // Position inside each array chosen by the random numbers
  assign pos_chg = POS_W'(rnd_chg % RND_W'(HALF));
  assign pos_aes = POS_W'(rnd_aes % RND_W'(HALF));
  assign cap_chg = to_be_charged[pos_chg];
  assign cap_aes = to_supply_aes[pos_aes];

  assign pick = enc_active &&
                ((state == RUN) || (state == PRECHARGE && pre_cnt == '0));
  assign prng_step = pick;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= IDLE;
      sw      <= '0;
      running <= 1'b0;
      pre_cnt <= '0;
      for (int i = 0; i < HALF; i++) begin
        to_supply_aes[i] <= cap_idx_t'(i);
        to_be_charged[i] <= cap_idx_t'(HALF + i);
      end
    end else begin
      unique case (state)
        IDLE: begin
          sw      <= '0;
          running <= 1'b0;
          if (enc_active) begin
            // Precharge every capacitor, core disconnected
            state   <= PRECHARGE;
            sw      <= {{N_CAPS{1'b0}}, {N_CAPS{1'b1}}};
            pre_cnt <= PRE_W'(PRECHARGE_PHASES - 1);
            for (int i = 0; i < HALF; i++) begin
              to_supply_aes[i] <= cap_idx_t'(i);
              to_be_charged[i] <= cap_idx_t'(HALF + i);
            end
          end
        end
        PRECHARGE, RUN: begin
          if (!enc_active) begin
            state   <= IDLE;
            sw      <= '0;
            running <= 1'b0;
          end else if (pick) begin
            // One capacitor to VDD, another to the core, then swap arrays
            state   <= RUN;
            running <= 1'b1;
            sw      <= '0;
            sw[int'(cap_chg)]          <= 1'b1;
            sw[N_CAPS + int'(cap_aes)] <= 1'b1;
            to_be_charged[pos_chg] <= cap_aes;
            to_supply_aes[pos_aes] <= cap_chg;
          end else begin
            pre_cnt <= pre_cnt - 1'b1;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  // A capacitor must never be connected to VDD and to the core at once
  assert property (@(posedge clk) disable iff (!rst_n)
                   (sw[N_CAPS-1:0] & sw[2*N_CAPS-1:N_CAPS]) == '0)
    else $error("shuffle_ctrl: capacitor connected to VDD and core together");

  // While running exactly one capacitor charges and exactly one supplies the core
  assert property (@(posedge clk) disable iff (!rst_n)
                   running |-> ($countones(sw[N_CAPS-1:0]) == 1 &&
                                $countones(sw[2*N_CAPS-1:N_CAPS]) == 1))
    else $error("shuffle_ctrl: not exactly one charging and one supplying capacitor");

  initial begin
    assert (N_CAPS >= 2 && N_CAPS % 2 == 0 && PRECHARGE_PHASES >= 1)
      else $error("shuffle_ctrl: N_CAPS must be even and >= 2");
    assert ((1 << RND_W) >= HALF)
      else $error("shuffle_ctrl: RND_W too small to address an array");
  end

endmodule
