// sc_array_model: behavioural model (not synthesizable) of the analog part
// of the TVTF countermeasure: N capacitors, each with one power switch to
// VDD and one to the crypto core's supply rail, and the supply itself.
//
// The model works phase by phase. On every rising edge of phase_clk it
// settles the phase that has just ended, using the switch enables that were
// held during it:
//   - a capacitor switched to VDD charges through the switch resistance R:
//       V <- VDD - (VDD - V) * exp(-T/(R*C))
//     and the charge it takes, C * dV, is counted as supply charge;
//   - a capacitor switched to the core delivers the core current i_core for
//     the whole phase: V <- V - i_core * T / C.
// v_core is the voltage of the capacitor that supplied the core in the phase
// just settled, and i_supply the average supply current of that phase.
// Values: VDD, R = 10 ohm, C = 20 pF each (or any per-capacitor list), phase
// time T in ns. Ports are reals; this is a testbench part only.
`timescale 1ns/1ps
module sc_array_model #(
  parameter int  N      = 10,
  parameter real VDD    = 1.2,
  parameter real R_OHM  = 10.0,
  parameter real T_NS   = 0.8,
  parameter real C_PF [N] = '{default: 20.0}
) (
  input  logic         phase_clk,
  input  logic [2*N-1:0] sw,
  input  real          i_core,      // A, current the core draws this phase
  output real          v_core,      // V, rail voltage seen by the core
  output real          i_supply,    // A, average supply current of the phase
  output real          q_deficit    // C, charge missing on all capacitors
);

  real v [N];

  initial begin
    for (int i = 0; i < N; i++) v[i] = 0.0;
    v_core = 0.0; i_supply = 0.0; q_deficit = 0.0;
  end

  always @(posedge phase_clk) begin
    real q_sup, vc, c_f, t_s, dv;
    q_sup = 0.0; vc = 0.0; t_s = T_NS * 1.0e-9;
    for (int i = 0; i < N; i++) begin
      c_f = C_PF[i] * 1.0e-12;
      if (sw[i]) begin
        dv = (VDD - v[i]) * (1.0 - $exp(-t_s / (R_OHM * c_f)));
        v[i] += dv;
        q_sup += c_f * dv;
      end
      if (sw[N+i]) begin
        v[i] -= i_core * t_s / c_f;
        vc = v[i];
      end
    end
    v_core   <= vc;
    i_supply <= q_sup / t_s;
    q_deficit <= 0.0;
    begin
      real d;
      d = 0.0;
      for (int i = 0; i < N; i++) d += C_PF[i] * 1.0e-12 * (VDD - v[i]);
      q_deficit <= d;
    end
  end

endmodule
