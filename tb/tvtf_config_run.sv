// tvtf_config_run: runs one configuration of tvtf_top against the
// capacitor-array model and reports its own check and failure counts.
//
// Used by tvtf_config_tb for the configurations the countermeasure was
// evaluated in besides the default one: 4, 6, 8 and 20 capacitors, unequal
// capacitors, and longer main LFSRs (periodicity). For each it programs
// seeds, precharges, runs NPH shuffled phases with a random core current of
// 0..1.9 mA, and checks: one charging and one different supplying capacitor
// per phase, a capacitor supplies the core only after a recharge, the core
// rail stays within 100 mV of VDD, every capacitor supplies the core at some
// point, and (for a main LFSR of 16 bits or more) that the random sequence
// no longer repeats after 255 phases, and for 16 bits that it repeats after
// 65535.
`timescale 1ns/1ps
module tvtf_config_run #(
  parameter int  N       = 10,
  parameter int  MAIN_W  = 8,
  parameter int  NPH     = 3000,
  parameter real C_PF [N] = '{default: 20.0},
  parameter string NAME  = "default"
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output logic done
);

  localparam real VDD = 1.2;

  logic              rst_n, enc_active, seed_we;
  logic [MAIN_W-1:0] seed_main [2];
  logic [3:0]        seed_sel  [2];
  logic [2*N-1:0]    sw;
  logic              running;
  real               i_core, v_core, i_supply, q_deficit;

  tvtf_top #(.N_CAPS(N), .MAIN_W(MAIN_W)) dut (
    .clk, .rst_n, .enc_active, .seed_we, .seed_main, .seed_sel, .sw, .running
  );

  sc_array_model #(.N(N), .VDD(VDD), .T_NS(0.8), .C_PF(C_PF)) u_caps (
    .phase_clk(clk), .sw, .i_core, .v_core, .i_supply, .q_deficit
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 5) $display("FAIL [%s] @%0t: %s", NAME, $time, what);
    end
  endtask

  localparam int NSEQ = (MAIN_W == 16) ? 66600 : 1300;
  logic [3:0] seq [NSEQ];

  initial begin
    bit charged [N];
    int used [N];
    int nrun, c, a, rep;
    real vmin;
    checks = 0; failures = 0; done = 1'b0;
    rst_n = 1'b0; enc_active = 1'b0; seed_we = 1'b0; i_core = 0.0;
    seed_main = '{MAIN_W'(8'hA5), MAIN_W'(8'h3C)};
    seed_sel  = '{4'h9, 4'h6};
    for (int i = 0; i < N; i++) begin charged[i] = 0; used[i] = 0; end
    @(negedge clk); seed_we = 1'b1;
    @(negedge clk); seed_we = 1'b0; rst_n = 1'b1;
    @(negedge clk); enc_active = 1'b1;
    @(posedge clk); #0.1;
    while (!running) begin
      for (int i = 0; i < N; i++) if (sw[i]) charged[i] = 1;
      @(posedge clk); #0.1;
    end
    vmin = VDD; nrun = 0;
    while (nrun < ((NSEQ > NPH) ? NSEQ : NPH)) begin
      if (nrun < NSEQ) seq[nrun] = dut.g_prng[0].u_prng.rnd;
      i_core = 1.9e-3 * real'($urandom_range(1000)) / 1000.0;
      c = -1; a = -1;
      for (int i = 0; i < N; i++) begin
        if (sw[i]) c = i;
        if (sw[N+i]) a = i;
      end
      if (nrun < NPH) begin
        check(running && $countones(sw[N-1:0]) == 1 && $countones(sw[2*N-1:N]) == 1 && c != a,
              "one charging and one different supplying capacitor");
        if (a >= 0) begin
          check(charged[a], "capacitor supplies the core without recharge");
          charged[a] = 0; used[a]++;
        end
        if (c >= 0) charged[c] = 1;
      end
      @(posedge clk); #0.1;
      if (nrun < NPH && v_core < vmin) vmin = v_core;
      nrun++;
    end
    check(vmin > VDD - 0.1, $sformatf("core rail drooped to %f V", vmin));
    for (int i = 0; i < N; i++) check(used[i] > 0, $sformatf("C%0d never used", i + 1));
    if (MAIN_W >= 16) begin
      rep = 0;
      for (int n = 0; n < 1000; n++) if (seq[n] != seq[n + 255]) rep++;
      check(rep > 0, "random sequence still repeats after 255 phases");
    end
    if (MAIN_W == 16) begin
      rep = 0;
      for (int n = 0; n < 1000; n++) if (seq[n] != seq[n + 65535]) rep++;
      check(rep == 0, "random sequence does not repeat after 65535 phases");
    end
    @(negedge clk); enc_active = 1'b0;
    @(posedge clk); #0.1;
    check(sw == '0, "switches open after the operation");
    $display("tvtf_config_run [%s]: N=%0d MAIN_W=%0d phases=%0d min rail %f V, checks=%0d failures=%0d",
             NAME, N, MAIN_W, nrun, vmin, checks, failures);
    done = 1'b1;
  end

endmodule
