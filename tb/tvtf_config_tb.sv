// tvtf_config_tb: runs tvtf_top in the other configurations the
// countermeasure was evaluated in, each through tvtf_config_run:
//   - 4, 6 and 8 capacitors/phases, and 20 capacitors (two crypto clock
//     cycles covered by one shuffle);
//   - 10 unequal capacitors between 16 and 24 pF with 200 pF in total;
//   - main LFSRs of 16 and 32 bits (longer PRNG period).
// All configurations run in parallel on one 1.25 GHz phase clock.
`timescale 1ns/1ps
module tvtf_config_tb;

  localparam int NC = 7;
  logic clk = 1'b0;
  always #0.4 clk = ~clk;

  int   ck [NC];
  int   fl [NC];
  logic dn [NC];

  localparam real UNEVEN [10] = '{16.0, 24.0, 18.0, 22.0, 20.0, 20.0, 17.0, 23.0, 19.0, 21.0};

  tvtf_config_run #(.N(4),  .NAME("n=4"))        r0 (.clk, .checks(ck[0]), .failures(fl[0]), .done(dn[0]));
  tvtf_config_run #(.N(6),  .NAME("n=6"))        r1 (.clk, .checks(ck[1]), .failures(fl[1]), .done(dn[1]));
  tvtf_config_run #(.N(8),  .NAME("n=8"))        r2 (.clk, .checks(ck[2]), .failures(fl[2]), .done(dn[2]));
  tvtf_config_run #(.N(20), .NAME("n=20"))       r3 (.clk, .checks(ck[3]), .failures(fl[3]), .done(dn[3]));
  tvtf_config_run #(.N(10), .C_PF(UNEVEN), .NAME("uneven 16-24pF"))
                                                 r4 (.clk, .checks(ck[4]), .failures(fl[4]), .done(dn[4]));
  tvtf_config_run #(.MAIN_W(16), .NAME("period 2^16-1"))
                                                 r5 (.clk, .checks(ck[5]), .failures(fl[5]), .done(dn[5]));
  tvtf_config_run #(.MAIN_W(32), .NAME("period 2^32-1"))
                                                 r6 (.clk, .checks(ck[6]), .failures(fl[6]), .done(dn[6]));

  int checks, failures;

  initial begin : watchdog
    #200000;
    checks = 0; failures = 1;
    foreach (ck[i]) begin checks += ck[i]; failures += fl[i]; end
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real s;
    s = 0.0;
    foreach (UNEVEN[i]) s += UNEVEN[i];
    #1;
    wait (dn[0] && dn[1] && dn[2] && dn[3] && dn[4] && dn[5] && dn[6]);
    checks = 1; failures = (s > 199.9 && s < 200.1) ? 0 : 1;
    foreach (ck[i]) begin checks += ck[i]; failures += fl[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
