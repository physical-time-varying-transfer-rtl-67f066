// stochastic_prng_tb: self-checking testbench for stochastic_prng.
//
// A behavioural reference keeps its own 8-bit and 4-bit LFSR states (same
// polynomials, written out bit by bit) and forms b_i = s_i ? r[2i+1] : r[2i].
// The DUT output is compared with it after every step for several seeds; the
// output period (255 phases for 8-bit/4-bit, no shorter one) and the use of all 16 output
// values are checked, as are holding while step=0 and the seed load.
`timescale 1ns/1ps
module stochastic_prng_tb;

  logic       clk = 1'b0;
  logic       step, seed_we;
  logic [7:0] seed_main;
  logic [3:0] seed_sel;
  logic [3:0] rnd;

  int checks = 0, failures = 0;

  always #1 clk = ~clk;

  stochastic_prng dut (.clk, .step, .seed_we, .seed_main, .seed_sel, .rnd);

  logic [7:0] rm;
  logic [3:0] rs;

  function automatic logic [3:0] ref_out(logic [7:0] r, logic [3:0] s);
    logic [3:0] b;
    for (int i = 0; i < 4; i++) b[i] = s[i] ? r[2*i+1] : r[2*i];
    return b;
  endfunction

  task automatic ref_step();
    rm = {rm[6:0], rm[7] ^ rm[5] ^ rm[4] ^ rm[3]};
    rs = {rs[2:0], rs[3] ^ rs[2]};
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] sm [4] = '{8'h01, 8'hA5, 8'h3C, 8'hFF};
    logic [3:0] ss [4] = '{4'h1, 4'h9, 4'h6, 4'hF};
    int mism, rep;
    bit [15:0] seen;
    logic [3:0] seq [510];
    int divs [7] = '{1, 3, 5, 15, 17, 51, 85};
    logic [3:0] held;

    step = 1'b0; seed_we = 1'b0; seed_main = '0; seed_sel = '0;
    for (int k = 0; k < 4; k++) begin
      seed_main = sm[k]; seed_sel = ss[k]; seed_we = 1'b1; step = 1'b0;
      @(posedge clk); #0.1;
      seed_we = 1'b0;
      rm = sm[k]; rs = ss[k];
      check(rnd == ref_out(rm, rs), $sformatf("seed %0d: output after seed load", k));

      // Hold
      held = rnd;
      repeat (3) @(posedge clk); #0.1;
      check(rnd == held, "output holds while step=0");

      // Run 2 periods
      step = 1'b1; mism = 0; seen = '0;
      for (int n = 1; n <= 510; n++) begin
        @(posedge clk); #0.1;
        ref_step();
        if (rnd != ref_out(rm, rs)) mism++;
        seen[rnd] = 1'b1;
        seq[n-1] = rnd;
      end
      step = 1'b0;
      check(mism == 0, $sformatf("seed %0d: %0d outputs differ from the reference", k, mism));
      // Output sequence repeats after 255 steps and after no proper divisor
      rep = 0;
      for (int n = 0; n < 255; n++) if (seq[n] != seq[n+255]) rep++;
      check(rep == 0, $sformatf("seed %0d: output does not repeat after 255 steps", k));
      foreach (divs[d]) begin
        rep = 0;
        for (int n = 0; n < 255; n++) if (seq[n] != seq[n+divs[d]]) rep++;
        check(rep != 0, $sformatf("seed %0d: output repeats after %0d steps", k, divs[d]));
      end
      check(seen == 16'hFFFF, $sformatf("seed %0d: not all 16 values produced (%h)", k, seen));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
