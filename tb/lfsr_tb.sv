// lfsr_tb: self-checking testbench for lfsr.
//
// Four instances (WIDTH 8, 4, 3 and 16) run side by side. Every step is
// compared with a reference next-state written out from the feedback
// polynomials, the period of each instance is measured and compared with
// 2^WIDTH-1, and seed loading, holding while step=0 and leaving the
// all-zero state are checked.
`timescale 1ns/1ps
module lfsr_tb;

  logic clk = 1'b0;
  logic step, seed_we;
  logic [7:0]  seed8,  q8;
  logic [3:0]  seed4,  q4;
  logic [2:0]  seed3,  q3;
  logic [15:0] seed16, q16;

  int checks = 0, failures = 0;

  always #1 clk = ~clk;

  lfsr                 dut8  (.clk, .step, .seed_we, .seed(seed8),  .state(q8));
  lfsr #(.WIDTH(4))    dut4  (.clk, .step, .seed_we, .seed(seed4),  .state(q4));
  lfsr #(.WIDTH(3))    dut3  (.clk, .step, .seed_we, .seed(seed3),  .state(q3));
  lfsr #(.WIDTH(16))   dut16 (.clk, .step, .seed_we, .seed(seed16), .state(q16));

  // Reference next states from the polynomials
  function automatic logic [7:0] nx8(logic [7:0] q);    // x^8+x^6+x^5+x^4+1
    return {q[6:0], q[7] ^ q[5] ^ q[4] ^ q[3]};
  endfunction
  function automatic logic [3:0] nx4(logic [3:0] q);    // x^4+x^3+1
    return {q[2:0], q[3] ^ q[2]};
  endfunction
  function automatic logic [2:0] nx3(logic [2:0] q);    // x^3+x^2+1
    return {q[1:0], q[2] ^ q[1]};
  endfunction
  function automatic logic [15:0] nx16(logic [15:0] q); // x^16+x^15+x^13+x^4+1
    return {q[14:0], q[15] ^ q[14] ^ q[12] ^ q[3]};
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] e8; logic [3:0] e4; logic [2:0] e3; logic [15:0] e16;
    int p8, p4, p3, p16, n;
    bit mism;

    // Seed load
    step = 1'b0; seed_we = 1'b1;
    seed8 = 8'hA5; seed4 = 4'h9; seed3 = 3'h5; seed16 = 16'hACE1;
    @(posedge clk); #0.1;
    seed_we = 1'b0;
    check(q8 == 8'hA5 && q4 == 4'h9 && q3 == 3'h5 && q16 == 16'hACE1, "seed load");

    // Hold while step is low
    repeat (5) @(posedge clk); #0.1;
    check(q8 == 8'hA5 && q4 == 4'h9 && q3 == 3'h5 && q16 == 16'hACE1, "hold with step=0");

    // Step and compare with the reference; measure the periods
    step = 1'b1;
    p8 = 0; p4 = 0; p3 = 0; p16 = 0; n = 0; mism = 0;
    e8 = q8; e4 = q4; e3 = q3; e16 = q16;
    while (n < 65535) begin
      @(posedge clk); #0.1;
      n++;
      e8 = nx8(e8); e4 = nx4(e4); e3 = nx3(e3); e16 = nx16(e16);
      if (q8 != e8 || q4 != e4 || q3 != e3 || q16 != e16) begin
        if (!mism) $display("FAIL detail: step %0d q8=%h/%h q4=%h/%h", n, q8, e8, q4, e4);
        mism = 1;
      end
      if (p8  == 0 && q8  == 8'hA5)    p8  = n;
      if (p4  == 0 && q4  == 4'h9)     p4  = n;
      if (p3  == 0 && q3  == 3'h5)     p3  = n;
      if (p16 == 0 && q16 == 16'hACE1) p16 = n;
      if (n <= 300) check(q8 != 0 && q4 != 0 && q3 != 0, "never all-zero");
    end
    check(!mism, "every step matches the reference polynomial");
    check(p8  == 255,   $sformatf("8-bit period %0d, expected 255", p8));
    check(p4  == 15,    $sformatf("4-bit period %0d, expected 15", p4));
    check(p3  == 7,     $sformatf("3-bit period %0d, expected 7", p3));
    check(p16 == 65535, $sformatf("16-bit period %0d, expected 65535", p16));

    // Reload mid-run
    step = 1'b1; seed_we = 1'b1; seed8 = 8'h01;
    @(posedge clk); #0.1;
    seed_we = 1'b0;
    check(q8 == 8'h01, "seed load wins over step");
    @(posedge clk); #0.1;
    check(q8 == nx8(8'h01), "first step after reload");

    // All-zero seed leaves lock-up
    step = 1'b1; seed_we = 1'b1; seed8 = 8'h00;
    @(posedge clk); #0.1;
    seed_we = 1'b0;
    check(q8 == 8'h00, "zero seed loaded");
    @(posedge clk); #0.1;
    check(q8 == 8'h01, "all-zero state escapes to 1");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
