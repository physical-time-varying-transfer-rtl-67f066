// tvtf_pkg_tb: checks the tap table of tvtf_pkg. For every width up to 16
// that the table lists, a Fibonacci LFSR is stepped in software with the
// returned mask and its period must be exactly 2^width-1 (maximal length).
// Widths 24 and 32 are checked for a non-zero mask with the top bit set, and
// unsupported widths must report as such. Also checks the default sizes.
`timescale 1ns/1ps
module tvtf_pkg_tb;
  import tvtf_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #1 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint period_of(int unsigned w);
    logic [MAX_LFSR_W-1:0] t, q, mask;
    longint n;
    t = lfsr_taps(w);
    mask = (w == MAX_LFSR_W) ? '1 : ((MAX_LFSR_W'(1) << w) - 1);
    q = 1; n = 0;
    do begin
      q = ((q << 1) | MAX_LFSR_W'(^(q & t))) & mask;
      n++;
    end while (q != 1 && n < (64'd1 << w) + 2);
    return n;
  endfunction

  initial begin
    int unsigned widths [12] = '{2, 3, 4, 5, 6, 7, 8, 9, 10, 11, 12, 16};
    check(DEF_N_CAPS == 10 && DEF_MAIN_W == 8 && DEF_SEL_W == 4 && DEF_RND_W == 4,
          "default sizes 10 / 8 / 4 / 4");
    foreach (widths[i]) begin
      longint p;
      p = period_of(widths[i]);
      check(lfsr_width_ok(widths[i]), $sformatf("width %0d listed", widths[i]));
      check(p == (64'd1 << widths[i]) - 1,
            $sformatf("width %0d: period %0d, expected %0d", widths[i], p, (64'd1 << widths[i]) - 1));
    end
    check(lfsr_taps(24)[23] && lfsr_taps(32)[31], "24/32-bit masks include the top term");
    check(!lfsr_width_ok(13) && !lfsr_width_ok(1) && !lfsr_width_ok(40), "unsupported widths rejected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
