// tvtf_top_tb: end-to-end testbench of the TVTF controller at its default
// size (10 capacitors, 8-bit/4-bit LFSRs, two PRNG copies).
//
// tvtf_top drives sc_array_model, a behavioural model of the 10 x 20 pF
// capacitors, the 10 ohm power switches and the supply. A synthetic crypto
// core draws a random current of 0..2 mA per phase (about 1 mA average) at a
// phase clock of 1.25 GHz (10 phases of a 125 MHz core clock). The test
//   - programs the seeds once, then runs several operations; every
//     operation precharges and then runs NPH shuffled phases;
//   - compares every switch pattern with a reference model of the two PRNGs
//     and the two-array shuffle, started from the programmed seeds;
//   - checks in every running phase that exactly one capacitor charges and
//     one supplies the core, that they differ, and that the core rail stays
//     within 100 mV of VDD (no performance loss);
//   - checks charge conservation: supply charge = core charge minus the
//     charge still missing on the capacitors at the end;
//   - replays the same core-current trace in a second operation after a
//     reset pulse and checks that the switch sequence and the supply-current
//     trace differ, i.e. the LFSRs kept running instead of restarting from
//     the seed;
//   - checks that the supply current is poorly correlated with the core
//     current at any lag 0..19 phases (it would be 1.0 at lag 0 without the
//     countermeasure);
//   - counts the mechanisms (precharge, shuffled phases, immediate reuse of a
//     just-charged capacitor, state kept across reset, abort in precharge)
//     and fails any that never happened.
`timescale 1ns/1ps
module tvtf_top_tb;

  localparam int  N    = 10;
  localparam int  NPH  = 2000;        // running phases per operation
  localparam real VDD  = 1.2;
  localparam real TPH  = 0.8;         // ns per phase
  localparam int  NLAG = 20;

  logic           clk = 1'b0;
  logic           rst_n, enc_active, seed_we;
  logic [7:0]     seed_main [2];
  logic [3:0]     seed_sel  [2];
  logic [2*N-1:0] sw;
  logic           running;
  real            i_core, v_core, i_supply, q_deficit;

  int checks = 0, failures = 0;
  int n_precharge = 0, n_run_phases = 0, n_reuse = 0, n_kept = 0, n_abort = 0;

  always #(TPH / 2.0) clk = ~clk;

  tvtf_top dut (
    .clk, .rst_n, .enc_active, .seed_we, .seed_main, .seed_sel, .sw, .running
  );

  sc_array_model #(.N(N), .VDD(VDD), .T_NS(TPH)) u_caps (
    .phase_clk(clk), .sw, .i_core, .v_core, .i_supply, .q_deficit
  );

  real            cur   [NPH];
  real            isup  [2][NPH];
  logic [2*N-1:0] swlog [2][NPH];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  initial begin : watchdog
    #(TPH * 40000);
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference model of the whole controller: two PRNG copies (8-bit LFSR
  // x^8+x^6+x^5+x^4+1, 4-bit LFSR x^4+x^3+1, b_i = s_i ? r[2i+1] : r[2i])
  // and the two-array shuffle, copy 0 for charging, copy 1 for the core.
  logic [7:0] m_r [2];
  logic [3:0] m_s [2];
  int         m_chg [N/2];
  int         m_aes [N/2];

  function automatic void model_precharge();
    for (int i = 0; i < N/2; i++) begin m_aes[i] = i; m_chg[i] = N/2 + i; end
  endfunction

  function automatic logic [2*N-1:0] model_pick();
    logic [3:0] b [2];
    logic [2*N-1:0] v;
    int pc, pa, cc, ca;
    for (int k = 0; k < 2; k++) begin
      for (int i = 0; i < 4; i++) b[k][i] = m_s[k][i] ? m_r[k][2*i+1] : m_r[k][2*i];
      m_r[k] = {m_r[k][6:0], m_r[k][7] ^ m_r[k][5] ^ m_r[k][4] ^ m_r[k][3]};
      m_s[k] = {m_s[k][2:0], m_s[k][3] ^ m_s[k][2]};
    end
    pc = int'(b[0]) % (N/2); pa = int'(b[1]) % (N/2);
    cc = m_chg[pc]; ca = m_aes[pa];
    m_chg[pc] = ca; m_aes[pa] = cc;
    v = '0; v[cc] = 1'b1; v[N + ca] = 1'b1;
    return v;
  endfunction

  function automatic int onehot_idx(logic [N-1:0] v);
    int k;
    k = -1;
    for (int i = 0; i < N; i++) if (v[i]) k = i;
    return k;
  endfunction

  // One operation: precharge, NPH shuffled phases with the stored current
  // trace, then enc_active low. slot < 0 means do not log.
  task automatic operation(input int slot);
    real d0, d1, qcore, qsup, vmin;
    int  prev_chg, pre;
    @(negedge clk);
    enc_active = 1'b1; i_core = 0.0;
    pre = 0;
    @(posedge clk); #0.1;
    while (!running) begin
      check(sw == {{N{1'b0}}, {N{1'b1}}}, "precharge pattern: all to VDD, core off");
      pre++;
      @(posedge clk); #0.1;
    end
    check(pre == 10, $sformatf("precharge took %0d phases", pre));
    model_precharge();
    n_precharge++;
    d0 = q_deficit;
    qcore = 0.0; qsup = 0.0; vmin = VDD; prev_chg = -1;
    for (int p = 0; p < NPH; p++) begin
      int c, a;
      i_core = cur[p];
      c = onehot_idx(sw[N-1:0]); a = onehot_idx(sw[2*N-1:N]);
      check(running && $countones(sw[N-1:0]) == 1 && $countones(sw[2*N-1:N]) == 1 && c != a,
            "one charging and one different supplying capacitor");
      begin
        logic [2*N-1:0] e;
        e = model_pick();
        check(sw == e, $sformatf("phase %0d: sw=%h, reference %h", p, sw, e));
      end
      if (a == prev_chg) n_reuse++;
      prev_chg = c;
      if (slot >= 0) swlog[slot][p] = sw;
      @(posedge clk); #0.1;
      n_run_phases++;
      qcore += cur[p] * TPH * 1.0e-9;
      qsup  += i_supply * TPH * 1.0e-9;
      if (slot >= 0) isup[slot][p] = i_supply;
      if (v_core < vmin) vmin = v_core;
    end
    d1 = q_deficit;
    // The edge that closed the last logged phase already made one more choice
    void'(model_pick());
    check(vmin > VDD - 0.1, $sformatf("core rail drooped to %f V", vmin));
    check((qsup - (qcore - (d1 - d0))) < 1e-3 * qcore &&
          (qsup - (qcore - (d1 - d0))) > -1e-3 * qcore,
          $sformatf("charge conservation qsup=%e qcore=%e dD=%e", qsup, qcore, d1 - d0));
    @(negedge clk);
    enc_active = 1'b0; i_core = 0.0;
    @(posedge clk); #0.1;
    check(sw == '0 && !running, "all switches open after the operation");
  endtask

  function automatic real corr(int slot, int lag);
    real sx, sy, sxx, syy, sxy, n, x, y;
    sx = 0; sy = 0; sxx = 0; syy = 0; sxy = 0; n = 0;
    for (int p = 0; p + lag < NPH; p++) begin
      x = cur[p]; y = isup[slot][p + lag];
      sx += x; sy += y; sxx += x * x; syy += y * y; sxy += x * y; n += 1;
    end
    return (n * sxy - sx * sy) / $sqrt((n * sxx - sx * sx) * (n * syy - sy * sy));
  endfunction

  initial begin
    int ndiff_sw;
    real ddiff, rmax, r;
    for (int p = 0; p < NPH; p++) cur[p] = 2.0e-3 * real'($urandom_range(1000)) / 1000.0;
    rst_n = 1'b0; enc_active = 1'b0; seed_we = 1'b0; i_core = 0.0;
    seed_main = '{8'hA5, 8'h3C}; seed_sel = '{4'h9, 4'h6};
    // One-time seed programming
    m_r = seed_main; m_s = seed_sel;
    @(negedge clk); seed_we = 1'b1;
    @(negedge clk); seed_we = 1'b0;
    @(negedge clk); rst_n = 1'b1;
    repeat (2) @(posedge clk); #0.1;
    check(sw == '0 && !running, "idle after reset");

    operation(0);
    // Reset pulse between operations: must not restart the LFSRs
    @(negedge clk); rst_n = 1'b0;
    @(negedge clk); rst_n = 1'b1;
    operation(1);

    ndiff_sw = 0; ddiff = 0.0;
    for (int p = 0; p < NPH; p++) begin
      if (swlog[0][p] != swlog[1][p]) ndiff_sw++;
      ddiff += (isup[0][p] > isup[1][p]) ? isup[0][p] - isup[1][p] : isup[1][p] - isup[0][p];
    end
    check(ndiff_sw > NPH / 2, $sformatf("only %0d of %0d phases switch differently on replay", ndiff_sw, NPH));
    check(ddiff / NPH > 1.0e-4, "supply trace identical on replay");
    if (ndiff_sw > NPH / 2) n_kept++;

    rmax = 0.0;
    for (int lag = 0; lag < NLAG; lag++) begin
      r = corr(0, lag);
      if (r < 0) r = -r;
      if (r > rmax) rmax = r;
    end
    check(rmax < 0.5, $sformatf("supply/core current correlation %f", rmax));
    $display("tvtf_top_tb: max |corr(core, supply)| over lags 0..%0d = %f", NLAG - 1, rmax);

    // Abort during precharge
    @(negedge clk); enc_active = 1'b1;
    repeat (3) @(posedge clk);
    @(negedge clk); enc_active = 1'b0;
    @(posedge clk); #0.1;
    check(sw == '0 && !running, "abort in precharge opens all switches");
    n_abort++;

    operation(-1);

    check(n_precharge > 0,  "mechanism: precharge");
    check(n_run_phases > 0, "mechanism: shuffled phases");
    check(n_reuse > 0,      "mechanism: just-charged capacitor supplies the core next");
    check(n_kept > 0,       "mechanism: LFSR state kept across operations and reset");
    check(n_abort > 0,      "mechanism: abort during precharge");
    $display("tvtf_top_tb: precharges=%0d shuffled_phases=%0d immediate_reuse=%0d kept_state=%0d aborts=%0d",
             n_precharge, n_run_phases, n_reuse, n_kept, n_abort);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
