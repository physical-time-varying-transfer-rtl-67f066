// shuffle_ctrl_tb: self-checking testbench for shuffle_ctrl.
//
// Random numbers come from $urandom. A reference model written from the
// shuffling algorithm (two arrays, pick rnd mod 5 in each, connect, swap)
// predicts every phase's switch pattern, which is compared with the DUT.
// Independently of the model it checks the physical rules: exactly one
// charging and one supplying capacitor per running phase, never the same
// one, a capacitor only supplies the core after it has been charged since
// its last use, the precharge lasts PRECHARGE_PHASES phases with the core
// disconnected, all switches open when enc_active falls (also during
// precharge), and prng_step is high exactly in the phases that choose.
`timescale 1ns/1ps
module shuffle_ctrl_tb;

  localparam int N   = 10;
  localparam int H   = N / 2;
  localparam int PRE = 10;

  logic           clk = 1'b0;
  logic           rst_n, enc_active;
  logic [3:0]     rnd_chg, rnd_aes;
  logic [2*N-1:0] sw;
  logic           prng_step, running;

  int checks = 0, failures = 0;

  always #1 clk = ~clk;

  shuffle_ctrl dut (.clk, .rst_n, .enc_active, .rnd_chg, .rnd_aes, .sw, .prng_step, .running);

  // Reference model state
  int  m_state;            // 0 idle, 1 precharge, 2 run
  int  m_cnt;
  int  m_chg [H];
  int  m_aes [H];
  logic [2*N-1:0] m_sw;
  bit  m_running;
  bit  charged [N];
  int  used_aes [N];
  int  run_phases, pre_runs, aborts, swaps_back;
  int  last_aes;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  function automatic void model_init_arrays();
    for (int i = 0; i < H; i++) begin m_aes[i] = i; m_chg[i] = H + i; end
  endfunction

  // Model of one phase-clock edge; returns whether this edge chooses
  function automatic bit model_edge(bit en, int rc, int ra);
    bit pick;
    pick = en && (m_state == 2 || (m_state == 1 && m_cnt == 0));
    if (m_state == 0) begin
      m_sw = '0; m_running = 0;
      if (en) begin
        m_state = 1; m_sw = {{N{1'b0}}, {N{1'b1}}}; m_cnt = PRE - 1; model_init_arrays();
      end
    end else if (!en) begin
      m_state = 0; m_sw = '0; m_running = 0;
    end else if (pick) begin
      int pc, pa, cc, ca;
      pc = rc % H; pa = ra % H; cc = m_chg[pc]; ca = m_aes[pa];
      m_state = 2; m_running = 1; m_sw = '0; m_sw[cc] = 1'b1; m_sw[N + ca] = 1'b1;
      m_chg[pc] = ca; m_aes[pa] = cc;
    end else begin
      m_cnt--;
    end
    return pick;
  endfunction

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One phase: drive at negedge, model at posedge, compare afterwards
  task automatic phase(input bit en);
    bit exp_pick;
    int pre_len;
    @(negedge clk);
    enc_active = en;
    rnd_chg = 4'($urandom); rnd_aes = 4'($urandom);
    #0.5;
    exp_pick = model_edge(en, int'(rnd_chg), int'(rnd_aes));
    check(prng_step == exp_pick, "prng_step");
    @(posedge clk); #0.1;
    check(sw == m_sw && running == m_running,
          $sformatf("switch pattern sw=%h expected %h", sw, m_sw));
    // Physical rules, independent of the model
    check((sw[N-1:0] & sw[2*N-1:N]) == '0, "capacitor on VDD and core at once");
    if (running) begin
      int ca, cc;
      check($countones(sw[N-1:0]) == 1 && $countones(sw[2*N-1:N]) == 1,
            "one charging and one supplying capacitor");
      ca = -1; cc = -1;
      for (int i = 0; i < N; i++) begin
        if (sw[N+i]) ca = i;
        if (sw[i])   cc = i;
      end
      if (ca >= 0) begin
        check(charged[ca], $sformatf("C%0d supplies the core without recharge", ca + 1));
        charged[ca] = 0; used_aes[ca]++;
        if (ca == last_aes) swaps_back++;
        last_aes = cc;      // a just-charged capacitor may supply next
      end
      if (cc >= 0) charged[cc] = 1;
      run_phases++;
    end else if (sw[N-1:0] == '1) begin
      check(sw[2*N-1:N] == '0, "core disconnected during precharge");
      for (int i = 0; i < N; i++) charged[i] = 1;
    end
  endtask

  initial begin
    int cnt;
    rst_n = 1'b0; enc_active = 1'b0; rnd_chg = '0; rnd_aes = '0;
    m_state = 0; m_cnt = 0; m_sw = '0; m_running = 0; model_init_arrays();
    for (int i = 0; i < N; i++) begin charged[i] = 0; used_aes[i] = 0; end
    run_phases = 0; pre_runs = 0; aborts = 0; swaps_back = 0; last_aes = -1;
    repeat (3) @(posedge clk);
    #0.3 rst_n = 1'b1;
    phase(1'b0);
    check(sw == '0 && !running, "idle after reset");

    for (int op = 0; op < 6; op++) begin
      // Precharge length: count phases with all charging switches closed
      cnt = 0;
      phase(1'b1);
      while (!running) begin
        if (sw == {{N{1'b0}}, {N{1'b1}}}) cnt++;
        phase(1'b1);
      end
      pre_runs++;
      check(cnt == PRE, $sformatf("precharge lasted %0d phases, expected %0d", cnt, PRE));
      repeat (150 + op * 20) phase(1'b1);
      phase(1'b0);
      check(sw == '0 && !running, "all switches open after enc_active falls");
      repeat (3) phase(1'b0);
    end

    // enc_active falls during precharge
    phase(1'b1); phase(1'b1); phase(1'b1);
    phase(1'b0);
    check(sw == '0 && !running, "abort during precharge opens all switches");
    aborts++;
    phase(1'b0);

    for (int i = 0; i < N; i++)
      check(used_aes[i] > 0, $sformatf("C%0d never supplied the core", i + 1));
    check(run_phases > 1000, "enough running phases");
    check(swaps_back > 0, "a just-charged capacitor was picked to supply the core");
    $display("shuffle_ctrl_tb: %0d precharges, %0d running phases, %0d immediate reuses, %0d aborts",
             pre_runs, run_phases, swaps_back, aborts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
