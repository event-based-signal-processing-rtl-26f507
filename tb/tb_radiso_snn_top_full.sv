// tb_radiso_snn_top_full: end-to-end self-check of the classifier at its full
// size (3238 input channels, 16 x 3231 and 4 x 3224 convolution neurons, 6
// outputs, 78016 weights), with the top's default parameters.
//
// Same procedure as the reduced end-to-end test: all weights are loaded, then
// one sample from the external event port (10 timesteps, each channel firing
// with the probability of a synthetic spectrum, one event stalled per
// timestep) and one from the analogue-to-event converter (3 timesteps, with a
// dropped pulse) and one from the on-chip Poisson encoder (3 self-timed
// timesteps) are classified, and every timestep's output spikes, the
// counts, the class, the timestep latency and the mechanism counters are
// compared with a reference model of the network.
module tb_radiso_snn_top_full;
  import snn_pkg::*;

  // full network, the package defaults
  localparam int unsigned TN_IN = N_IN, TK = KERNEL, TC1 = C1, TC2 = C2, TN_OUT = N_OUT;
  localparam int unsigned STEPS_A = 10, STEPS_B = 3, STEPS_C = 3;

  localparam int unsigned TL1 = TN_IN - TK + 1;
  localparam int unsigned TL2 = TL1 - TK + 1;
  localparam int unsigned CH_W = $clog2(TN_IN);
  localparam int unsigned WA_W = $clog2(TL2 * TN_OUT * TC2);
  localparam int TH1 = 40, TH2 = 300, TH3 = 1000;
  // ts_tick to step_done: the three layer times plus one hand-over cycle each
  localparam int LATENCY = (TK + TL1*TC1 + 3) + (TK + TL2*TC2 + 3) + (TL2 + 2) + 3;

  logic clk = 0, rst_n = 0;
  logic start = 0, ts_tick = 0;
  src_e src_sel = SRC_EXT;
  logic [15:0] n_steps = '0;
  logic busy, step_done;
  logic ev_valid = 0, ev_ready;
  logic [CH_W-1:0] ev_chan = '0;
  logic smp_valid = 0;
  logic [AMP_W-1:0] smp = '0;
  logic [N_THR-1:0][AMP_W-1:0] thr;
  logic [15:0] drop_count;
  logic signed [V_W-1:0] v_th1 = V_W'(TH1), v_th2 = V_W'(TH2), v_th3 = V_W'(TH3);
  logic w_we = 0;
  wsel_e w_sel = WSEL_CONV1;
  logic [WA_W-1:0] w_addr = '0;
  logic signed [W_W-1:0] w_data = '0;
  logic result_valid;
  iso_class_e result_class;
  logic [TN_OUT-1:0][15:0] spike_counts;

  always #5 clk = ~clk;

  radiso_snn_top dut (.*);

  // ------------------------------------------------------------ reference
  int w1 [TC1][TK];
  int w2 [TC2][TK][TC1];
  int w3 [TN_OUT][TL2][TC2];
  int v1 [TL1][TC1];
  int v2 [TL2][TC2];
  int v3 [TN_OUT];
  bit in_vec [TN_IN];
  bit s1 [TL1][TC1];
  bit s2 [TL2][TC2];
  bit s3 [TN_OUT];
  int ref_cnt [TN_OUT];
  bit exp_q [$];          // expected output spikes, TN_OUT per timestep

  function automatic int lif(int v, int i, int th, output bit s);
    int leak, x;
    leak = (v >= 0) ? v / (1 << LEAK_SHIFT) : -((-v + (1 << LEAK_SHIFT) - 1) / (1 << LEAK_SHIFT));
    x = v - leak + i;
    if (x > 32767) x = 32767;
    if (x < -32768) x = -32768;
    s = (x >= th);
    return s ? 0 : x;
  endfunction

  task automatic ref_step(bit first);
    int i;
    for (int p = 0; p < TL1; p++)
      for (int c = 0; c < TC1; c++) begin
        i = 0;
        for (int k = 0; k < TK; k++) if (in_vec[p+k]) i += w1[c][k];
        v1[p][c] = lif(first ? 0 : v1[p][c], i, TH1, s1[p][c]);
      end
    for (int p = 0; p < TL2; p++)
      for (int c = 0; c < TC2; c++) begin
        i = 0;
        for (int k = 0; k < TK; k++)
          for (int ci = 0; ci < TC1; ci++) if (s1[p+k][ci]) i += w2[c][k][ci];
        v2[p][c] = lif(first ? 0 : v2[p][c], i, TH2, s2[p][c]);
      end
    for (int o = 0; o < TN_OUT; o++) begin
      i = 0;
      for (int p = 0; p < TL2; p++)
        for (int ci = 0; ci < TC2; ci++) if (s2[p][ci]) i += w3[o][p][ci];
      if (i > 32767) i = 32767;
      if (i < -32768) i = -32768;
      v3[o] = lif(first ? 0 : v3[o], i, TH3, s3[o]);
      exp_q.push_back(s3[o]);
      if (s3[o]) ref_cnt[o]++;
    end
  endtask

  // ------------------------------------------------------------ monitors
  int checks = 0, failures = 0;
  int n_stall = 0, n_drop_exp = 0, n_mode_switch = 0, n_restart = 0;
  int n_poisson_ev = 0;
  logic [15:0] lfsr_ref = 16'hACE1;
  int n_spk1 = 0, n_spk2 = 0, n_spk3 = 0, n_steps_done = 0, n_results = 0;
  logic chk_pending = 0;
  logic [TN_OUT-1:0][15:0] prev_counts;

  always @(posedge clk) if (rst_n) begin
    if (ev_valid && !ev_ready) n_stall++;
    if (src_sel == SRC_POISSON && dut.set_en) n_poisson_ev++;
    if (dut.b1_we) n_spk1 += $countones(dut.b1_wr_data);
    if (dut.b2_we) n_spk2 += $countones(dut.b2_wr_data);
    if (result_valid) n_results++;
    if (chk_pending) begin
      for (int o = 0; o < TN_OUT; o++) begin
        bit e;
        bit got;
        e = exp_q.pop_front();
        got = (spike_counts[o] != prev_counts[o]);
        n_spk3 += got;
        checks++;
        if (got != e) begin
          failures++;
          if (failures < 20) $display("ERR step %0d out %0d spike=%0b exp %0b", n_steps_done, o, got, e);
        end
      end
    end
    chk_pending <= step_done;
    if (step_done) begin
      n_steps_done++;
      prev_counts <= spike_counts;
    end
  end

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ stimulus
  task automatic load_weights();
    for (int c = 0; c < TC1; c++)
      for (int k = 0; k < TK; k++) begin
        w1[c][k] = int'($urandom_range(50)) - 10;
        @(negedge clk) begin w_we = 1; w_sel = WSEL_CONV1; w_addr = WA_W'(c*TK + k); w_data = W_W'(w1[c][k]); end
      end
    for (int c = 0; c < TC2; c++)
      for (int k = 0; k < TK; k++)
        for (int ci = 0; ci < TC1; ci++) begin
          w2[c][k][ci] = int'($urandom_range(40)) - 15;
          @(negedge clk) begin w_we = 1; w_sel = WSEL_CONV2; w_addr = WA_W'((c*TK + k)*TC1 + ci); w_data = W_W'(w2[c][k][ci]); end
        end
    for (int p = 0; p < TL2; p++)
      for (int o = 0; o < TN_OUT; o++)
        for (int ci = 0; ci < TC2; ci++) begin
          w3[o][p][ci] = int'($urandom_range(30)) - 10 - o;
          @(negedge clk) begin w_we = 1; w_sel = WSEL_DENSE; w_addr = WA_W'((p*TN_OUT + o)*TC2 + ci); w_data = W_W'(w3[o][p][ci]); end
        end
    @(negedge clk) w_we = 0;
  endtask

  // offer one event; returns after the accepting clock edge
  task automatic send_event(int ch);
    ev_valid = 1; ev_chan = CH_W'(ch);
    @(posedge clk);
    while (!ev_ready) @(posedge clk);
    in_vec[ch] = 1;
    @(negedge clk) ev_valid = 0;
  endtask

  // one detector pulse into the converter; returns its channel or -1
  task automatic send_pulse(int height, output int ch);
    int v;
    ch = -1;
    for (int k = 0; k < N_THR; k++) if (height >= int'(thr[k])) ch = k;
    for (int r = 1; r <= 3; r++) begin
      @(negedge clk); smp_valid = 1; smp = AMP_W'(height * r / 3);
    end
    v = height;
    while (v > 20) begin
      v = v - v / 4 - 1;
      @(negedge clk); smp_valid = 1; smp = AMP_W'(v);
    end
    @(negedge clk); smp_valid = 1; smp = '0;
    @(negedge clk); smp_valid = 0;
    @(negedge clk);     // the event leaves the converter
  endtask

  task automatic tick_and_wait(bit first, bit stall_one, int stall_ch);
    int cycles;
    ref_step(first);
    @(negedge clk) ts_tick = 1;
    @(negedge clk) ts_tick = 0;
    cycles = 1;
    if (stall_one) begin
      // offered while the layers run: must wait for the next collect window
      ev_valid = 1; ev_chan = CH_W'(stall_ch);
    end
    while (!step_done) begin @(negedge clk); cycles++; end
    checks++;
    if (cycles != LATENCY) begin
      failures++; $display("ERR timestep latency %0d exp %0d", cycles, LATENCY);
    end
  endtask

  task automatic check_result();
    int best;
    best = 0;
    for (int o = 1; o < TN_OUT; o++) if (ref_cnt[o] > ref_cnt[best]) best = o;
    while (!result_valid) @(negedge clk);
    checks += 1 + TN_OUT;
    if (int'(result_class) != best) begin
      failures++; $display("ERR class %s exp %0d", result_class.name(), best);
    end
    for (int o = 0; o < TN_OUT; o++)
      if (int'(spike_counts[o]) != ref_cnt[o]) begin
        failures++; $display("ERR count[%0d]=%0d exp %0d", o, spike_counts[o], ref_cnt[o]);
      end
    $display("sample done: class %s, counts %p", result_class.name(), ref_cnt);
  endtask

  initial begin
    int rate [TN_IN];
    int ch, pending;
    thr[0] = 12'd400; thr[1] = 12'd1200; thr[2] = 12'd2400;
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_weights();

    // synthetic spectrum: a continuum plus one photopeak
    for (int c = 0; c < TN_IN; c++)
      rate[c] = 5 + ((c > TN_IN/2 && c < TN_IN/2 + 40) ? 60 : 0);

    // ---------------- sample A: external events
    foreach (ref_cnt[o]) ref_cnt[o] = 0;
    @(negedge clk) begin src_sel = SRC_EXT; n_steps = 16'(STEPS_A); start = 1; end
    @(negedge clk) start = 0;
    n_restart++;
    pending = -1;
    for (int t = 0; t < STEPS_A; t++) begin
      foreach (in_vec[c]) in_vec[c] = 0;
      if (pending >= 0) send_event(pending);      // the stalled event
      for (int c = 0; c < TN_IN; c++)
        if (int'($urandom_range(99)) < rate[c]) send_event(c);
      pending = (t < STEPS_A - 1) ? int'($urandom_range(TN_IN - 1)) : -1;
      tick_and_wait(t == 0, pending >= 0, pending);
    end
    check_result();

    // ---------------- sample B: analogue-to-event converter
    foreach (ref_cnt[o]) ref_cnt[o] = 0;
    @(negedge clk) begin src_sel = SRC_A2E; n_steps = 16'(STEPS_B); start = 1; end
    n_mode_switch++;
    @(negedge clk) start = 0;
    n_restart++;
    for (int t = 0; t < STEPS_B; t++) begin
      foreach (in_vec[c]) in_vec[c] = 0;
      for (int i = 0; i < 3; i++) begin
        send_pulse(int'($urandom_range(4095)), ch);
        if (ch >= 0) in_vec[ch] = 1;
      end
      ref_step(t == 0);
      @(negedge clk) ts_tick = 1;
      @(negedge clk) ts_tick = 0;
      // a pulse while the layers run is lost
      send_pulse(3000, ch);
      n_drop_exp++;
      while (!step_done) @(negedge clk);
    end
    check_result();
    @(negedge clk);
    checks++;
    if (int'(drop_count) != n_drop_exp) begin
      failures++; $display("ERR drop_count %0d exp %0d", drop_count, n_drop_exp);
    end

    // ---------------- sample C: on-chip Poisson encoder, self-timed steps
    for (int c = 0; c < TN_IN; c++) begin
      @(negedge clk) begin w_we = 1; w_sel = WSEL_RATE; w_addr = WA_W'(c); w_data = W_W'(rate[c] * 2); end
    end
    @(negedge clk) w_we = 0;
    foreach (ref_cnt[o]) ref_cnt[o] = 0;
    @(negedge clk) begin src_sel = SRC_POISSON; n_steps = 16'(STEPS_C); start = 1; end
    n_mode_switch++;
    @(negedge clk) start = 0;
    n_restart++;
    for (int t = 0; t < STEPS_C; t++) begin
      // the encoder's draws, from its LFSR polynomial and seed
      for (int c = 0; c < TN_IN; c++) begin
        in_vec[c] = (int'(lfsr_ref[7:0]) < rate[c] * 2);
        lfsr_ref = {lfsr_ref[14:0], lfsr_ref[15] ^ lfsr_ref[13] ^ lfsr_ref[12] ^ lfsr_ref[10]};
      end
      ref_step(t == 0);
      while (!step_done) @(negedge clk);
      @(negedge clk);
    end
    check_result();
    @(negedge clk);

    // ---------------- mechanisms
    $display("poisson_events=%0d", n_poisson_ev);
    $display("stalls=%0d drops=%0d mode_switches=%0d restarts=%0d spikes l1=%0d l2=%0d l3=%0d steps=%0d results=%0d",
             n_stall, drop_count, n_mode_switch, n_restart, n_spk1, n_spk2, n_spk3, n_steps_done, n_results);
    checks += 10;
    if (n_poisson_ev == 0)  begin failures++; $display("ERR no encoder event"); end
    if (n_stall == 0)       begin failures++; $display("ERR no stall"); end
    if (drop_count == 0)    begin failures++; $display("ERR no drop"); end
    if (n_mode_switch == 0) begin failures++; $display("ERR no mode switch"); end
    if (n_restart < 3)      begin failures++; $display("ERR no restart"); end
    if (n_spk1 == 0)        begin failures++; $display("ERR no conv1 spike"); end
    if (n_spk2 == 0)        begin failures++; $display("ERR no conv2 spike"); end
    if (n_spk3 == 0)        begin failures++; $display("ERR no output spike"); end
    if (n_steps_done != STEPS_A + STEPS_B + STEPS_C) begin failures++; $display("ERR steps %0d", n_steps_done); end
    if (n_results != 3)     begin failures++; $display("ERR results %0d", n_results); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
