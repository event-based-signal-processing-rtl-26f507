// tb_a2e_converter: self-check of the multiple-threshold pulse-to-event
// conversion. Synthetic detector pulses (fast rise, exponential-like decay,
// random height, random gaps, idle samples in between) are sampled into the
// converter with thresholds 400, 1200, 2400. For each pulse the expected
// event channel is the highest threshold the pulse peak reached; pulses that
// never reach the first threshold must give no event. Every event is checked
// against the expected queue, and the number of events must match.
module tb_a2e_converter;
  localparam int unsigned N_THR = 3, AMP_W = 12, CH_W = 2;

  logic clk = 0, rst_n = 0, smp_valid = 0;
  logic [AMP_W-1:0] smp = '0;
  logic [N_THR-1:0][AMP_W-1:0] thr;
  logic ev_valid;
  logic [CH_W-1:0] ev_chan;
  int exp_q [$];
  int n_ev = 0, n_exp = 0;
  int per_chan [N_THR];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  a2e_converter #(.N_THR(N_THR), .AMP_W(AMP_W), .CH_W(CH_W)) dut (.*);

  always @(posedge clk) if (rst_n && ev_valid) begin
    int e;
    n_ev++;
    checks++;
    if (exp_q.size() == 0) begin
      failures++; $display("ERR unexpected event ch=%0d", ev_chan);
    end else begin
      e = exp_q.pop_front();
      if (int'(ev_chan) != e) begin
        failures++; $display("ERR event ch=%0d exp %0d", ev_chan, e);
      end
      per_chan[e]++;
    end
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pulse(int height);
    int v, peak_ch;
    peak_ch = -1;
    for (int k = 0; k < N_THR; k++) if (height >= int'(thr[k])) peak_ch = k;
    if (peak_ch >= 0) begin exp_q.push_back(peak_ch); n_exp++; end
    // rise in 3 samples, then decay by 1/8 per sample down to the baseline
    for (int r = 1; r <= 3; r++) begin
      @(negedge clk); smp_valid = 1; smp = AMP_W'(height * r / 3);
      @(negedge clk); smp_valid = 0;     // samples do not come every cycle
    end
    v = height;
    while (v > 20) begin
      v = v - v / 8 - 1;
      @(negedge clk); smp_valid = 1; smp = AMP_W'(v);
    end
    @(negedge clk); smp_valid = 1; smp = '0;
    @(negedge clk); smp_valid = 0;
  endtask

  initial begin
    thr[0] = 12'd400; thr[1] = 12'd1200; thr[2] = 12'd2400;
    repeat (3) @(posedge clk);
    rst_n = 1;
    pulse(2400);   // exactly Thr_3
    pulse(399);    // below Thr_1: no event
    pulse(1200);   // exactly Thr_2
    pulse(4095);
    for (int i = 0; i < 300; i++) begin
      pulse(int'($urandom_range(4095)));
      repeat ($urandom_range(5)) @(negedge clk);
    end
    repeat (5) @(negedge clk);
    checks++;
    if (n_ev != n_exp) begin failures++; $display("ERR %0d events, %0d expected", n_ev, n_exp); end
    for (int k = 0; k < N_THR; k++) begin
      checks++;
      if (per_chan[k] == 0) begin failures++; $display("ERR no event on channel %0d", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
