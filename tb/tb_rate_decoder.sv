// tb_rate_decoder: self-check of the spike-count class decision.
// Random output spike trains (each class with its own firing probability)
// are counted here and by the decoder over 20 samples of 30 timesteps; the
// counts, the decided class (largest count, lowest index on a tie) and the
// one-cycle result_valid pulse are compared. A directed tie and an all-zero
// sample check the tie rule; clear is checked to empty the counters.
module tb_rate_decoder;
  localparam int unsigned N_OUT = 6, CNT_W = 16;

  logic clk = 0, rst_n = 0, clear = 0, spk_valid = 0, finish = 0;
  logic [N_OUT-1:0] spk = '0;
  logic result_valid;
  logic [$clog2(N_OUT)-1:0] result_class;
  logic [N_OUT-1:0][CNT_W-1:0] counts;
  int ref_cnt [N_OUT];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  rate_decoder #(.N_OUT(N_OUT), .CNT_W(CNT_W)) dut (.*);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_sample(int mode);
    int best, prob [N_OUT];
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    checks++;
    if (counts != '0) begin failures++; $display("ERR counts not cleared"); end
    for (int o = 0; o < N_OUT; o++) begin
      ref_cnt[o] = 0;
      prob[o] = int'($urandom_range(100));
    end
    for (int t = 0; t < 30; t++) begin
      @(negedge clk);
      spk_valid = 1;
      for (int o = 0; o < N_OUT; o++) begin
        if (mode == 1)      spk[o] = (o == 2 || o == 4);   // tie between 2 and 4
        else if (mode == 2) spk[o] = 1'b0;                 // nothing fires
        else                spk[o] = (int'($urandom_range(99)) < prob[o]);
        if (spk[o]) ref_cnt[o]++;
      end
      @(negedge clk) spk_valid = 0;   // a gap cycle, spikes not counted
      spk = '1;
    end
    best = 0;
    for (int o = 1; o < N_OUT; o++) if (ref_cnt[o] > ref_cnt[best]) best = o;
    @(negedge clk) finish = 1;
    @(negedge clk) finish = 0;
    checks += 2 + N_OUT;
    if (!result_valid) begin failures++; $display("ERR no result_valid"); end
    if (int'(result_class) != best) begin
      failures++; $display("ERR class %0d exp %0d", result_class, best);
    end
    for (int o = 0; o < N_OUT; o++)
      if (int'(counts[o]) != ref_cnt[o]) begin
        failures++; $display("ERR count[%0d]=%0d exp %0d", o, counts[o], ref_cnt[o]);
      end
    @(negedge clk);
    if (result_valid) begin failures++; $display("ERR result_valid longer than a cycle"); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_sample(1);
    if (result_class != 2) begin failures++; $display("ERR tie rule"); end
    run_sample(2);
    for (int s = 0; s < 20; s++) run_sample(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
