// tb_poisson_encoder: self-check of the histogram-to-spike encoder.
// 50 channels get rates including 0 (never fires), 255 and random values.
// Over 40 timestep scans, with ev_ready randomly low, every accepted event
// is compared with a reference built here from the LFSR polynomial and seed:
// the same channel sequence must come out, in order, nothing more. The scan
// time (channels + stalled cycles) is checked, and over all scans the
// observed firing fraction of a rate-128 channel must be near one half.
module tb_poisson_encoder;
  localparam int unsigned N_CH = 50, R_W = 8, CH_W = $clog2(N_CH);
  localparam int unsigned SCANS = 40;

  logic clk = 0, rst_n = 0;
  logic r_we = 0;
  logic [CH_W-1:0] r_addr = '0;
  logic [R_W-1:0] r_data = '0;
  logic start = 0, busy, done, ev_valid, ev_ready = 0;
  logic [CH_W-1:0] ev_chan;

  int rate [N_CH];
  int exp_q [$];
  int hits [N_CH];
  int stalls = 0, n_ev = 0;
  logic [15:0] lfsr_ref = 16'hACE1;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  poisson_encoder #(.N_CH(N_CH), .R_W(R_W), .CH_W(CH_W)) dut (.*);

  always @(posedge clk) if (rst_n) begin
    if (ev_valid && !ev_ready) stalls++;
    if (ev_valid && ev_ready) begin
      int e;
      n_ev++;
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("ERR unexpected event %0d", ev_chan);
      end else begin
        e = exp_q.pop_front();
        if (int'(ev_chan) != e) begin
          failures++;
          if (failures < 10) $display("ERR event %0d exp %0d", ev_chan, e);
        end
        hits[e]++;
      end
    end
  end

  always @(negedge clk) ev_ready = ($urandom_range(3) != 0);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < N_CH; c++) begin
      rate[c] = (c == 0) ? 0 : (c == 1) ? 255 : (c == 2) ? 128 : int'($urandom_range(255));
      @(negedge clk) begin r_we = 1; r_addr = CH_W'(c); r_data = R_W'(rate[c]); end
    end
    @(negedge clk) r_we = 0;
    for (int s = 0; s < SCANS; s++) begin
      int cycles, st0;
      for (int c = 0; c < N_CH; c++) begin
        if (int'(lfsr_ref[7:0]) < rate[c]) exp_q.push_back(c);
        lfsr_ref = {lfsr_ref[14:0], lfsr_ref[15] ^ lfsr_ref[13] ^ lfsr_ref[12] ^ lfsr_ref[10]};
      end
      st0 = stalls;
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cycles = 1;
      while (!done) begin @(negedge clk); cycles++; end
      checks += 2;
      if (exp_q.size() != 0) begin
        failures++; $display("ERR scan %0d: %0d events missing", s, exp_q.size());
        exp_q.delete();
      end
      if (cycles != N_CH + (stalls - st0) + 1) begin
        failures++; $display("ERR scan %0d took %0d cycles, stalls %0d", s, cycles, stalls - st0);
      end
    end
    checks += 4;
    if (hits[0] != 0) begin failures++; $display("ERR rate 0 fired"); end
    if (hits[1] < SCANS - 2) begin failures++; $display("ERR rate 255 fired %0d", hits[1]); end
    if (hits[2] < SCANS/4 || hits[2] > 3*SCANS/4) begin failures++; $display("ERR rate 128 fired %0d", hits[2]); end
    if (stalls == 0) begin failures++; $display("ERR no stall"); end
    $display("events %0d stalls %0d", n_ev, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
