// tb_conv1d_layer: self-check of the time-multiplexed spiking convolution.
// A small layer (20 positions, 3 input maps, kernel 4, 3 output maps) gets
// random weights and, over 8 timesteps, random input spike vectors from a
// buffer model here. Every position word the layer writes is compared with
// a reference convolution + LIF model; the sample restarts (first_ts) at
// timestep 5 to check the membrane reset. The number of writes per timestep
// and the start-to-done cycle count K + L_OUT*C_OUT + 4 are checked too.
module tb_conv1d_layer;
  localparam int unsigned L_IN = 20, C_IN = 3, K = 4, C_OUT = 3;
  localparam int unsigned L_OUT = L_IN - K + 1;
  localparam int unsigned W_W = 8, V_W = 16, LS = 4;
  localparam int unsigned PA_W = $clog2(L_IN + 1);
  localparam int unsigned OA_W = $clog2(L_OUT);
  localparam int unsigned WA_W = $clog2(C_OUT * K * C_IN);
  localparam int TH = 60;
  localparam int STEPS = 8;

  logic clk = 0, rst_n = 0, start = 0, first_ts = 0;
  logic signed [V_W-1:0] v_th = V_W'(TH);
  logic busy, done;
  logic [PA_W-1:0] in_rd_addr;
  logic [C_IN-1:0] in_rd_data;
  logic out_we;
  logic [OA_W-1:0] out_addr;
  logic [C_OUT-1:0] out_data;
  logic w_we = 0;
  logic [WA_W-1:0] w_addr = '0;
  logic signed [W_W-1:0] w_data = '0;

  logic [C_IN-1:0] in_buf [L_IN];
  int weights [C_OUT][K][C_IN];
  int vref [L_OUT][C_OUT];
  logic [C_OUT-1:0] exp_word [L_OUT];
  int writes, spikes_seen;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  conv1d_layer #(.L_IN(L_IN), .C_IN(C_IN), .K(K), .C_OUT(C_OUT),
                 .W_W(W_W), .V_W(V_W), .LEAK_SHIFT(LS)) dut (.*);

  assign in_rd_data = (int'(in_rd_addr) < L_IN) ? in_buf[in_rd_addr] : '0;

  function automatic int lif(int v, int i, int th, output bit s);
    int leak, x;
    leak = (v >= 0) ? v / (1 << LS) : -((-v + (1 << LS) - 1) / (1 << LS));
    x = v - leak + i;
    if (x > 32767) x = 32767;
    if (x < -32768) x = -32768;
    s = (x >= th);
    return s ? 0 : x;
  endfunction

  always @(posedge clk) if (rst_n && out_we) begin
    writes++;
    checks++;
    if (out_data !== exp_word[out_addr]) begin
      failures++;
      if (failures < 10) $display("ERR pos=%0d got=%b exp=%b", out_addr, out_data, exp_word[out_addr]);
    end
    spikes_seen += $countones(out_data);
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // load weights
    for (int c = 0; c < C_OUT; c++)
      for (int k = 0; k < K; k++)
        for (int ci = 0; ci < C_IN; ci++) begin
          weights[c][k][ci] = int'($urandom_range(60)) - 20;
          @(negedge clk);
          w_we = 1; w_addr = WA_W'((c*K + k)*C_IN + ci); w_data = W_W'(weights[c][k][ci]);
        end
    @(negedge clk) w_we = 0;

    for (int t = 0; t < STEPS; t++) begin
      bit restart;
      int cycles;
      restart = (t == 0) || (t == 5);
      for (int p = 0; p < L_IN; p++) in_buf[p] = C_IN'($urandom);
      // reference
      for (int p = 0; p < L_OUT; p++)
        for (int c = 0; c < C_OUT; c++) begin
          int i;
          bit s;
          i = 0;
          for (int k = 0; k < K; k++)
            for (int ci = 0; ci < C_IN; ci++)
              if (in_buf[p+k][ci]) i += weights[c][k][ci];
          vref[p][c] = lif(restart ? 0 : vref[p][c], i, TH, s);
          exp_word[p][c] = s;
        end
      writes = 0;
      @(negedge clk);
      first_ts = restart; start = 1;
      @(negedge clk) start = 0;
      cycles = 1;
      while (!done) begin @(negedge clk); cycles++; end
      checks += 2;
      if (writes != L_OUT) begin
        failures++; $display("ERR t=%0d writes=%0d", t, writes);
      end
      if (cycles != K + L_OUT*C_OUT + 4) begin
        failures++; $display("ERR t=%0d cycles=%0d exp %0d", t, cycles, K + L_OUT*C_OUT + 4);
      end
    end
    checks++;
    if (spikes_seen == 0) begin
      failures++; $display("ERR no spikes at all");
    end
    $display("spikes seen %0d", spikes_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
