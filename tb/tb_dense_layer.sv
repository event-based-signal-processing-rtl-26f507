// tb_dense_layer: self-check of the fully connected spiking output layer.
// A small layer (25 positions x 4 maps = 100 inputs, 6 outputs) gets random
// weights and, over 8 timesteps, random input spike vectors; the output
// spikes of each timestep are compared with a reference dot product + LIF
// model, with a sample restart (first_ts) at timestep 5. The start-to-done
// time of L_IN + 2 clock edges is checked.
module tb_dense_layer;
  localparam int unsigned L_IN = 25, C_IN = 4, N_OUT = 6;
  localparam int unsigned W_W = 8, V_W = 16, LS = 4;
  localparam int unsigned PA_W = $clog2(L_IN + 1);
  localparam int unsigned WA_W = $clog2(L_IN * N_OUT * C_IN);
  localparam int TH = 250;
  localparam int STEPS = 8;

  logic clk = 0, rst_n = 0, start = 0, first_ts = 0;
  logic signed [V_W-1:0] v_th = V_W'(TH);
  logic busy, done;
  logic [PA_W-1:0] in_rd_addr;
  logic [C_IN-1:0] in_rd_data;
  logic out_valid;
  logic [N_OUT-1:0] out_spikes;
  logic w_we = 0;
  logic [WA_W-1:0] w_addr = '0;
  logic signed [W_W-1:0] w_data = '0;

  logic [C_IN-1:0] in_buf [L_IN];
  int weights [N_OUT][L_IN][C_IN];
  int vref [N_OUT];
  logic [N_OUT-1:0] exp_spk;
  int valids, spikes_seen;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  dense_layer #(.L_IN(L_IN), .C_IN(C_IN), .N_OUT(N_OUT),
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

  always @(posedge clk) if (rst_n && out_valid) valids++;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < L_IN; p++)
      for (int o = 0; o < N_OUT; o++)
        for (int ci = 0; ci < C_IN; ci++) begin
          weights[o][p][ci] = int'($urandom_range(40)) - 16;
          @(negedge clk);
          w_we = 1; w_addr = WA_W'((p*N_OUT + o)*C_IN + ci); w_data = W_W'(weights[o][p][ci]);
        end
    @(negedge clk) w_we = 0;

    for (int t = 0; t < STEPS; t++) begin
      bit restart;
      int cycles;
      restart = (t == 0) || (t == 5);
      for (int p = 0; p < L_IN; p++) in_buf[p] = C_IN'($urandom);
      for (int o = 0; o < N_OUT; o++) begin
        int i;
        bit s;
        i = 0;
        for (int p = 0; p < L_IN; p++)
          for (int ci = 0; ci < C_IN; ci++)
            if (in_buf[p][ci]) i += weights[o][p][ci];
        vref[o] = lif(restart ? 0 : vref[o], i, TH, s);
        exp_spk[o] = s;
      end
      valids = 0;
      @(negedge clk);
      first_ts = restart; start = 1;
      @(negedge clk) start = 0;
      cycles = 1;
      while (!done) begin @(negedge clk); cycles++; end
      // out_valid and done are high in the same cycle
      checks += 3;
      if (!out_valid || out_spikes !== exp_spk) begin
        failures++;
        $display("ERR t=%0d valid=%0b got=%b exp=%b", t, out_valid, out_spikes, exp_spk);
      end
      spikes_seen += $countones(out_spikes);
      @(negedge clk);
      if (valids != 1) begin
        failures++; $display("ERR t=%0d valids=%0d", t, valids);
      end
      if (cycles != L_IN + 3) begin
        failures++; $display("ERR t=%0d cycles=%0d exp %0d", t, cycles, L_IN + 3);
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
