// tb_lif_neuron: self-check of the leaky integrate-and-fire update.
// Directed cases (leak of a positive and a negative membrane, firing exactly
// at threshold, saturation at both ends) and random cases are compared with
// a reference computed here in 32-bit integers.
module tb_lif_neuron;
  localparam int unsigned V_W = 16;
  localparam int unsigned I_W = 16;
  localparam int unsigned LS  = 4;

  logic signed [V_W-1:0] v_in, v_th, v_out;
  logic signed [I_W-1:0] i_syn;
  logic spike;
  int checks = 0, failures = 0;

  lif_neuron #(.V_W(V_W), .I_W(I_W), .LEAK_SHIFT(LS)) dut (
    .v_in(v_in), .i_syn(i_syn), .v_th(v_th), .v_out(v_out), .spike(spike));

  task automatic check(int v, int i, int th);
    int leak, x, exp_v;
    bit exp_s;
    v_in = V_W'(v); i_syn = I_W'(i); v_th = V_W'(th);
    #1;
    // floor division by 2**LS for the arithmetic shift
    leak = (v >= 0) ? v / (1 << LS) : -((-v + (1 << LS) - 1) / (1 << LS));
    x = v - leak + i;
    if (x > 32767) x = 32767;
    if (x < -32768) x = -32768;
    exp_s = (x >= th);
    exp_v = exp_s ? 0 : x;
    checks++;
    if (spike !== exp_s || int'(v_out) != exp_v) begin
      failures++;
      if (failures < 10)
        $display("ERR v=%0d i=%0d th=%0d -> v_out=%0d spk=%0b (exp %0d %0b)",
                 v, i, th, v_out, spike, exp_v, exp_s);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(160, 0, 1000);      // leak only: 160 - 10
    check(-160, 0, 1000);     // negative leak towards zero
    check(90, 10, 94);        // 90 - 5 + 10 = 95 >= 94: fire, reset
    check(90, 8, 94);         // 93 < 94: no fire
    check(100, 0, 94);        // 100 - 6 = 94: fire at equality
    check(32000, 30000, 32767); // saturates high, fires at max threshold
    check(-32000, -30000, 100); // saturates low
    check(0, 0, 0);           // threshold zero fires on zero
    for (int it = 0; it < 2000; it++)
      check(int'($signed(16'($urandom))), int'($signed(16'($urandom))) / 4,
            int'($urandom_range(2000)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
