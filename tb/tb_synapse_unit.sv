// tb_synapse_unit: random self-check of the MUX/adder synapse datapath.
// Two instances (8 and 128 synapses, the sizes of the two convolutions) are
// driven with random spike vectors and weights, including the all-spike and
// no-spike corners; the sum is compared with a reference computed here.
module tb_synapse_unit;
  localparam int unsigned W_W = 8;
  localparam int unsigned NA = 8;
  localparam int unsigned NB = 128;
  localparam int unsigned SA = W_W + $clog2(NA) + 1;
  localparam int unsigned SB = W_W + $clog2(NB) + 1;

  logic [NA-1:0] spk_a;
  logic signed [NA-1:0][W_W-1:0] w_a;
  logic signed [SA-1:0] sum_a;
  logic [NB-1:0] spk_b;
  logic signed [NB-1:0][W_W-1:0] w_b;
  logic signed [SB-1:0] sum_b;

  int checks = 0, failures = 0;

  synapse_unit #(.N(NA), .W_W(W_W)) dut_a (.spikes(spk_a), .weights(w_a), .sum(sum_a));
  synapse_unit #(.N(NB), .W_W(W_W)) dut_b (.spikes(spk_b), .weights(w_b), .sum(sum_b));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 400; it++) begin
      int ref_a, ref_b;
      for (int n = 0; n < NA; n++) begin
        w_a[n] = W_W'($urandom);
        spk_a[n] = (it == 0) ? 1'b1 : (it == 1) ? 1'b0 : 1'($urandom);
      end
      for (int n = 0; n < NB; n++) begin
        w_b[n] = (it == 2) ? 8'sh80 : (it == 3) ? 8'sh7f : W_W'($urandom);
        spk_b[n] = (it < 4 && it != 1) ? 1'b1 : (it == 1) ? 1'b0 : 1'($urandom);
      end
      #1;
      ref_a = 0; ref_b = 0;
      for (int n = 0; n < NA; n++) if (spk_a[n]) ref_a += int'($signed(w_a[n]));
      for (int n = 0; n < NB; n++) if (spk_b[n]) ref_b += int'($signed(w_b[n]));
      checks += 2;
      if (int'(sum_a) != ref_a) begin
        failures++;
        if (failures < 10) $display("ERR it=%0d N=8 sum=%0d ref=%0d", it, sum_a, ref_a);
      end
      if (int'(sum_b) != ref_b) begin
        failures++;
        if (failures < 10) $display("ERR it=%0d N=128 sum=%0d ref=%0d", it, sum_b, ref_b);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
