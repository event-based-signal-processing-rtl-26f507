// rate_decoder: turns the output layer's spike trains into a class decision.
//
// Activations of the network are carried as spike rates, so the class is the
// output neuron that fired most often during the presentation of a sample.
// The decoder counts the spikes of each of the N_OUT output neurons over the
// presentation and, on 'finish', registers the index of the largest count
// (the lowest index wins a tie) together with the counts. Counting spikes
// over the presentation follows the rate coding of the network; the tie rule
// and the counter width are this design's choices. Counters saturate.
//
// Interface: clear (start of a sample), spk_valid/spk (one output-layer
// timestep), finish (end of the sample). result_valid pulses one cycle after
// finish, with result_class and counts stable until the next clear.
module rate_decoder
#(
  parameter int unsigned N_OUT = snn_pkg::N_OUT,
  parameter int unsigned CNT_W = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  logic                          spk_valid,
  input  logic [N_OUT-1:0]              spk,
  input  logic                          finish,
  output logic                          result_valid,
  output logic [$clog2(N_OUT)-1:0]      result_class,
  output logic [N_OUT-1:0][CNT_W-1:0]   counts
);

  logic [$clog2(N_OUT)-1:0] best;

  // argmax, lowest index on a tie
  always_comb begin
    best = '0;
    for (int o = 1; o < N_OUT; o++)
      if (counts[o] > counts[best]) best = $clog2(N_OUT)'(o);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      counts       <= '0;
      result_valid <= 1'b0;
      result_class <= '0;
    end else begin
      result_valid <= 1'b0;
      if (clear) begin
        counts <= '0;
      end else if (spk_valid) begin
        for (int o = 0; o < N_OUT; o++)
          if (spk[o] && counts[o] != '1) counts[o] <= counts[o] + 1'b1;
      end
      if (finish) begin
        result_valid <= 1'b1;
        result_class <= best;
      end
    end
  end

endmodule
