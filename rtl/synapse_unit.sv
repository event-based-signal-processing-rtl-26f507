// synapse_unit: digital post-synaptic current of one neuron for one timestep.
//
// Each of the N presynaptic inputs carries a spike bit x(n) (1 = spike,
// 0 = no spike). Per input a two-way multiplexer passes either the constant 0
// or that synapse's weight, and the multiplexer outputs are summed by a chain
// of adders; the sum is the current injected into the neuron. No multiplier
// and no synaptic current shape are needed: a spike simply adds its weight.
// This structure is the one of the synapse datapath the design follows; the
// weight width and the signed two's-complement format are this design's
// choices.
//
// Interface: spikes[N] and weights[N] in, sum out. Purely combinational,
// zero cycles of latency; the instantiating layer registers the sum.
module synapse_unit #(
  parameter int unsigned N   = 8,                      // synapses
  parameter int unsigned W_W = 8,                      // weight width
  parameter int unsigned S_W = W_W + $clog2(N) + 1     // sum width
) (
  input  logic [N-1:0]                  spikes,
  input  logic signed [N-1:0][W_W-1:0]  weights,
  output logic signed [S_W-1:0]         sum
);

  logic signed [N-1:0][S_W-1:0] mux_out;   // MUX: 0 or weight

  always_comb begin
    for (int n = 0; n < N; n++)
      mux_out[n] = spikes[n] ? S_W'(signed'(weights[n])) : '0;
  end

  // adder chain
  always_comb begin
    sum = '0;
    for (int n = 0; n < N; n++)
      sum = sum + mux_out[n];
  end

endmodule
