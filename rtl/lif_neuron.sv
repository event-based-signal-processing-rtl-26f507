// lif_neuron: one timestep of a leaky integrate-and-fire neuron.
//
// The membrane first leaks towards zero by a fixed fraction (an arithmetic
// right shift, v - (v >>> LEAK_SHIFT), a first-order exponential decay), then
// the synaptic current of this timestep (the weight sum of the synapse unit)
// is added with saturation. If the result reaches the threshold the neuron
// spikes and its membrane is reset to zero. There is no refractory period and
// no shaped (exponential or alpha) synaptic current: a spike's weight is
// injected in the timestep it arrives. Leaky integration, threshold and reset
// follow the current-based LIF neuron used for the network; the shift-based
// leak, reset-to-zero and saturation are this design's choices.
//
// Interface: v_in (stored membrane), i_syn (current), v_th (threshold) in;
// v_out (membrane to store) and spike out. Combinational; the layer that uses
// it time-multiplexes it over its neurons.
module lif_neuron #(
  parameter int unsigned V_W        = 16,   // membrane width
  parameter int unsigned I_W        = 16,   // current width
  parameter int unsigned LEAK_SHIFT = 4     // leak = v / 2**LEAK_SHIFT
) (
  input  logic signed [V_W-1:0] v_in,
  input  logic signed [I_W-1:0] i_syn,
  input  logic signed [V_W-1:0] v_th,
  output logic signed [V_W-1:0] v_out,
  output logic                  spike
);

  localparam int unsigned X_W = ((V_W > I_W) ? V_W : I_W) + 2;
  localparam logic signed [X_W-1:0] VMAX = X_W'((2**(V_W-1)) - 1);
  localparam logic signed [X_W-1:0] VMIN = -X_W'(2**(V_W-1));

  logic signed [V_W-1:0] v_leak;
  logic signed [X_W-1:0] v_sum;
  logic signed [V_W-1:0] v_sat;

  always_comb begin
    v_leak = v_in - (v_in >>> LEAK_SHIFT);
    v_sum  = X_W'(v_leak) + X_W'(i_syn);
    if (v_sum > VMAX)      v_sat = V_W'(VMAX);
    else if (v_sum < VMIN) v_sat = V_W'(VMIN);
    else                   v_sat = V_W'(v_sum);
    spike = (v_sat >= v_th);
    v_out = spike ? '0 : v_sat;
  end

endmodule
