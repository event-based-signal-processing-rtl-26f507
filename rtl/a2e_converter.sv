// a2e_converter: multiple-threshold analogue-to-event conversion of detector
// pulses.
//
// Each gamma photon gives one voltage pulse whose height is proportional to
// its energy. A set of N_THR ascending thresholds (Thr_1 .. Thr_N) turns the
// pulse into an event: while the pulse is above Thr_1 the converter tracks
// the highest threshold the pulse has reached, and when the pulse falls back
// below Thr_1 it emits a single event on the channel of that highest
// threshold. Each threshold channel is thus the signature of an energy band,
// and the stream of events is the spike train the network classifies.
// Nothing is done between pulses. The use of several energy thresholds to
// create events follows the design; the single event per pulse on its
// highest threshold, and working on sampled amplitudes (in silicon the
// comparators would be analogue, here they compare a digital sample), are
// this design's choices. The thresholds must be programmed in ascending
// order.
//
// Interface: smp_valid/smp (pulse amplitude samples), thr[N_THR] (threshold
// levels), ev_valid/ev_chan (one-cycle event, channel 0 = Thr_1). An event
// is emitted in the cycle after the first sample below Thr_1.
module a2e_converter
#(
  parameter int unsigned N_THR = snn_pkg::N_THR,
  parameter int unsigned AMP_W = snn_pkg::AMP_W,
  parameter int unsigned CH_W  = (N_THR > 1) ? $clog2(N_THR) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         smp_valid,
  input  logic [AMP_W-1:0]             smp,
  input  logic [N_THR-1:0][AMP_W-1:0]  thr,
  output logic                         ev_valid,
  output logic [CH_W-1:0]              ev_chan
);

  logic [N_THR-1:0] above;               // comparator bank
  logic [CH_W:0]    lvl;                 // 0 = below Thr_1, k = Thr_k reached
  logic             in_pulse;
  logic [CH_W:0]    peak;

  always_comb begin
    lvl = '0;
    for (int k = 0; k < N_THR; k++) begin
      above[k] = (smp >= thr[k]);
      if (above[k]) lvl = (CH_W+1)'(k + 1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_pulse <= 1'b0;
      peak     <= '0;
      ev_valid <= 1'b0;
      ev_chan  <= '0;
    end else begin
      ev_valid <= 1'b0;
      if (smp_valid) begin
        if (!above[0]) begin
          if (in_pulse) begin
            ev_valid <= 1'b1;
            ev_chan  <= CH_W'(peak - 1'b1);
          end
          in_pulse <= 1'b0;
          peak     <= '0;
        end else begin
          in_pulse <= 1'b1;
          if (lvl > peak) peak <= lvl;
        end
      end
    end
  end

endmodule
