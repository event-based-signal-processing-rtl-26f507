// poisson_encoder: turns an energy histogram into Poisson-like spike events,
// one scan of all channels per network timestep.
//
// Each channel holds a firing probability per timestep, rate/256, written
// through a load port (the histogram counts scaled to 0..255). For every
// timestep the encoder scans the channels in order; for each it draws an
// 8-bit pseudo-random number and emits an event on that channel if the
// number is below the channel's rate. A channel's events over many
// timesteps are then a Bernoulli approximation of a Poisson source whose
// rate follows the histogram bin. This is how histograms are presented to
// the network as spike trains, e.g. to test it before a detector front end
// exists; the probability scaling, the scan order and the generator are this
// design's choices.
//
// Random numbers: a 16-bit Fibonacci LFSR, taps 16, 14, 13, 11
// (next = {l[14:0], l[15]^l[13]^l[12]^l[10]}), seeded with 16'hACE1 at reset
// and stepped once per scanned channel; the draw is its low byte.
//
// Interface: r_we/r_addr/r_data load the rates (while idle). start (pulse)
// begins a scan; ev_valid/ev_chan/ev_ready is a valid/ready event stream
// (ev_valid does not depend on ev_ready, the channel holds until accepted);
// done pulses after the last channel. A scan takes N_CH cycles plus one per
// cycle ev_ready was low while an event was offered, plus one.
module poisson_encoder #(
  parameter int unsigned N_CH = 3238,
  parameter int unsigned R_W  = 8,
  parameter int unsigned CH_W = $clog2(N_CH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            r_we,
  input  logic [CH_W-1:0] r_addr,
  input  logic [R_W-1:0]  r_data,
  input  logic            start,
  output logic            busy,
  output logic            done,
  output logic            ev_valid,
  output logic [CH_W-1:0] ev_chan,
  input  logic            ev_ready
);

  logic [R_W-1:0] rate [N_CH];
  logic [15:0]    lfsr;
  logic [CH_W-1:0] ch;
  logic           hit, step;

  always_ff @(posedge clk) begin
    if (r_we && (int'(r_addr) < N_CH)) rate[r_addr] <= r_data;
  end

  assign hit      = busy && (lfsr[R_W-1:0] < rate[ch]);
  assign ev_valid = hit;
  assign ev_chan  = ch;
  // move to the next channel when this one needs no event or it was taken
  assign step     = busy && (!hit || ev_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      ch   <= '0;
      lfsr <= 16'hACE1;
    end else begin
      done <= 1'b0;
      if (!busy && start) begin
        busy <= 1'b1;
        ch   <= '0;
      end else if (step) begin
        lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
        if (int'(ch) == N_CH - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          ch <= ch + 1'b1;
        end
      end
    end
  end

  // an offered event stays offered, on the same channel, until accepted
  a_valid_stable: assert property (@(posedge clk) disable iff (!rst_n)
    ev_valid && !ev_ready |=> ev_valid && $stable(ev_chan));

endmodule
