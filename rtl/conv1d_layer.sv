// conv1d_layer: a one-dimensional spiking convolution layer, time-multiplexed
// over its neurons, evaluated once per network timestep.
//
// The layer has C_OUT feature maps of L_OUT = L_IN - K + 1 leaky
// integrate-and-fire neurons. Neuron (p, c) sees the spikes of the K input
// positions p .. p+K-1 across all C_IN input maps, K*C_IN synapses, with one
// weight set per output map shared by all positions (a 'valid' convolution,
// stride 1, no bias). Instantiated twice in the network: 3238 -> 16 maps x
// 3231 (kernel 8x1) and 16 x 3231 -> 4 maps x 3224 (kernel 8x16).
//
// How it works: a window register holds the K input position words; it is
// filled in K cycles from the upstream spike buffer and then slides by one
// position (one buffer read) after the last map of each position. Every
// cycle one neuron (p, c) is issued: the synapse unit (MUX + adder chain)
// sums the weights of map c where the window holds a spike, while the
// neuron's membrane is read from a synchronous memory. One cycle later the
// LIF unit updates the membrane, writes it back and produces the spike; the
// C_OUT spikes of a position are collected and written to the downstream
// spike buffer as one word. With first_ts high the stored membranes are
// treated as zero, which resets the layer at the start of a new sample
// without a clearing pass. The sizes follow the network; the window and
// pipeline organisation, one neuron per cycle, is this design's choice.
//
// Interface: start (pulse) begins a timestep; first_ts and v_th must hold
// until done. in_rd_addr/in_rd_data read the upstream buffer (combinational
// read). out_we/out_addr/out_data write the downstream buffer. w_we/w_addr/
// w_data load weight (c, k, ci) at w_addr = (c*K + k)*C_IN + ci; load only
// while the layer is idle.
// Timing: done rises K + L_OUT*C_OUT + 3 clock edges after the edge that
// samples start;
// busy is high from the cycle after start until done.
module conv1d_layer #(
  parameter int unsigned L_IN       = 3238,
  parameter int unsigned C_IN       = 1,
  parameter int unsigned K          = 8,
  parameter int unsigned C_OUT      = 16,
  parameter int unsigned W_W        = 8,
  parameter int unsigned V_W        = 16,
  parameter int unsigned LEAK_SHIFT = 4,
  // derived
  parameter int unsigned L_OUT      = L_IN - K + 1,
  parameter int unsigned NSYN       = K * C_IN,
  parameter int unsigned PA_W       = $clog2(L_IN + 1),
  parameter int unsigned OA_W       = $clog2(L_OUT),
  parameter int unsigned WA_W       = $clog2(C_OUT * NSYN)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic                  first_ts,
  input  logic signed [V_W-1:0] v_th,
  output logic                  busy,
  output logic                  done,
  // upstream spike buffer
  output logic [PA_W-1:0]       in_rd_addr,
  input  logic [C_IN-1:0]       in_rd_data,
  // downstream spike buffer
  output logic                  out_we,
  output logic [OA_W-1:0]       out_addr,
  output logic [C_OUT-1:0]      out_data,
  // weight load
  input  logic                  w_we,
  input  logic [WA_W-1:0]       w_addr,
  input  logic signed [W_W-1:0] w_data
);

  localparam int unsigned S_W  = W_W + $clog2(NSYN) + 1;
  localparam int unsigned NA_W = $clog2(L_OUT * C_OUT);
  localparam int unsigned C_W  = (C_OUT > 1) ? $clog2(C_OUT) : 1;

  typedef enum logic [1:0] {S_IDLE, S_FILL, S_RUN, S_DRAIN} state_e;
  state_e state;

  // weights: one row of K*C_IN weights per output map
  logic signed [NSYN-1:0][W_W-1:0] wmem [C_OUT];
  // membranes, neuron (p, c) at p*C_OUT + c
  logic signed [V_W-1:0] vmem [L_OUT * C_OUT];

  logic [K-1:0][C_IN-1:0] win;      // win[k] = input position p + k
  logic [PA_W-1:0]        ld_pos;   // next input position to load
  logic [OA_W-1:0]        p;
  logic [C_W-1:0]         c;

  // stage 1: issue
  logic                   s1_v;
  logic [NA_W-1:0]        s1_addr;
  logic signed [S_W-1:0]  s1_sum;

  // stage 2: neuron update
  logic                   s2_v;
  logic [NA_W-1:0]        s2_addr;
  logic [OA_W-1:0]        s2_p;
  logic [C_W-1:0]         s2_c;
  logic signed [S_W-1:0]  s2_sum;
  logic signed [V_W-1:0]  s2_vrd;
  logic signed [V_W-1:0]  s2_vold, s2_vnew;
  logic                   s2_spk;
  logic [C_OUT-1:0]       obits, obits_next;

  assign s1_v       = (state == S_RUN);
  assign s1_addr    = NA_W'(int'(p) * C_OUT + int'(c));
  assign in_rd_addr = ld_pos;
  assign busy       = (state != S_IDLE);

  synapse_unit #(.N(NSYN), .W_W(W_W), .S_W(S_W)) u_syn (
    .spikes  (win),
    .weights (wmem[c]),
    .sum     (s1_sum)
  );

  assign s2_vold = first_ts ? '0 : s2_vrd;

  lif_neuron #(.V_W(V_W), .I_W(S_W), .LEAK_SHIFT(LEAK_SHIFT)) u_lif (
    .v_in  (s2_vold),
    .i_syn (s2_sum),
    .v_th  (v_th),
    .v_out (s2_vnew),
    .spike (s2_spk)
  );

  always_comb begin
    obits_next = obits;
    obits_next[s2_c] = s2_spk;
  end

  // weight load
  always_ff @(posedge clk) begin
    if (w_we) wmem[int'(w_addr) / NSYN][int'(w_addr) % NSYN] <= w_data;
  end

  // membrane memory: synchronous read at issue, write-back at update
  always_ff @(posedge clk) begin
    if (s1_v) s2_vrd <= vmem[s1_addr];
    if (s2_v) vmem[s2_addr] <= s2_vnew;
  end

  // control and pipeline
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      ld_pos   <= '0;
      p        <= '0;
      c        <= '0;
      win      <= '0;
      s2_v     <= 1'b0;
      s2_addr  <= '0;
      s2_p     <= '0;
      s2_c     <= '0;
      s2_sum   <= '0;
      obits    <= '0;
      out_we   <= 1'b0;
      out_addr <= '0;
      out_data <= '0;
      done     <= 1'b0;
    end else begin
      done   <= 1'b0;
      out_we <= 1'b0;

      // stage 1 -> stage 2
      s2_v    <= s1_v;
      s2_addr <= s1_addr;
      s2_p    <= p;
      s2_c    <= c;
      s2_sum  <= s1_sum;

      // stage 2 -> downstream buffer
      if (s2_v) begin
        obits <= obits_next;
        if (int'(s2_c) == C_OUT - 1) begin
          out_we   <= 1'b1;
          out_addr <= s2_p;
          out_data <= obits_next;
        end
      end

      unique case (state)
        S_IDLE: if (start) begin
          state  <= S_FILL;
          ld_pos <= '0;
          p      <= '0;
          c      <= '0;
        end
        S_FILL: begin
          win    <= {in_rd_data, win[K-1:1]};
          ld_pos <= ld_pos + 1'b1;
          if (int'(ld_pos) == K - 1) state <= S_RUN;
        end
        S_RUN: begin
          if (int'(c) == C_OUT - 1) begin
            c <= '0;
            if (int'(p) == L_OUT - 1) begin
              state <= S_DRAIN;
            end else begin
              p      <= p + 1'b1;
              win    <= {in_rd_data, win[K-1:1]};
              ld_pos <= ld_pos + 1'b1;
            end
          end else begin
            c <= c + 1'b1;
          end
        end
        S_DRAIN: if (!s2_v && !out_we) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
