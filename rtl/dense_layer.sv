// dense_layer: the fully connected spiking output layer, evaluated once per
// network timestep.
//
// Every one of the N_OUT output neurons (one per class) is connected to all
// L_IN*C_IN neurons of the previous layer (3224 positions x 4 maps = 12896
// inputs in the full network, 77376 weights, no bias).
//
// How it works: the layer walks through the input positions, one per cycle.
// The position word (C_IN spike bits) is read from the upstream spike buffer
// while the matching weight row (N_OUT x C_IN weights) is read from a
// synchronous weight memory. One cycle later N_OUT synapse units (MUX + adder
// chain over the C_IN inputs of that position) produce partial currents that
// are added to N_OUT accumulators. After the last position the N_OUT LIF
// units update the output membranes in parallel and out_spikes/out_valid
// carry the timestep's output spikes for one cycle. first_ts treats the
// stored membranes as zero. The fully connected topology and sizes follow the
// network; walking the inputs by position is this design's choice.
//
// Interface: start (pulse), first_ts and v_th (hold until done), in_rd_addr/
// in_rd_data (combinational read of the upstream buffer), out_valid/
// out_spikes. Weight (o, p, ci) is loaded at w_addr = (p*N_OUT + o)*C_IN + ci
// while idle.
// Timing: done and out_valid rise L_IN + 2 clock edges after the edge that
// samples start.
module dense_layer #(
  parameter int unsigned L_IN       = 3224,
  parameter int unsigned C_IN       = 4,
  parameter int unsigned N_OUT      = 6,
  parameter int unsigned W_W        = 8,
  parameter int unsigned V_W        = 16,
  parameter int unsigned LEAK_SHIFT = 4,
  parameter int unsigned ACC_W      = W_W + $clog2(L_IN * C_IN) + 1,
  parameter int unsigned PA_W       = $clog2(L_IN + 1),
  parameter int unsigned WA_W       = $clog2(L_IN * N_OUT * C_IN)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic                  first_ts,
  input  logic signed [V_W-1:0] v_th,
  output logic                  busy,
  output logic                  done,
  output logic [PA_W-1:0]       in_rd_addr,
  input  logic [C_IN-1:0]       in_rd_data,
  output logic                  out_valid,
  output logic [N_OUT-1:0]      out_spikes,
  input  logic                  w_we,
  input  logic [WA_W-1:0]       w_addr,
  input  logic signed [W_W-1:0] w_data
);

  localparam int unsigned ROW  = N_OUT * C_IN;
  localparam int unsigned S_W  = W_W + $clog2(C_IN) + 1;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_LAST, S_FIRE} state_e;
  state_e state;

  logic signed [ROW-1:0][W_W-1:0] wmem [L_IN];
  logic signed [ROW-1:0][W_W-1:0] w_row;       // registered read
  logic [C_IN-1:0]                spk_q;       // aligned with w_row
  logic                           acc_en;
  logic [PA_W-1:0]                p;

  logic signed [V_W-1:0]   vmem   [N_OUT];
  logic signed [ACC_W-1:0] acc    [N_OUT];
  logic signed [S_W-1:0]   part   [N_OUT];
  logic signed [V_W-1:0]   v_old  [N_OUT];
  logic signed [V_W-1:0]   v_new  [N_OUT];
  logic signed [V_W-1:0]   i_sat  [N_OUT];
  logic [N_OUT-1:0]        spk;

  localparam logic signed [ACC_W-1:0] IMAX = ACC_W'((2**(V_W-1)) - 1);
  localparam logic signed [ACC_W-1:0] IMIN = -ACC_W'(2**(V_W-1));

  assign in_rd_addr = p;
  assign busy       = (state != S_IDLE);

  for (genvar o = 0; o < N_OUT; o++) begin : g_out
    synapse_unit #(.N(C_IN), .W_W(W_W), .S_W(S_W)) u_syn (
      .spikes  (spk_q),
      .weights (w_row[o*C_IN +: C_IN]),
      .sum     (part[o])
    );

    // the accumulated current is saturated to the membrane range
    always_comb begin
      if (acc[o] > IMAX)      i_sat[o] = V_W'(IMAX);
      else if (acc[o] < IMIN) i_sat[o] = V_W'(IMIN);
      else                    i_sat[o] = V_W'(acc[o]);
      v_old[o] = first_ts ? '0 : vmem[o];
    end

    lif_neuron #(.V_W(V_W), .I_W(V_W), .LEAK_SHIFT(LEAK_SHIFT)) u_lif (
      .v_in  (v_old[o]),
      .i_syn (i_sat[o]),
      .v_th  (v_th),
      .v_out (v_new[o]),
      .spike (spk[o])
    );
  end

  // weight memory: load port and synchronous read
  always_ff @(posedge clk) begin
    if (w_we) wmem[int'(w_addr) / ROW][int'(w_addr) % ROW] <= w_data;
    w_row <= wmem[p];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      p          <= '0;
      spk_q      <= '0;
      acc_en     <= 1'b0;
      out_valid  <= 1'b0;
      out_spikes <= '0;
      done       <= 1'b0;
      for (int o = 0; o < N_OUT; o++) begin
        acc[o]  <= '0;
        vmem[o] <= '0;
      end
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      spk_q     <= in_rd_data;
      acc_en    <= (state == S_RUN);

      if (acc_en)
        for (int o = 0; o < N_OUT; o++) acc[o] <= acc[o] + ACC_W'(part[o]);

      unique case (state)
        S_IDLE: if (start) begin
          state <= S_RUN;
          p     <= '0;
          for (int o = 0; o < N_OUT; o++) acc[o] <= '0;
        end
        S_RUN: begin
          if (int'(p) == L_IN - 1) state <= S_LAST;
          else                     p <= p + 1'b1;
        end
        S_LAST: state <= S_FIRE;          // last partial sum accumulates
        S_FIRE: begin
          for (int o = 0; o < N_OUT; o++) vmem[o] <= v_new[o];
          out_spikes <= spk;
          out_valid  <= 1'b1;
          done       <= 1'b1;
          state      <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
