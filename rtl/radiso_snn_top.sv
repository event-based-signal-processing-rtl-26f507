// radiso_snn_top: event-driven spiking neural network processor that
// classifies a gamma-ray source from detector events.
//
// Input events name an energy channel; during one network timestep they are
// collected as a spike vector in the input buffer. The vector then passes
// through the four-layer spiking network: a 1-D convolution of 16 maps
// (kernel 8x1, 3231 positions), a 1-D convolution of 4 maps (kernel 8x16,
// 3224 positions) and a fully connected layer of 6 output neurons, all
// leaky integrate-and-fire neurons whose synaptic current is the MUX/adder
// sum of the weights of the inputs that spiked. The rate decoder counts the
// output spikes over the n_steps timesteps of a sample and reports the class
// that fired most (Am-241, Ba-133, Co-60, Cs-137, Eu-152 or background).
//
// Events come from one of three sources (src_sel): the external event port
// (SRC_EXT), the multiple-threshold analogue-to-event converter fed by pulse
// amplitude samples (SRC_A2E; threshold k drives input channel k), or the
// Poisson encoder that turns a loaded histogram into spike events
// (SRC_POISSON). With the encoder, a timestep's collect phase ends by itself
// when the encoder has scanned all channels, and ts_tick is not used.
//
// Sequencing (this design's choice): start begins a sample and clears the
// decoder; each timestep collects events until ts_tick, then runs conv1,
// conv2 and the dense layer one after another, each layer reading the
// previous layer's spike buffer. While the layers run, ev_ready is low
// (external events stall) and converter events are dropped and counted in
// drop_count. The first timestep of a sample treats all membranes as zero.
// step_done rises L1*C1 + L2*C2 + L2 + 2*KERNEL + 10 clock edges after the
// edge that samples ts_tick (67842 cycles at full size): each neuron takes
// one cycle, plus the window fill and pipeline drain of each layer.
//
// Weight load (only while idle): w_sel picks the layer; addresses are
// conv: (c*KERNEL + k)*C_in + ci, dense: (p*N_OUT + o)*C2 + ci; WSEL_RATE
// writes the encoder rate (w_data read as unsigned, 0..255) of channel w_addr.
module radiso_snn_top #(
  parameter int unsigned N_IN       = snn_pkg::N_IN,
  parameter int unsigned KERNEL     = snn_pkg::KERNEL,
  parameter int unsigned C1         = snn_pkg::C1,
  parameter int unsigned C2         = snn_pkg::C2,
  parameter int unsigned N_OUT      = snn_pkg::N_OUT,
  parameter int unsigned W_W        = snn_pkg::W_W,
  parameter int unsigned V_W        = snn_pkg::V_W,
  parameter int unsigned LEAK_SHIFT = snn_pkg::LEAK_SHIFT,
  parameter int unsigned N_THR      = snn_pkg::N_THR,
  parameter int unsigned AMP_W      = snn_pkg::AMP_W,
  parameter int unsigned CNT_W      = 16,
  parameter int unsigned WA_W       = $clog2((N_IN - 2*KERNEL + 2) * N_OUT * C2),
  parameter int unsigned CH_W       = $clog2(N_IN)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // sample control
  input  logic                         start,
  input  logic [15:0]                  n_steps,
  input  logic                         ts_tick,
  input  snn_pkg::src_e                src_sel,
  output logic                         busy,
  output logic                         step_done,
  // external event port
  input  logic                         ev_valid,
  input  logic [CH_W-1:0]              ev_chan,
  output logic                         ev_ready,
  // pulse samples for the analogue-to-event converter
  input  logic                         smp_valid,
  input  logic [AMP_W-1:0]             smp,
  input  logic [N_THR-1:0][AMP_W-1:0]  thr,
  output logic [15:0]                  drop_count,
  // neuron thresholds per layer
  input  logic signed [V_W-1:0]        v_th1,
  input  logic signed [V_W-1:0]        v_th2,
  input  logic signed [V_W-1:0]        v_th3,
  // weight load
  input  logic                         w_we,
  input  snn_pkg::wsel_e               w_sel,
  input  logic [WA_W-1:0]              w_addr,
  input  logic signed [W_W-1:0]        w_data,
  // result
  output logic                         result_valid,
  output snn_pkg::iso_class_e          result_class,
  output logic [N_OUT-1:0][CNT_W-1:0]  spike_counts
);

  localparam int unsigned L1    = N_IN - KERNEL + 1;
  localparam int unsigned L2    = L1 - KERNEL + 1;
  localparam int unsigned A0_W  = $clog2(N_IN + 1);   // conv1 read address
  localparam int unsigned A1_W  = $clog2(L1 + 1);     // conv2 read address
  localparam int unsigned A2_W  = $clog2(L2 + 1);     // dense read address
  localparam int unsigned O1_W  = $clog2(L1);
  localparam int unsigned O2_W  = $clog2(L2);
  localparam int unsigned TH_W  = (N_THR > 1) ? $clog2(N_THR) : 1;

  typedef enum logic [2:0] {S_IDLE, S_COLLECT, S_CONV1, S_CONV2, S_DENSE} state_e;
  state_e state;

  logic [15:0] ts_cnt;
  logic        first_ts;
  logic        in_clr;
  logic        l1_start, l2_start, l3_start;
  logic        l1_done, l2_done, l3_done;
  logic        l1_busy, l2_busy, l3_busy;
  logic        last_ts;
  logic        collect_end;

  // ---------------------------------------------------------------- events
  logic            a2e_valid;
  logic [TH_W-1:0] a2e_chan;
  logic            set_en;
  logic [A0_W-1:0] set_addr;

  a2e_converter #(.N_THR(N_THR), .AMP_W(AMP_W), .CH_W(TH_W)) u_a2e (
    .clk       (clk),
    .rst_n     (rst_n),
    .smp_valid (smp_valid),
    .smp       (smp),
    .thr       (thr),
    .ev_valid  (a2e_valid),
    .ev_chan   (a2e_chan)
  );

  // histogram-to-spike encoder
  logic            enc_start, enc_busy, enc_done, enc_valid;
  logic [CH_W-1:0] enc_chan;

  poisson_encoder #(.N_CH(N_IN), .R_W(8), .CH_W(CH_W)) u_enc (
    .clk      (clk),
    .rst_n    (rst_n),
    .r_we     (w_we && (w_sel == snn_pkg::WSEL_RATE)),
    .r_addr   (CH_W'(w_addr)),
    .r_data   (8'(w_data)),
    .start    (enc_start),
    .busy     (enc_busy),
    .done     (enc_done),
    .ev_valid (enc_valid),
    .ev_chan  (enc_chan),
    .ev_ready (state == S_COLLECT)
  );

  assign ev_ready = (state == S_COLLECT) && (src_sel == snn_pkg::SRC_EXT);

  always_comb begin
    unique case (src_sel)
      snn_pkg::SRC_A2E: begin
        set_en   = (state == S_COLLECT) && a2e_valid;
        set_addr = A0_W'(a2e_chan);
      end
      snn_pkg::SRC_POISSON: begin
        set_en   = (state == S_COLLECT) && enc_valid;
        set_addr = A0_W'(enc_chan);
      end
      default: begin
        set_en   = (state == S_COLLECT) && ev_valid;
        set_addr = A0_W'(ev_chan);
      end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      drop_count <= '0;
    else if ((src_sel == snn_pkg::SRC_A2E) && a2e_valid && (state != S_COLLECT)
             && (drop_count != '1))
      drop_count <= drop_count + 1'b1;
  end

  // ---------------------------------------------------------------- buffers
  logic [A0_W-1:0] b0_rd_addr;
  logic            b0_rd_data;
  logic            b1_we;
  logic [O1_W-1:0] b1_wr_addr;
  logic [C1-1:0]   b1_wr_data;
  logic [A1_W-1:0] b1_rd_addr;
  logic [C1-1:0]   b1_rd_data;
  logic            b2_we;
  logic [O2_W-1:0] b2_wr_addr;
  logic [C2-1:0]   b2_wr_data;
  logic [A2_W-1:0] b2_rd_addr;
  logic [C2-1:0]   b2_rd_data;

  spike_buffer #(.DEPTH(N_IN), .C(1), .A_W(A0_W)) u_buf_in (
    .clk      (clk),
    .clr      (in_clr),
    .wr_en    (1'b0),
    .wr_addr  ('0),
    .wr_data  ('0),
    .set_en   (set_en),
    .set_addr (set_addr),
    .set_bit  (1'b0),
    .rd_addr  (b0_rd_addr),
    .rd_data  (b0_rd_data)
  );

  spike_buffer #(.DEPTH(L1), .C(C1), .A_W(A1_W)) u_buf_1 (
    .clk      (clk),
    .clr      (1'b0),
    .wr_en    (b1_we),
    .wr_addr  (A1_W'(b1_wr_addr)),
    .wr_data  (b1_wr_data),
    .set_en   (1'b0),
    .set_addr ('0),
    .set_bit  ('0),
    .rd_addr  (b1_rd_addr),
    .rd_data  (b1_rd_data)
  );

  spike_buffer #(.DEPTH(L2), .C(C2), .A_W(A2_W)) u_buf_2 (
    .clk      (clk),
    .clr      (1'b0),
    .wr_en    (b2_we),
    .wr_addr  (A2_W'(b2_wr_addr)),
    .wr_data  (b2_wr_data),
    .set_en   (1'b0),
    .set_addr ('0),
    .set_bit  ('0),
    .rd_addr  (b2_rd_addr),
    .rd_data  (b2_rd_data)
  );

  // ---------------------------------------------------------------- layers
  localparam int unsigned W1_W = $clog2(C1 * KERNEL);
  localparam int unsigned W2_W = $clog2(C2 * KERNEL * C1);
  localparam int unsigned W3_W = $clog2(L2 * N_OUT * C2);

  logic             l3_valid;
  logic [N_OUT-1:0] l3_spikes;

  conv1d_layer #(
    .L_IN(N_IN), .C_IN(1), .K(KERNEL), .C_OUT(C1),
    .W_W(W_W), .V_W(V_W), .LEAK_SHIFT(LEAK_SHIFT)
  ) u_conv1 (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (l1_start),
    .first_ts   (first_ts),
    .v_th       (v_th1),
    .busy       (l1_busy),
    .done       (l1_done),
    .in_rd_addr (b0_rd_addr),
    .in_rd_data (b0_rd_data),
    .out_we     (b1_we),
    .out_addr   (b1_wr_addr),
    .out_data   (b1_wr_data),
    .w_we       (w_we && (w_sel == snn_pkg::WSEL_CONV1)),
    .w_addr     (W1_W'(w_addr)),
    .w_data     (w_data)
  );

  conv1d_layer #(
    .L_IN(L1), .C_IN(C1), .K(KERNEL), .C_OUT(C2),
    .W_W(W_W), .V_W(V_W), .LEAK_SHIFT(LEAK_SHIFT)
  ) u_conv2 (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (l2_start),
    .first_ts   (first_ts),
    .v_th       (v_th2),
    .busy       (l2_busy),
    .done       (l2_done),
    .in_rd_addr (b1_rd_addr),
    .in_rd_data (b1_rd_data),
    .out_we     (b2_we),
    .out_addr   (b2_wr_addr),
    .out_data   (b2_wr_data),
    .w_we       (w_we && (w_sel == snn_pkg::WSEL_CONV2)),
    .w_addr     (W2_W'(w_addr)),
    .w_data     (w_data)
  );

  dense_layer #(
    .L_IN(L2), .C_IN(C2), .N_OUT(N_OUT),
    .W_W(W_W), .V_W(V_W), .LEAK_SHIFT(LEAK_SHIFT)
  ) u_dense (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (l3_start),
    .first_ts   (first_ts),
    .v_th       (v_th3),
    .busy       (l3_busy),
    .done       (l3_done),
    .in_rd_addr (b2_rd_addr),
    .in_rd_data (b2_rd_data),
    .out_valid  (l3_valid),
    .out_spikes (l3_spikes),
    .w_we       (w_we && (w_sel == snn_pkg::WSEL_DENSE)),
    .w_addr     (W3_W'(w_addr)),
    .w_data     (w_data)
  );

  // ---------------------------------------------------------------- read-out
  logic [$clog2(N_OUT)-1:0] dec_class;

  rate_decoder #(.N_OUT(N_OUT), .CNT_W(CNT_W)) u_dec (
    .clk          (clk),
    .rst_n        (rst_n),
    .clear        (state == S_IDLE && start),
    .spk_valid    (l3_valid),
    .spk          (l3_spikes),
    .finish       (l3_done && last_ts),
    .result_valid (result_valid),
    .result_class (dec_class),
    .counts       (spike_counts)
  );

  assign result_class = snn_pkg::iso_class_e'(dec_class);

  // ---------------------------------------------------------------- control
  assign last_ts   = (ts_cnt + 16'd1 >= n_steps);
  assign collect_end = (src_sel == snn_pkg::SRC_POISSON) ? enc_done : ts_tick;
  assign l1_start  = (state == S_COLLECT) && collect_end;
  assign enc_start = in_clr && (src_sel == snn_pkg::SRC_POISSON);
  assign l2_start  = (state == S_CONV1) && l1_done;
  assign l3_start  = (state == S_CONV2) && l2_done;
  assign step_done = (state == S_DENSE) && l3_done;
  assign in_clr    = ((state == S_IDLE) && start) || (step_done && !last_ts);
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      ts_cnt   <= '0;
      first_ts <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state    <= S_COLLECT;
          ts_cnt   <= '0;
          first_ts <= 1'b1;
        end
        S_COLLECT: if (collect_end) state <= S_CONV1;
        S_CONV1:   if (l1_done) state <= S_CONV2;
        S_CONV2:   if (l2_done) state <= S_DENSE;
        S_DENSE:   if (l3_done) begin
          first_ts <= 1'b0;
          ts_cnt   <= ts_cnt + 1'b1;
          state    <= last_ts ? S_IDLE : S_COLLECT;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a layer only starts while the previous one is idle
  a_layers_in_turn: assert property (@(posedge clk) disable iff (!rst_n)
    !(l1_busy && l2_busy) && !(l2_busy && l3_busy) && !(l1_busy && l3_busy));
  // the encoder finishes its scan before the layers start
  a_enc_idle_when_processing: assert property (@(posedge clk) disable iff (!rst_n)
    (state != S_COLLECT) |-> !enc_busy);
  // an accepted external event is never lost to a clear
  a_no_clear_on_accept: assert property (@(posedge clk) disable iff (!rst_n)
    !(ev_valid && ev_ready && in_clr));

endmodule
