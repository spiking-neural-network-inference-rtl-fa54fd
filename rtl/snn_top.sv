// snn_top - clock-driven spiking neural network classifier for spoken-digit
// spike trains (70 pooled input channels, 20 classes), one timestep per
// input beat.
//
// How it works: each input beat carries the 70 averaged spike-occupancy
// features of one 10 ms time bin. The beat flows through
//     dense 70->64 (RF_IN cycles) -> 64 LIF neurons (1 register stage)
//     -> dense 64->20 (RF_HID cycles) -> readout (1 register stage)
// with valid/ready handshakes between the stages, so the two dense layers
// work on consecutive timesteps at the same time. The LIF layer and the
// readout are stateful; each counts timesteps itself and clears its state
// after the WINDOW-th (140th) beat, so every 140 beats form one independent
// sequence. With READOUT_MODE = RO_MEMBRANE (the default, the configuration
// the reference network is deployed in) the readout integrates the 20 dense
// currents as leaky membranes and the class with the largest final
// membrane wins. With RO_SPIKE a second layer of 20 LIF neurons sits
// before the readout, which then counts spikes.
//
// Timing (defaults): a beat accepted in cycle 0 produces its result beat in
// cycle RF_IN + RF_HID = 15. The slower dense layer sets the initiation
// interval, RF_HID = 8 cycles per timestep, so a 140-step sequence takes
// about 140*8 + 15 cycles. Back-pressure on `out_ready` stalls the pipeline.
//
// Interface: in_* is the timestep stream; out_* is one result beat per
// timestep, with `out_last` on the sequence decision. Weights, biases and
// neuron parameters are loaded through cfg_we/cfg_addr/cfg_data, address =
// {cfg_region_e, index} (see snn_pkg), between sequences. The LIF
// parameters reset to beta = 0.75, u_thresh = 1.0.
//
// Precision: every stored value is ap_fixed<DW, DW-DF>; the default 10/6 is
// ap_fixed<10,4>. The reference study also ran 8, 12, 16 and 24 bits with
// four integer bits, which DW = 8/12/16/24, DF = DW-4 reproduce.
//
// Layer sizes, reuse factors, window, precision and neuron behaviour follow
// the reference network; the handshakes, the configuration port and the
// per-timestep result beat are this design's own. The membrane output of
// the hidden LIF layer (h_mem) is left unused. It exists for tests
// and debugging, and costs no logic: the membrane registers are needed
// for the neuron update anyway.
module snn_top
  import snn_pkg::*;
#(
  parameter int unsigned    N_IN         = snn_pkg::N_INPUT,
  parameter int unsigned    N_HID        = snn_pkg::N_HIDDEN,
  parameter int unsigned    N_OUT        = snn_pkg::N_CLASS,
  parameter int unsigned    T_WINDOW     = snn_pkg::WINDOW_SIZE,
  parameter int unsigned    RF_IN        = snn_pkg::RF_INPUT,
  parameter int unsigned    RF_HID       = snn_pkg::RF_HIDDEN,
  parameter readout_mode_e  READOUT_MODE = RO_MEMBRANE,
  parameter decision_rule_e RULE         = RULE_ARGMAX,
  parameter int unsigned    DW           = snn_pkg::FX_W,   // data width, ap_fixed<DW,DW-DF>
  parameter int unsigned    DF           = snn_pkg::FX_F,   // fractional bits
  parameter int             BETA_RO      = snn_pkg::fx_const(0.75, DF),
  parameter int unsigned    COUNT_THRESH = 10,
  parameter int unsigned    SW           = (DW > $clog2(T_WINDOW + 1) + 1) ? DW
                                                               : $clog2(T_WINDOW + 1) + 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // timestep input stream
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic signed [DW-1:0]     in_data [N_IN],
  // per-timestep result stream
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic                       out_last,
  output logic                       out_decided,
  output logic [$clog2(N_OUT)-1:0]   out_class,
  output logic signed [SW:0]         out_logit,
  output logic signed [SW-1:0]       out_score [N_OUT],
  // parameter load
  input  logic                       cfg_we,
  input  logic [CFG_ADDR_W-1:0]      cfg_addr,
  input  logic signed [DW-1:0]     cfg_data
);

  cfg_region_e          cfg_region;
  logic [CFG_IDX_W-1:0] cfg_idx;
  assign cfg_region = cfg_region_e'(cfg_addr[CFG_ADDR_W-1 -: 3]);
  assign cfg_idx    = cfg_addr[CFG_IDX_W-1:0];

  // ---------------------------------------------------------- input layer
  logic                   d1_valid, d1_ready;
  logic signed [DW-1:0] d1_data [N_HID];

  dense_layer #(.N_IN(N_IN), .N_OUT(N_HID), .RF(RF_IN), .IN_W(DW), .IN_F(DF),
                .WT_W(DW), .WT_F(DF), .OUT_W(DW), .OUT_F(DF)) u_dense_in (
    .clk, .rst_n,
    .in_valid (in_valid), .in_ready (in_ready), .in_data (in_data),
    .out_valid(d1_valid), .out_ready(d1_ready), .out_data(d1_data),
    .cfg_we   (cfg_we && (cfg_region == CFG_W1 || cfg_region == CFG_B1)),
    .cfg_bias (cfg_region == CFG_B1),
    .cfg_idx  (cfg_idx), .cfg_data(cfg_data)
  );

  // ---------------------------------------------------------- hidden LIF
  logic                   h_valid, h_ready;
  logic [N_HID-1:0]       h_spike;
  logic signed [DW-1:0] h_mem [N_HID];

  lif_layer #(.N(N_HID), .WINDOW(T_WINDOW), .IN_W(DW), .IN_F(DF), .W(DW), .F(DF),
              .BETA_INIT(fx_const(0.75, DF)), .THR_INIT(fx_const(1.0, DF))) u_lif_hidden (
    .clk, .rst_n,
    .in_valid (d1_valid), .in_ready (d1_ready), .in_data (d1_data),
    .out_valid(h_valid),  .out_ready(h_ready),  .out_spike(h_spike), .mem(h_mem),
    .cfg_we   (cfg_we && (cfg_region == CFG_BETA1 || cfg_region == CFG_THR1)),
    .cfg_thr  (cfg_region == CFG_THR1),
    .cfg_idx  (cfg_idx), .cfg_data(cfg_data)
  );

  // spikes enter the second dense layer as the fixed-point values 0 and 1
  logic signed [1:0] h_spike_fx [N_HID];
  always_comb
    for (int n = 0; n < N_HID; n++) h_spike_fx[n] = {1'b0, h_spike[n]};

  // ---------------------------------------------------------- output layer
  logic                   d2_valid, d2_ready;
  logic signed [DW-1:0] d2_data [N_OUT];

  dense_layer #(.N_IN(N_HID), .N_OUT(N_OUT), .RF(RF_HID), .IN_W(2), .IN_F(0),
                .WT_W(DW), .WT_F(DF), .OUT_W(DW), .OUT_F(DF)) u_dense_out (
    .clk, .rst_n,
    .in_valid (h_valid),  .in_ready (h_ready),  .in_data (h_spike_fx),
    .out_valid(d2_valid), .out_ready(d2_ready), .out_data(d2_data),
    .cfg_we   (cfg_we && (cfg_region == CFG_W2 || cfg_region == CFG_B2)),
    .cfg_bias (cfg_region == CFG_B2),
    .cfg_idx  (cfg_idx), .cfg_data(cfg_data)
  );

  // ---------------------------------------------------------- readout
  logic             r_valid, r_ready;
  logic [N_OUT-1:0] r_spike;

  if (READOUT_MODE == RO_SPIKE) begin : g_spike_out
    logic signed [DW-1:0] o_mem [N_OUT];
    lif_layer #(.N(N_OUT), .WINDOW(T_WINDOW), .IN_W(DW), .IN_F(DF), .W(DW), .F(DF),
                .BETA_INIT(fx_const(0.75, DF)), .THR_INIT(fx_const(1.0, DF))) u_lif_out (
      .clk, .rst_n,
      .in_valid (d2_valid), .in_ready (d2_ready), .in_data (d2_data),
      .out_valid(r_valid),  .out_ready(r_ready),  .out_spike(r_spike), .mem(o_mem),
      .cfg_we   (cfg_we && (cfg_region == CFG_BETA2 || cfg_region == CFG_THR2)),
      .cfg_thr  (cfg_region == CFG_THR2),
      .cfg_idx  (cfg_idx), .cfg_data(cfg_data)
    );
  end else begin : g_membrane_out
    assign r_valid  = d2_valid;
    assign d2_ready = r_ready;
    assign r_spike  = '0;
  end

  snn_readout #(
    .N(N_OUT), .WINDOW(T_WINDOW), .MODE(READOUT_MODE), .RULE(RULE),
    .IN_W(DW), .IN_F(DF), .W(DW), .F(DF),
    .BETA_RO(BETA_RO), .COUNT_THRESH(COUNT_THRESH), .SW(SW)
  ) u_readout (
    .clk, .rst_n,
    .in_valid  (r_valid), .in_ready(r_ready),
    .in_current(d2_data), .in_spike(r_spike),
    .out_valid, .out_ready, .out_last, .out_decided,
    .out_class, .out_logit, .out_score
  );

endmodule
