// lif_layer - a layer of N leaky integrate-and-fire (LIF) neurons, or of
// non-leaky integrate-and-fire (IF) neurons when IS_IF is set (beta = 1),
// advanced by one timestep per input beat.
//
// How it works: each neuron keeps a W-bit membrane potential u. For every
// accepted beat of input currents x the layer computes, for all N neurons
// in parallel,
//     u' = round(beta * u + x)                  (LIF)     u' = sat(u + x) (IF)
//     spike = (u' >= u_thresh)
//     u  <= spike ? (RESET_MODE == subtract ? sat(u' - u_thresh) : 0) : u'
// with beta and u_thresh held per neuron (PER_NEURON=1, registers) or shared
// by all neurons as compile-time constants (PER_NEURON=0). Membrane (W/F),
// beta (BETA_W/BETA_F) and threshold (THR_W/THR_F) each have their own
// fixed-point format; by default all three share the membrane format. The
// product beta*u is exact; the sum is rounded once to the membrane format
// (ties to even) and saturated. The threshold test is exact, done at the
// larger of the two fraction widths, and a subtractive reset is rounded
// back to the membrane format in the same way.
// A timestep counter counts beats; the beat that completes a window of
// WINDOW timesteps still updates and spikes normally, and then the membrane
// array and the counter are cleared so that the next sequence starts from
// zero state.
//
// Interface: valid/ready in and out, one register stage. A beat is accepted
// when the output register is empty or being emptied; the spike vector (and
// `mem`, the membrane values after reset) appear in the next cycle with
// `out_valid` and stay until `out_ready`. beta and u_thresh are BETA_INIT
// and THR_INIT (raw fixed-point integers with BETA_F and THR_F fractional
// bits); the cfg data port is as wide as the wider of the two formats; with
// PER_NEURON=1 these are reset values that may be rewritten per neuron
// through the cfg port (`cfg_thr`=0: beta, 1: threshold), with PER_NEURON=0
// the cfg port is ignored.
//
// From the reference design: the update equations, spike on u' >= u_thresh,
// the two reset modes, scalar or per-neuron beta and threshold, the per-layer
// timestep counter and the clearing of state at the window boundary, and
// the initial values beta = 0.75, u_thresh = 1.0, and separately set
// precisions for membrane, decay and threshold. This design's choices: the
// single rounding point after beta*u + x, the rounding of a subtractive
// reset when the threshold has more fraction bits than the membrane, and
// the register stage.
module lif_layer
  import snn_pkg::*;
#(
  parameter int unsigned N          = 64,
  parameter int unsigned WINDOW     = snn_pkg::WINDOW_SIZE,
  parameter int unsigned IN_W       = snn_pkg::FX_W,
  parameter int unsigned IN_F       = snn_pkg::FX_F,
  parameter int unsigned W          = snn_pkg::FX_W,   // membrane potential
  parameter int unsigned F          = snn_pkg::FX_F,
  parameter int unsigned BETA_W     = W,               // decay beta
  parameter int unsigned BETA_F     = F,
  parameter int unsigned THR_W      = W,               // threshold u_thresh
  parameter int unsigned THR_F      = F,
  parameter bit          IS_IF      = 1'b0,
  parameter reset_mode_e RESET_MODE = RESET_SUBTRACT,
  parameter bit          PER_NEURON = 1'b1,   // 0: scalar beta/threshold constants
  parameter int          BETA_INIT  = snn_pkg::fx_const(0.75, BETA_F),
  parameter int          THR_INIT   = snn_pkg::fx_const(1.0,  THR_F),
  parameter int unsigned IDX_W      = snn_pkg::CFG_IDX_W,
  parameter int unsigned CFG_W      = (BETA_W > THR_W) ? BETA_W : THR_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic signed [IN_W-1:0] in_data [N],
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [N-1:0]          out_spike,
  output logic signed [W-1:0]   mem [N],
  input  logic                  cfg_we,
  input  logic                  cfg_thr,
  input  logic [IDX_W-1:0]      cfg_idx,
  input  logic signed [CFG_W-1:0] cfg_data
);

  localparam int unsigned TW = $clog2(WINDOW + 1);
  localparam int unsigned GF = (F > THR_F) ? F : THR_F;  // threshold compare
  localparam int unsigned XS = F + BETA_F - IN_F;        // aligns x to beta*u
  localparam int unsigned VA = W + BETA_W + 2;
  localparam int unsigned VB = IN_W + XS + 2;
  localparam int unsigned VW = (VA > VB ? VA : VB) + 2;  // exact beta*u + x
  localparam int unsigned CW = W + THR_W + GF + 2;       // exact u' - u_thresh
  localparam int unsigned NW = (N > 1) ? $clog2(N) : 1;  // neuron index width

  logic signed [BETA_W-1:0] beta [N];
  logic signed [THR_W-1:0]  thr  [N];
  logic [TW-1:0]       tstep;
  logic                accept;
  logic                last_step;
  logic signed [W-1:0] u_next [N];
  logic [N-1:0]        spike;

  assign in_ready  = !out_valid || out_ready;
  assign accept    = in_valid && in_ready;
  assign last_step = (tstep == TW'(WINDOW - 1));

  // per-neuron update
  always_comb begin
    for (int n = 0; n < N; n++) begin
      logic signed [VW-1:0] v;
      logic signed [VW-1:0] x;
      logic signed [VW-1:0] uu;
      logic signed [W-1:0]  u1;
      logic signed [CW-1:0] ua, ta;
      x = VW'(in_data[n]);            // sign-extended
      uu = VW'(mem[n]);
      if (IS_IF) begin
        v  = (uu <<< BETA_F) + (x <<< XS);
      end else begin
        v  = uu * VW'(beta[n]);                         // F + BETA_F fractional bits
        v  = v + (x <<< XS);
      end
      u1 = W'(rnd_conv_sat(64'(v), BETA_F, W));
      // u' and u_thresh aligned to GF fractional bits
      ua = CW'(u1) <<< (GF - F);
      ta = CW'(thr[n]) <<< (GF - THR_F);
      spike[n] = (ua >= ta);
      if (!spike[n])                     u_next[n] = u1;
      else if (RESET_MODE == RESET_ZERO) u_next[n] = '0;
      else u_next[n] = W'(rnd_conv_sat(64'(ua - ta), GF - F, W));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_spike <= '0;
      tstep     <= '0;
      for (int n = 0; n < N; n++) mem[n] <= '0;
    end else begin
      if (accept) begin
        out_valid <= 1'b1;
        out_spike <= spike;
        tstep     <= last_step ? '0 : tstep + TW'(1);
        for (int n = 0; n < N; n++) mem[n] <= last_step ? '0 : u_next[n];
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

  // neuron parameters: per-neuron registers, or shared compile-time constants
  if (PER_NEURON) begin : g_per_neuron
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int n = 0; n < N; n++) begin
          beta[n] <= BETA_W'(BETA_INIT);
          thr[n]  <= THR_W'(THR_INIT);
        end
      end else if (cfg_we && cfg_idx < IDX_W'(N)) begin
        if (cfg_thr) thr[NW'(cfg_idx)]  <= THR_W'(cfg_data);
        else         beta[NW'(cfg_idx)] <= BETA_W'(cfg_data);
      end
    end
  end else begin : g_scalar
    always_comb
      for (int n = 0; n < N; n++) begin
        beta[n] = BETA_W'(BETA_INIT);
        thr[n]  = THR_W'(THR_INIT);
      end
  end

  initial assert (F + BETA_F >= IN_F) else $error("lif_layer: IN_F too large");

endmodule
