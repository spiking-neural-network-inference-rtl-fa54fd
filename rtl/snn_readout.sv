// snn_readout - turns the per-timestep output of the last network layer
// into a sequence-level decision over a fixed window of WINDOW timesteps.
//
// How it works: the readout keeps one score per class.
//   MODE = RO_MEMBRANE: the input is the dense current z of each class and
//     the score is a readout membrane  m <- round(BETA_RO * m + z), rounded
//     once (ties to even) and saturated to W bits; no threshold and no
//     reset-on-spike act on it.
//   MODE = RO_SPIKE: the input is the spike vector of a final spiking layer
//     and the score is the number of spikes each class emitted so far.
// A decision rule reads the scores:
//   RULE_ARGMAX          class with the largest score (lowest index on ties)
//   RULE_FIRST_TO_THRESH first class whose count reached COUNT_THRESH
//                        (lowest index if several reach it in the same step)
//   RULE_THRESH_ARGMAX   argmax, flagged as decided only if its count has
//                        reached COUNT_THRESH
//   RULE_BINARY_LOGIT    signed difference score[1] - score[0]
// Membrane mode supports RULE_ARGMAX and RULE_BINARY_LOGIT.
// A timestep counter clears the scores (and the first-to-threshold record)
// after the beat that completes the window has been folded in.
//
// Interface: valid/ready in and out, one register stage. Every accepted
// timestep produces one output beat in the next cycle carrying the scores
// after that timestep and the decision formed from them; `out_last` marks
// the beat of the final timestep, which carries the sequence decision.
// `out_decided` is low when a threshold rule has not fired.
//
// From the reference design: both modes, the membrane update, the four
// spike-count rules and two membrane rules, and the window-boundary clear.
// This design's choices: a result beat for every timestep (the reference
// leaves open what is emitted before the window ends), tie-breaking, the
// meaning of "no decision" for the threshold rules, the BETA_RO default
// (the reference gives no value) and COUNT_THRESH's default.
module snn_readout
  import snn_pkg::*;
#(
  parameter int unsigned    N            = snn_pkg::N_CLASS,
  parameter int unsigned    WINDOW       = snn_pkg::WINDOW_SIZE,
  parameter readout_mode_e  MODE         = RO_MEMBRANE,
  parameter decision_rule_e RULE         = RULE_ARGMAX,
  parameter int unsigned    IN_W         = snn_pkg::FX_W,
  parameter int unsigned    IN_F         = snn_pkg::FX_F,
  parameter int unsigned    W            = snn_pkg::FX_W,   // readout membrane
  parameter int unsigned    F            = snn_pkg::FX_F,
  parameter int             BETA_RO      = snn_pkg::fx_const(0.75, snn_pkg::FX_F),
  parameter int unsigned    COUNT_THRESH = 10,
  // score width: membrane or spike count, whichever is wider (signed)
  parameter int unsigned    SW           = (W > $clog2(WINDOW + 1) + 1) ? W
                                                                 : $clog2(WINDOW + 1) + 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic signed [IN_W-1:0]      in_current [N],   // membrane mode
  input  logic [N-1:0]                in_spike,         // spike mode
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic                        out_last,
  output logic                        out_decided,
  output logic [$clog2(N)-1:0]        out_class,
  output logic signed [SW:0]          out_logit,
  output logic signed [SW-1:0]        out_score [N]
);

  localparam int unsigned TW = $clog2(WINDOW + 1);
  localparam int unsigned VW = 2 * W + 4;
  localparam int unsigned CL = $clog2(N);

  logic signed [SW-1:0] score [N];       // running state
  logic signed [SW-1:0] score_nx [N];
  logic [TW-1:0]        tstep;
  logic                 last_step;
  logic                 accept;
  logic                 ftt_hit, ftt_hit_nx, out_ftt_hit;
  logic [CL-1:0]        ftt_class, ftt_class_nx, out_ftt_class;

  assign in_ready  = !out_valid || out_ready;
  assign accept    = in_valid && in_ready;
  assign last_step = (tstep == TW'(WINDOW - 1));

  // score update and first-to-threshold tracking
  always_comb begin
    for (int c = 0; c < N; c++) begin
      if (MODE == RO_MEMBRANE) begin
        logic signed [VW-1:0] v;
        logic signed [VW-1:0] z;
        logic signed [VW-1:0] m;
        z = VW'(in_current[c]);      // sign-extended
        m = VW'(score[c]);
        v = m * VW'(BETA_RO) + (z <<< (2 * F - IN_F));
        score_nx[c] = SW'(rnd_conv_sat(64'(v), F, W));
      end else begin
        score_nx[c] = score[c] + SW'(in_spike[c]);
      end
    end
    ftt_hit_nx   = ftt_hit;
    ftt_class_nx = ftt_class;
    for (int c = N - 1; c >= 0; c--) begin
      if (!ftt_hit && score_nx[c] >= SW'(COUNT_THRESH)) begin
        ftt_hit_nx   = 1'b1;
        ftt_class_nx = CL'(c);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tstep         <= '0;
      ftt_hit       <= 1'b0;
      ftt_class     <= '0;
      out_valid     <= 1'b0;
      out_last      <= 1'b0;
      out_ftt_hit   <= 1'b0;
      out_ftt_class <= '0;
      for (int c = 0; c < N; c++) begin
        score[c]     <= '0;
        out_score[c] <= '0;
      end
    end else if (accept) begin
      out_valid     <= 1'b1;
      out_last      <= last_step;
      out_score     <= score_nx;
      out_ftt_hit   <= ftt_hit_nx;
      out_ftt_class <= ftt_class_nx;
      tstep         <= last_step ? '0 : tstep + TW'(1);
      ftt_hit       <= last_step ? 1'b0 : ftt_hit_nx;
      ftt_class     <= last_step ? '0 : ftt_class_nx;
      for (int c = 0; c < N; c++) score[c] <= last_step ? '0 : score_nx[c];
    end else if (out_ready) begin
      out_valid <= 1'b0;
    end
  end

  // decision from the registered scores
  logic [CL-1:0]       amax;
  logic signed [SW-1:0] vmax;
  always_comb begin
    amax = '0;
    vmax = out_score[0];
    for (int c = 1; c < N; c++) begin
      if (out_score[c] > vmax) begin
        vmax = out_score[c];
        amax = CL'(c);
      end
    end
    out_logit = (SW + 1)'(out_score[1]) - (SW + 1)'(out_score[0]);
    unique case (RULE)
      RULE_FIRST_TO_THRESH: begin
        out_class   = out_ftt_class;
        out_decided = out_ftt_hit;
      end
      RULE_THRESH_ARGMAX: begin
        out_class   = amax;
        out_decided = (vmax >= SW'(COUNT_THRESH));
      end
      RULE_BINARY_LOGIT: begin
        out_class   = (out_logit > 0) ? CL'(1) : CL'(0);
        out_decided = 1'b1;
      end
      default: begin
        out_class   = amax;
        out_decided = 1'b1;
      end
    endcase
  end

  initial begin
    assert (N >= 2) else $error("snn_readout: need at least two classes");
    assert (MODE == RO_SPIKE || RULE == RULE_ARGMAX || RULE == RULE_BINARY_LOGIT)
      else $error("snn_readout: threshold rules need spike mode");
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid);

endmodule
