// snn_pkg - types, constants and fixed-point helpers shared by the spiking
// neural network (SNN) inference pipeline.
//
// Every value in the datapath is a two's-complement fixed-point number
// ap_fixed<W,I> in the HLS sense: W bits in total, I of them integer bits
// including the sign, so F = W - I fractional bits. The default W=10, I=4
// is the precision that the reference network keeps its full accuracy at;
// all constants below derive from these two numbers.
//
// Rounding follows the reference configuration: convergent rounding
// (round half to even, AP_RND_CONV) followed by saturation (AP_SAT) each
// time a wider intermediate is stored into a W-bit register. Products and
// sums are formed at full precision before that single rounding step; the
// width of the intermediate accumulator is this design's own choice.
package snn_pkg;

  // ---------------------------------------------------------------- precision
  localparam int unsigned FX_W = 10;            // total bits
  localparam int unsigned FX_I = 4;             // integer bits incl. sign
  localparam int unsigned FX_F = FX_W - FX_I;   // fractional bits (6)

  // ------------------------------------------------------- network geometry
  localparam int unsigned N_INPUT   = 70;   // pooled SHD channels
  localparam int unsigned N_HIDDEN  = 64;   // hidden LIF neurons
  localparam int unsigned N_CLASS   = 20;   // digits 0-9, English and German
  localparam int unsigned WINDOW_SIZE = 140;  // timesteps per sequence (1.4 s)
  localparam int unsigned RF_INPUT  = 7;    // reuse factor of the 70->64 layer
  localparam int unsigned RF_HIDDEN = 8;    // reuse factor of the 64->20 layer

  // ----------------------------------------------------------- enumerations
  typedef enum logic {
    RESET_SUBTRACT = 1'b0,   // u <- u - u_thresh after a spike
    RESET_ZERO     = 1'b1    // u <- 0 after a spike
  } reset_mode_e;

  typedef enum logic {
    RO_MEMBRANE = 1'b0,      // leaky accumulation of dense currents
    RO_SPIKE    = 1'b1       // spike counting
  } readout_mode_e;

  typedef enum logic [1:0] {
    RULE_ARGMAX          = 2'd0,  // largest count / membrane
    RULE_FIRST_TO_THRESH = 2'd1,  // first class to reach the count threshold
    RULE_THRESH_ARGMAX   = 2'd2,  // argmax, valid only if it reached the threshold
    RULE_BINARY_LOGIT    = 2'd3   // signed score difference, class 1 minus class 0
  } decision_rule_e;

  // Parameter-load regions of the top-level configuration port
  // (address = {region, index}).
  typedef enum logic [2:0] {
    CFG_W1     = 3'd0,   // input layer weights, index = out*N_INPUT + in
    CFG_B1     = 3'd1,   // input layer biases, index = out
    CFG_BETA1  = 3'd2,   // hidden LIF decay, index = neuron
    CFG_THR1   = 3'd3,   // hidden LIF threshold, index = neuron
    CFG_W2     = 3'd4,   // output layer weights, index = out*N_HIDDEN + in
    CFG_B2     = 3'd5,   // output layer biases, index = out
    CFG_BETA2  = 3'd6,   // output LIF decay (spike readout only)
    CFG_THR2   = 3'd7    // output LIF threshold (spike readout only)
  } cfg_region_e;

  localparam int unsigned CFG_IDX_W  = 13;
  localparam int unsigned CFG_ADDR_W = 3 + CFG_IDX_W;

  // --------------------------------------------------------- fixed point
  // Round a signed value with `shift` surplus fractional bits to the nearest
  // integer multiple of 2^shift, ties to even, then saturate to a signed
  // `w`-bit range. The result is returned sign-extended to 64 bits.
  function automatic logic signed [63:0] rnd_conv_sat(input logic signed [63:0] v,
                                                     input int unsigned shift,
                                                     input int unsigned w);
    logic signed [63:0] q;
    logic        [63:0] rem;
    logic        [63:0] half;
    logic signed [63:0] lo;
    logic signed [63:0] hi;
    q = v >>> shift;
    if (shift > 0) begin
      rem  = 64'(v) & ((64'd1 << shift) - 64'd1);
      half = 64'd1 << (shift - 1);
      if (rem > half || (rem == half && q[0])) q = q + 64'sd1;
    end
    hi = (64'sd1 <<< (w - 1)) - 64'sd1;
    lo = -(64'sd1 <<< (w - 1));
    if (q > hi) q = hi;
    if (q < lo) q = lo;
    return q;
  endfunction

  // Saturate an exact (already aligned) value to a signed w-bit range.
  function automatic logic signed [63:0] sat(input logic signed [63:0] v,
                                            input int unsigned w);
    return rnd_conv_sat(v, 0, w);
  endfunction

  // Fixed-point encoding of a real constant with f fractional bits,
  // used only for parameter defaults (elaboration time).
  function automatic int fx_const(input real r, input int unsigned f);
    return int'(r * real'(1 << f));
  endfunction

endpackage
