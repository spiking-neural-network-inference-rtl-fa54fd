// dense_layer - fixed-point fully connected layer y = W*x + b for one
// timestep, with multipliers reused over RF cycles.
//
// How it works: the layer holds N_OUT*N_IN weights and N_OUT biases in
// on-chip storage written through a small configuration port. A timestep
// arrives as one beat carrying all N_IN inputs. The inputs are split into RF
// groups of K = N_IN/RF consecutive inputs; in cycle c every output neuron
// multiplies group c by its matching weights (N_OUT*K multipliers in total,
// i.e. N_IN*N_OUT/RF, the "reuse factor" sizing of the reference Resource
// strategy) and adds the K products to its accumulator. The bias starts the
// accumulator in cycle 0. After the last group the full-precision sums are
// rounded (ties to even) and saturated to the output format.
//
// Interface: valid/ready streams on both sides. `in_ready` is high while
// the layer is idle; the beat accepted in cycle 0 is processed in cycles
// 0..RF-1 (cycle 0 reads the input bus directly, later cycles a copy).
// `out_valid` rises combinationally in cycle RF-1 and holds, with stable
// data, until `out_ready`; the layer then accepts a new beat in the next
// cycle, so the initiation interval is RF cycles (RF >= 2).
//
// Configuration: `cfg_we` with `cfg_bias`=0 writes weight cfg_idx =
// out*N_IN + in, with `cfg_bias`=1 writes bias cfg_idx = out. Writes are
// meant to happen between inferences.
//
// From the reference design: layer sizes, reuse factors, RF-fold sharing of
// multipliers, convergent rounding and saturation. This design's choices:
// the grouping of inputs into cycles, full-precision accumulation, the bias
// format (same as the weights) and the configuration port (the reference
// compiles weights into the design as constants).
module dense_layer #(
  parameter int unsigned N_IN  = 70,
  parameter int unsigned N_OUT = 64,
  parameter int unsigned RF    = 7,
  parameter int unsigned IN_W  = snn_pkg::FX_W,
  parameter int unsigned IN_F  = snn_pkg::FX_F,
  parameter int unsigned WT_W  = snn_pkg::FX_W,   // weight and bias width
  parameter int unsigned WT_F  = snn_pkg::FX_F,
  parameter int unsigned OUT_W = snn_pkg::FX_W,
  parameter int unsigned OUT_F = snn_pkg::FX_F,
  parameter int unsigned IDX_W = snn_pkg::CFG_IDX_W
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // input stream: one timestep
  input  logic                           in_valid,
  output logic                           in_ready,
  input  logic signed [IN_W-1:0]         in_data  [N_IN],
  // output stream: dense currents
  output logic                           out_valid,
  input  logic                           out_ready,
  output logic signed [OUT_W-1:0]        out_data [N_OUT],
  // parameter load
  input  logic                           cfg_we,
  input  logic                           cfg_bias,
  input  logic [IDX_W-1:0]               cfg_idx,
  input  logic signed [WT_W-1:0]         cfg_data
);
  import snn_pkg::*;

  localparam int unsigned K      = N_IN / RF;                 // inputs per cycle
  localparam int unsigned PROD_W = IN_W + WT_W;
  localparam int unsigned ACC_W  = PROD_W + $clog2(N_IN + 1) + 1;
  localparam int unsigned SHIFT  = IN_F + WT_F - OUT_F;       // rounding shift
  localparam int unsigned CW     = (RF > 1) ? $clog2(RF) : 1;

  // ------------------------------------------------------------ storage
  logic signed [WT_W-1:0] weight [N_OUT][N_IN];
  logic signed [WT_W-1:0] bias   [N_OUT];

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      if (cfg_bias) bias[int'(cfg_idx) % N_OUT] <= cfg_data;
      else          weight[(int'(cfg_idx) / N_IN) % N_OUT][int'(cfg_idx) % N_IN] <= cfg_data;
    end
  end

  // ------------------------------------------------------------ control
  logic                   busy;
  logic [CW-1:0]          cyc;
  logic signed [IN_W-1:0] x_reg [N_IN];
  logic signed [ACC_W-1:0] acc  [N_OUT];
  logic signed [ACC_W-1:0] sum  [N_OUT];
  logic                   last_cyc;

  assign in_ready  = !busy;
  assign last_cyc  = busy && (cyc == CW'(RF - 1));
  assign out_valid = last_cyc;

  // one group of K products per output, plus the running sum
  always_comb begin
    for (int o = 0; o < N_OUT; o++) begin
      logic signed [ACC_W-1:0]  s;
      logic signed [ACC_W-1:0]  b;
      logic signed [PROD_W-1:0] p;
      b = ACC_W'(bias[o]);              // sign-extended
      b = b <<< IN_F;                   // align to the product format
      s = (busy && cyc != '0) ? acc[o] : b;
      for (int k = 0; k < K; k++) begin
        int unsigned i;
        logic signed [IN_W-1:0] x;
        i = int'(cyc) * K + k;
        x = busy ? x_reg[i] : in_data[i];
        p = weight[o][i] * x;           // full-precision product
        s = s + ACC_W'(p);
      end
      sum[o] = s;
      out_data[o] = OUT_W'(rnd_conv_sat(64'(sum[o]), SHIFT, OUT_W));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      cyc  <= '0;
    end else if (!busy) begin
      if (in_valid) begin
        busy <= 1'b1;
        cyc  <= CW'(1);
      end
    end else if (!last_cyc) begin
      cyc <= cyc + CW'(1);
    end else if (out_ready) begin
      busy <= 1'b0;
      cyc  <= '0;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) x_reg <= in_data;
    if ((!busy && in_valid) || (busy && !last_cyc))
      for (int o = 0; o < N_OUT; o++) acc[o] <= sum[o];
  end

  // ------------------------------------------------------------ checks
  initial begin
    assert (RF >= 2 && N_IN % RF == 0)
      else $error("dense_layer: RF must be >= 2 and divide N_IN");
  end

  // an offered result is held until it is taken
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid);

endmodule
