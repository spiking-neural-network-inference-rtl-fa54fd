// snn_prec_run - test harness that runs one full-size snn_top built at the
// fixed-point precision ap_fixed<DW, DW-DF> through one 140-timestep
// window and compares every result beat with an integer reference model.
//
// It is instantiated once per precision by tb_snn_top_precision. Weights
// (about +-1 in the input layer, +-2 in the output layer), biases and
// per-neuron LIF parameters are random and scaled to the precision; inputs
// are sparse multiples of 0.1 like pooled spike occupancy. The reference
// computes exact sums, rounds half to even at the same points as the
// design and saturates to DW bits. Output back-pressure is random.
// `done` rises when the window has been checked; `checks`, `failures` and
// `spikes` (hidden-layer spikes seen by the reference) are then final.
module snn_prec_run #(
  parameter int DW = 16,
  parameter int DF = 12
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures,
  output int   spikes
);
  import snn_pkg::*;
  localparam int NI = 70, NH = 64, NO = 20, T = 140;
  localparam longint ONE = longint'(1) <<< DF;
  localparam longint MAXV = (longint'(1) <<< (DW - 1)) - 1;
  localparam longint MINV = -(longint'(1) <<< (DW - 1));

  logic in_valid, in_ready, out_valid, out_ready, out_last, out_decided;
  logic signed [DW-1:0] in_data [NI];
  logic [4:0] out_class;
  localparam int SW = (DW > 9) ? DW : 9;      // score width chosen by snn_top
  logic signed [SW:0] out_logit;
  logic signed [SW-1:0] out_score [NO];
  logic cfg_we;
  logic [15:0] cfg_addr;
  logic signed [DW-1:0] cfg_data;

  snn_top #(.DW(DW), .DF(DF)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 5) $display("FAIL <%0d,%0d> %s", DW, DW - DF, what);
    end
  endtask

  function automatic longint rq(longint v, int s);
    longint q, r, h;
    q = v >>> s;
    r = v - (q <<< s);
    h = longint'(1) <<< (s - 1);
    if (s > 0 && (r > h || (r == h && q[0]))) q++;
    if (q > MAXV) q = MAXV;
    if (q < MINV) q = MINV;
    return q;
  endfunction

  function automatic longint rnd(longint lo, longint hi);
    return lo + longint'($urandom_range(0, 32'(hi - lo)));
  endfunction

  longint w1 [NH][NI], b1 [NH], beta1 [NH], thr1 [NH];
  longint w2 [NO][NH], b2 [NO];
  longint x  [T][NI];
  longint exp_score [T][NO];
  int     exp_class [T];

  task automatic run_reference();
    longint u [NH], m [NO];
    foreach (u[i]) u[i] = 0;
    foreach (m[i]) m[i] = 0;
    for (int t = 0; t < T; t++) begin
      bit spk [NH];
      for (int h = 0; h < NH; h++) begin
        longint s, cur, u1;
        s = b1[h] <<< DF;
        for (int i = 0; i < NI; i++) s += w1[h][i] * x[t][i];
        cur = rq(s, DF);
        u1 = rq(beta1[h] * u[h] + (cur <<< DF), DF);
        spk[h] = (u1 >= thr1[h]);
        if (spk[h]) begin
          spikes++;
          u1 = u1 - thr1[h];
          if (u1 < MINV) u1 = MINV;
        end
        u[h] = u1;
      end
      for (int o = 0; o < NO; o++) begin
        longint s;
        s = b2[o];
        for (int h = 0; h < NH; h++) if (spk[h]) s += w2[o][h];
        m[o] = rq(longint'(fx_const(0.75, DF)) * m[o] + (rq(s, 0) <<< DF), DF);
      end
      exp_class[t] = 0;
      for (int o = 0; o < NO; o++) begin
        exp_score[t][o] = m[o];
        if (m[o] > m[exp_class[t]]) exp_class[t] = o;
      end
    end
  endtask

  task automatic cfg_write(input cfg_region_e r, input int idx, input longint val);
    @(negedge clk);
    cfg_we = 1; cfg_addr = {r, 13'(idx)}; cfg_data = DW'(val);
  endtask

  initial begin
    done = 0; checks = 0; failures = 0; spikes = 0;
    in_valid = 0; out_ready = 0; cfg_we = 0; cfg_addr = 0; cfg_data = 0;
    foreach (in_data[i]) in_data[i] = 0;
    for (int h = 0; h < NH; h++) begin
      for (int i = 0; i < NI; i++) w1[h][i] = rnd(-ONE, ONE);
      b1[h]    = rnd(-ONE / 4, ONE / 4);
      beta1[h] = rnd(ONE / 2, ONE);
      thr1[h]  = rnd(3 * ONE / 4, 3 * ONE / 2);
    end
    for (int o = 0; o < NO; o++) begin
      for (int h = 0; h < NH; h++) w2[o][h] = rnd(-2 * ONE, 2 * ONE);
      b2[o] = rnd(-ONE / 4, ONE / 4);
    end
    for (int t = 0; t < T; t++)
      for (int i = 0; i < NI; i++)
        x[t][i] = ($urandom_range(0, 99) < 16) ? longint'($urandom_range(1, 4)) * ONE / 10 : 0;
    run_reference();

    @(posedge rst_n);
    for (int h = 0; h < NH; h++) begin
      for (int i = 0; i < NI; i++) cfg_write(CFG_W1, h * NI + i, w1[h][i]);
      cfg_write(CFG_B1, h, b1[h]);
      cfg_write(CFG_BETA1, h, beta1[h]);
      cfg_write(CFG_THR1, h, thr1[h]);
    end
    for (int o = 0; o < NO; o++) begin
      for (int h = 0; h < NH; h++) cfg_write(CFG_W2, o * NH + h, w2[o][h]);
      cfg_write(CFG_B2, o, b2[o]);
    end
    @(negedge clk);
    cfg_we = 0;

    fork
      begin
        for (int n = 0; n < T; ) begin
          @(negedge clk);
          in_valid = 1;
          for (int i = 0; i < NI; i++) in_data[i] = DW'(x[n][i]);
          #1;
          if (in_ready) n++;
        end
        @(negedge clk);
        in_valid = 0;
      end
      begin
        for (int n = 0; n < T; ) begin
          @(negedge clk);
          out_ready = ($urandom_range(0, 2) != 0);
          #1;
          if (out_valid && out_ready) begin
            for (int o = 0; o < NO; o++)
              check(longint'(out_score[o]) == exp_score[n][o],
                    $sformatf("step %0d score[%0d] %0d exp %0d", n, o, out_score[o], exp_score[n][o]));
            check(int'(out_class) == exp_class[n], $sformatf("step %0d class", n));
            check(out_last == (n == T - 1), $sformatf("step %0d last flag", n));
            n++;
          end
        end
        @(negedge clk);
        out_ready = 0;
      end
    join
    check(spikes > 0, "no hidden spikes");
    done = 1;
  end
endmodule
