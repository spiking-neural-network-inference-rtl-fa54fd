// tb_lif_layer - self-checking test of lif_layer.
//
// Four small layers (4 neurons, window of 6 timesteps) see the same random
// input currents: a LIF layer with subtractive reset whose per-neuron beta
// and threshold are loaded with random values, a LIF layer with zero reset
// and scalar constant parameters (beta 0.75, threshold 1.0), which must
// ignore the parameter writes aimed at the first layer, an IF layer
// (beta = 1) with per-neuron registers that also receives those writes but
// uses only the thresholds, and a LIF layer whose beta (12 bits, 10
// fractional) and threshold (12 bits, 8 fractional) have formats of their
// own, loaded with its own random values. A reference model written here
// with plain integers (exact beta*u + x, round half to even, saturation to
// 10 bits, threshold test, reset) predicts every spike vector and every
// membrane value; at
// the last timestep of each window the state must be cleared. Random
// back-pressure on the output checks that results are held. The test
// counts spikes, resets of each kind, saturations and window clears with
// non-zero state, and fails if any of them never happened.
module tb_lif_layer;
  import snn_pkg::*;
  localparam int N = 4, WIN = 6, W = 10, F = 6, NSTEP = 600;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_ready;
  logic signed [W-1:0] in_data [N];
  logic in_ready [4], out_valid [4];
  logic [N-1:0] out_spike [4];
  logic signed [W-1:0] mem0 [N], mem1 [N], mem2 [N], mem3 [N];
  logic cfg_we, cfg_thr;
  logic [12:0] cfg_idx;
  logic signed [W-1:0] cfg_data;
  logic signed [11:0] cfg_data3;
  localparam int BF3 = 10, TF3 = 8;   // beta and threshold fractions of dut3

  lif_layer #(.N(N), .WINDOW(WIN), .RESET_MODE(RESET_SUBTRACT)) dut0 (
    .clk, .rst_n, .in_valid, .in_ready(in_ready[0]), .in_data,
    .out_valid(out_valid[0]), .out_ready, .out_spike(out_spike[0]), .mem(mem0),
    .cfg_we, .cfg_thr, .cfg_idx, .cfg_data);
  lif_layer #(.N(N), .WINDOW(WIN), .RESET_MODE(RESET_ZERO), .PER_NEURON(1'b0)) dut1 (
    .clk, .rst_n, .in_valid, .in_ready(in_ready[1]), .in_data,
    .out_valid(out_valid[1]), .out_ready, .out_spike(out_spike[1]), .mem(mem1),
    .cfg_we, .cfg_thr, .cfg_idx, .cfg_data);
  lif_layer #(.N(N), .WINDOW(WIN), .IS_IF(1'b1)) dut2 (
    .clk, .rst_n, .in_valid, .in_ready(in_ready[2]), .in_data,
    .out_valid(out_valid[2]), .out_ready, .out_spike(out_spike[2]), .mem(mem2),
    .cfg_we, .cfg_thr, .cfg_idx, .cfg_data);
  lif_layer #(.N(N), .WINDOW(WIN), .BETA_W(12), .BETA_F(BF3), .THR_W(12), .THR_F(TF3)) dut3 (
    .clk, .rst_n, .in_valid, .in_ready(in_ready[3]), .in_data,
    .out_valid(out_valid[3]), .out_ready, .out_spike(out_spike[3]), .mem(mem3),
    .cfg_we, .cfg_thr, .cfg_idx, .cfg_data(cfg_data3));

  int checks = 0, failures = 0, cycle = 0;
  int n_spike = 0, n_sub = 0, n_zero = 0, n_sat = 0, n_clear = 0, n_stall = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at cycle %0d", what, cycle);
    end
  endtask

  // round half to even of v / 2^s, then clamp to 10 bits
  function automatic int rq(longint v, int s = 6);
    longint q, r;
    q = v >>> s;
    r = v - (q <<< s);
    if (s > 0 && (r > (longint'(1) <<< (s - 1)) || (r == (longint'(1) <<< (s - 1)) && q[0]))) q++;
    if (q > 511) begin q = 511; n_sat++; end
    if (q < -512) begin q = -512; n_sat++; end
    return int'(q);
  endfunction

  function automatic int clamp(int v);
    return (v > 511) ? 511 : (v < -512) ? -512 : v;
  endfunction

  int beta [4][N], thr [4][N], u [4][N];

  initial begin
    in_valid = 0; out_ready = 0; cfg_we = 0; cfg_thr = 0; cfg_idx = 0; cfg_data = 0; cfg_data3 = 0;
    foreach (in_data[i]) in_data[i] = 0;
    for (int d = 0; d < 4; d++)
      for (int n = 0; n < N; n++) begin
        beta[d][n] = (d == 2) ? 64 : 48;
        thr[d][n]  = 64;
        u[d][n]    = 0;
      end
    // dut3 resets to beta 0.75 and threshold 1.0 in its own formats
    for (int n = 0; n < N; n++) begin beta[3][n] = 768; thr[3][n] = 256; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < N; n++) begin
      beta[0][n] = $urandom_range(0, 64);
      thr[0][n]  = $urandom_range(16, 200);
      thr[2][n]  = thr[0][n];             // the IF layer takes the same writes
      beta[3][n] = $urandom_range(0, 1024);
      thr[3][n]  = $urandom_range(64, 800);
      @(negedge clk); cfg_we = 1; cfg_thr = 0; cfg_idx = 13'(n); cfg_data = W'(beta[0][n]);
      cfg_data3 = 12'(beta[3][n]);
      @(negedge clk); cfg_we = 1; cfg_thr = 1; cfg_idx = 13'(n); cfg_data = W'(thr[0][n]);
      cfg_data3 = 12'(thr[3][n]);
    end
    @(negedge clk); cfg_we = 0;

    for (int t = 0; t < NSTEP; t++) begin
      int x [N];
      bit last;
      bit [N-1:0] es [4];
      last = (t % WIN == WIN - 1);
      for (int n = 0; n < N; n++) begin
        // mostly moderate currents, with occasional large ones
        x[n] = ($urandom_range(0, 9) == 0) ? int'($urandom_range(0, 1023)) - 512
                                           : int'($urandom_range(0, 160)) - 50;
        in_data[n] = W'(x[n]);
      end
      // reference model
      for (int d = 0; d < 4; d++)
        for (int n = 0; n < N; n++) begin
          int u1;
          if (d == 2)      u1 = clamp(u[d][n] + x[n]);
          else if (d == 3) u1 = rq(longint'(beta[d][n]) * u[d][n] + (longint'(x[n]) <<< BF3), BF3);
          else             u1 = rq(longint'(beta[d][n]) * u[d][n] + (longint'(x[n]) <<< 6));
          // dut3 compares and subtracts at the threshold's 8 fractional bits
          es[d][n] = (d == 3) ? ((u1 <<< (TF3 - F)) >= thr[d][n]) : (u1 >= thr[d][n]);
          if (es[d][n]) begin
            n_spike++;
            if (d == 1)      begin u1 = 0; n_zero++; end
            else if (d == 3) begin u1 = rq(longint'(u1 <<< (TF3 - F)) - thr[d][n], TF3 - F); n_sub++; end
            else             begin u1 = clamp(u1 - thr[d][n]); n_sub++; end
          end
          if (last) begin
            if (u1 != 0) n_clear++;
            u1 = 0;
          end
          u[d][n] = u1;
        end
      // offer the beat
      @(negedge clk);
      in_valid = 1;
      #1;
      while (!in_ready[0]) begin
        check(in_ready[1] == in_ready[0] && in_ready[2] == in_ready[0] && in_ready[3] == in_ready[0],
              "ready mismatch");
        @(negedge clk); #1;
      end
      @(negedge clk);
      in_valid = 0;
      foreach (in_data[i]) in_data[i] = W'($urandom);
      // wait for the result, with random back-pressure
      forever begin
        out_ready = ($urandom_range(0, 2) != 0);
        #1;
        check(out_valid[0] && out_valid[1] && out_valid[2] && out_valid[3], "result not held");
        for (int d = 0; d < 4; d++)
          check(out_spike[d] == es[d], $sformatf("dut%0d step %0d spikes %b exp %b", d, t, out_spike[d], es[d]));
        for (int n = 0; n < N; n++) begin
          check(int'(mem0[n]) == u[0][n], $sformatf("dut0 step %0d mem[%0d] %0d exp %0d", t, n, mem0[n], u[0][n]));
          check(int'(mem1[n]) == u[1][n], $sformatf("dut1 step %0d mem[%0d] %0d exp %0d", t, n, mem1[n], u[1][n]));
          check(int'(mem2[n]) == u[2][n], $sformatf("dut2 step %0d mem[%0d] %0d exp %0d", t, n, mem2[n], u[2][n]));
          check(int'(mem3[n]) == u[3][n], $sformatf("dut3 step %0d mem[%0d] %0d exp %0d", t, n, mem3[n], u[3][n]));
        end
        if (out_ready) break;
        n_stall++;
        @(negedge clk);
      end
      @(negedge clk);
      out_ready = 0;
      #1;
      check(!out_valid[0], "output not emptied");
    end
    $display("spikes=%0d subtract=%0d zero=%0d saturations=%0d clears=%0d stalls=%0d",
             n_spike, n_sub, n_zero, n_sat, n_clear, n_stall);
    check(n_spike > 0 && n_sub > 0 && n_zero > 0, "a reset kind never happened");
    check(n_sat > 0, "saturation never happened");
    check(n_clear > 0, "window clear never mattered");
    check(n_stall > 0, "back-pressure never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
