// tb_dense_layer - self-checking test of dense_layer.
//
// A small layer (6 inputs, 3 outputs, reuse factor 3) is loaded with random
// weights and biases over the full 10-bit range, then fed random input
// vectors. Each result is compared with a reference computed here with
// 64-bit integers: exact sum of bias and products, then round half to even
// and saturation, written independently of the design's helper functions.
// The test also checks the timing: the result must appear RF-1 cycles after
// the input is accepted, must be held under back-pressure, and the input
// must be refused while the layer is busy. Saturated results are counted
// so that the saturation path is known to have been exercised.
module tb_dense_layer;
  localparam int N_IN = 6, N_OUT = 3, RF = 3, W = 10, F = 6;
  localparam int NVEC = 300;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  logic signed [W-1:0] in_data [N_IN];
  logic signed [W-1:0] out_data [N_OUT];
  logic cfg_we, cfg_bias;
  logic [12:0] cfg_idx;
  logic signed [W-1:0] cfg_data;

  dense_layer #(.N_IN(N_IN), .N_OUT(N_OUT), .RF(RF)) dut (.*);

  int checks = 0, failures = 0, cycle = 0, n_sat = 0, n_stall = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int wt [N_OUT][N_IN];
  int bs [N_OUT];

  function automatic longint ref_q(longint s, int shift);
    longint p, q, r;
    p = longint'(1) << shift;
    q = s / p;                       // truncates toward zero
    if (q * p > s) q = q - 1;        // make it a floor
    r = s - q * p;
    if (2 * r > p || (2 * r == p && (q % 2 != 0))) q = q + 1;
    if (q > 511) begin q = 511; n_sat++; end
    if (q < -512) begin q = -512; n_sat++; end
    return q;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at cycle %0d", what, cycle);
    end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; cfg_we = 0; cfg_bias = 0; cfg_idx = 0; cfg_data = 0;
    foreach (in_data[i]) in_data[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // load parameters
    for (int o = 0; o < N_OUT; o++) begin
      for (int i = 0; i < N_IN; i++) begin
        wt[o][i] = int'($urandom_range(0, 1023)) - 512;
        @(negedge clk);
        cfg_we = 1; cfg_bias = 0; cfg_idx = 13'(o * N_IN + i); cfg_data = W'(wt[o][i]);
      end
      bs[o] = int'($urandom_range(0, 1023)) - 512;
      @(negedge clk);
      cfg_we = 1; cfg_bias = 1; cfg_idx = 13'(o); cfg_data = W'(bs[o]);
    end
    @(negedge clk);
    cfg_we = 0;

    for (int v = 0; v < NVEC; v++) begin
      int acc_cycle, first_valid;
      longint expv [N_OUT];
      bit stall_mode;
      stall_mode = (v % 3 == 2);
      // small inputs half of the time so that both in-range and saturated
      // results occur
      for (int i = 0; i < N_IN; i++)
        in_data[i] = (v % 2 == 0) ? W'(int'($urandom_range(0, 1023)) - 512)
                                  : W'(int'($urandom_range(0, 63)) - 32);
      for (int o = 0; o < N_OUT; o++) begin
        longint s;
        s = longint'(bs[o]) * 64;
        for (int i = 0; i < N_IN; i++) s += longint'(wt[o][i]) * longint'(in_data[i]);
        expv[o] = ref_q(s, F);
      end
      // all handshakes are sampled shortly after the falling edge, where
      // the registered state is settled until the next rising edge
      @(negedge clk);
      in_valid = 1;
      forever begin
        #1;
        if (in_ready) break;
        @(negedge clk);
      end
      acc_cycle = cycle;
      @(negedge clk);
      in_valid = 0;
      for (int i = 0; i < N_IN; i++) in_data[i] = W'($urandom);   // bus must not matter now
      first_valid = -1;
      forever begin
        out_ready = stall_mode ? ($urandom_range(0, 3) == 0) : 1'b1;
        #1;
        check(!in_ready, "input ready while busy");
        if (out_valid && first_valid < 0) first_valid = cycle;
        if (out_valid && !out_ready) n_stall++;
        if (out_valid && out_ready) break;
        @(negedge clk);
      end
      check(first_valid - acc_cycle == RF - 1, $sformatf("latency %0d", first_valid - acc_cycle));
      for (int o = 0; o < N_OUT; o++)
        check(longint'(out_data[o]) == expv[o], $sformatf("out[%0d] exp %0d got %0d", o, expv[o], out_data[o]));
      @(negedge clk);
      out_ready = 0;
    end
    check(n_sat > 0, "saturation never exercised");
    check(n_stall > 0, "back-pressure never exercised");
    $display("saturated=%0d stalled=%0d", n_sat, n_stall);

    // initiation interval with a free-flowing output: RF cycles per beat
    begin
      int t0, t1;
      @(negedge clk);
      out_ready = 1;
      in_valid  = 1;
      #1; while (!in_ready) begin @(negedge clk); #1; end
      t0 = cycle;
      @(negedge clk); #1;
      while (!in_ready) begin @(negedge clk); #1; end
      t1 = cycle;
      check(t1 - t0 == RF, $sformatf("initiation interval %0d", t1 - t0));
      @(negedge clk); in_valid = 0;
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
