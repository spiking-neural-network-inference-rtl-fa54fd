// tb_snn_top_spike - end-to-end test of snn_top in spike-count readout
// mode, where a second layer of LIF neurons feeds a readout that counts
// spikes and decides by first-to-threshold.
//
// The network is shrunk (14 inputs, 16 hidden neurons, 4 classes, window
// of 12 timesteps, reuse factors 7 and 8, count threshold 8) so that many
// windows run quickly. Random weights, biases and per-neuron parameters of
// both LIF layers are loaded through the configuration port; a reference
// model written here with plain integers predicts every result beat:
// spike counts, the decided flag and the first class to reach the
// threshold. Inputs arrive with random gaps and the output sees random
// back-pressure; inputs are denser than real pooled occupancy so that the
// small network spikes often. The test counts output-layer spikes, windows that decided
// and windows that did not, and fails if any never happened.
module tb_snn_top_spike;
  import snn_pkg::*;
  localparam int NI = 14, NH = 16, NO = 4, T = 12, NWIN = 30, W = 10, CT = 8;
  localparam int NSTEP = NWIN * T;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, out_last, out_decided;
  logic signed [W-1:0] in_data [NI];
  logic [1:0] out_class;
  logic signed [W:0] out_logit;
  logic signed [W-1:0] out_score [NO];
  logic cfg_we;
  logic [15:0] cfg_addr;
  logic signed [W-1:0] cfg_data;

  snn_top #(.N_IN(NI), .N_HID(NH), .N_OUT(NO), .T_WINDOW(T), .RF_IN(7), .RF_HID(8),
            .READOUT_MODE(RO_SPIKE), .RULE(RULE_FIRST_TO_THRESH), .COUNT_THRESH(CT)) dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
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

  // ------------------------------------------------------------ reference
  int w1 [NH][NI], b1 [NH], beta1 [NH], thr1 [NH];
  int w2 [NO][NH], b2 [NO], beta2 [NO], thr2 [NO];
  int x  [NSTEP][NI];
  int exp_score [NSTEP][NO];
  int exp_class [NSTEP];
  bit exp_dec [NSTEP];
  int n_ref_ospike = 0, n_win_dec = 0, n_win_undec = 0;
  int n_ref_sat_dense = 0, n_ref_spike = 0, n_ref_clear = 0;

  // round half to even of v / 2^s, then clamp to 10 bits; counts saturation
  function automatic int rq(longint v, int s, ref int nsat);
    longint q, r, h;
    q = v >>> s;
    r = v - (q <<< s);
    h = longint'(1) <<< (s - 1);
    if (s > 0 && (r > h || (r == h && q[0]))) q++;
    if (q > 511)  begin q = 511;  nsat++; end
    if (q < -512) begin q = -512; nsat++; end
    return int'(q);
  endfunction

  task automatic run_reference();
    int u [NH], u2 [NO], cnt [NO], dummy, hcls;
    bit hit;
    hit = 0; hcls = 0;
    foreach (u2[i]) u2[i] = 0;
    foreach (cnt[i]) cnt[i] = 0;
    dummy = 0;
    foreach (u[i]) u[i] = 0;
    for (int t = 0; t < NSTEP; t++) begin
      int cur [NH], z [NO];
      bit spk [NH];
      bit last;
      last = (t % T == T - 1);
      for (int h = 0; h < NH; h++) begin
        longint s;
        int u1;
        s = longint'(b1[h]) <<< 6;
        for (int i = 0; i < NI; i++) s += longint'(w1[h][i]) * x[t][i];
        cur[h] = rq(s, 6, n_ref_sat_dense);
        u1 = rq(longint'(beta1[h]) * u[h] + (longint'(cur[h]) <<< 6), 6, dummy);
        spk[h] = (u1 >= thr1[h]);
        if (spk[h]) begin
          n_ref_spike++;
          u1 = u1 - thr1[h];
          if (u1 < -512) u1 = -512;
        end
        if (last && u1 != 0) n_ref_clear++;
        u[h] = last ? 0 : u1;
      end
      for (int o = 0; o < NO; o++) begin
        longint s;
        s = longint'(b2[o]);
        for (int h = 0; h < NH; h++) if (spk[h]) s += w2[o][h];
        z[o] = rq(s, 0, n_ref_sat_dense);
        begin
          int v1;
          v1 = rq(longint'(beta2[o]) * u2[o] + (longint'(z[o]) <<< 6), 6, dummy);
          if (v1 >= thr2[o]) begin
            cnt[o]++;
            n_ref_ospike++;
            v1 = v1 - thr2[o];
            if (v1 < -512) v1 = -512;
          end
          u2[o] = last ? 0 : v1;
        end
      end
      for (int o = 0; o < NO; o++)
        if (!hit && cnt[o] >= CT) begin hit = 1; hcls = o; end
      for (int o = 0; o < NO; o++) exp_score[t][o] = cnt[o];
      exp_class[t] = hcls;
      exp_dec[t]   = hit;
      if (last) begin
        if (hit) n_win_dec++; else n_win_undec++;
        foreach (cnt[i]) cnt[i] = 0;
        hit = 0; hcls = 0;
      end
    end
  endtask

  task automatic cfg_write(input cfg_region_e r, input int idx, input int val);
    @(negedge clk);
    cfg_we = 1; cfg_addr = {r, 13'(idx)}; cfg_data = W'(val);
  endtask

  // ------------------------------------------------------------ activity
  int n_back = 0, n_int_stall = 0, n_overlap = 0, n_hid_spikes = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && !out_ready) n_back++;
    if (dut.d1_valid && !dut.d1_ready) n_int_stall++;
    if (dut.u_dense_in.busy && dut.u_dense_out.busy) n_overlap++;
    if (dut.h_valid && dut.h_ready) n_hid_spikes += $countones(dut.h_spike);
  end

  // ------------------------------------------------------------ stimulus
  int acc_cycles [NSTEP];
  int first_out_cycle = -1;
  int n_in = 0, n_out = 0;

  initial begin
    in_valid = 0; out_ready = 0; cfg_we = 0; cfg_addr = 0; cfg_data = 0;
    foreach (in_data[i]) in_data[i] = 0;
    for (int h = 0; h < NH; h++) begin
      for (int i = 0; i < NI; i++) w1[h][i] = int'($urandom_range(0, 128)) - 64;
      b1[h]    = int'($urandom_range(0, 40)) - 8;
      beta1[h] = int'($urandom_range(32, 64));
      thr1[h]  = int'($urandom_range(48, 96));
    end
    for (int o = 0; o < NO; o++) begin
      for (int h = 0; h < NH; h++) w2[o][h] = int'($urandom_range(0, 256)) - 128;
      b2[o] = int'($urandom_range(0, 32)) - 24;
      beta2[o] = int'($urandom_range(32, 64));
      thr2[o]  = int'($urandom_range(32, 128));
    end
    for (int t = 0; t < NSTEP; t++)
      for (int i = 0; i < NI; i++)
        x[t][i] = ($urandom_range(0, 99) < ((t / T) % 2 == 0 ? 50 : 8)) ? 6 * int'($urandom_range(1, 6)) : 0;
    run_reference();

    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int h = 0; h < NH; h++) begin
      for (int i = 0; i < NI; i++) cfg_write(CFG_W1, h * NI + i, w1[h][i]);
      cfg_write(CFG_B1, h, b1[h]);
      cfg_write(CFG_BETA1, h, beta1[h]);
      cfg_write(CFG_THR1, h, thr1[h]);
    end
    for (int o = 0; o < NO; o++) begin
      for (int h = 0; h < NH; h++) cfg_write(CFG_W2, o * NH + h, w2[o][h]);
      cfg_write(CFG_B2, o, b2[o]);
      cfg_write(CFG_BETA2, o, beta2[o]);
      cfg_write(CFG_THR2, o, thr2[o]);
    end
    @(negedge clk);
    cfg_we = 0;

    fork
      // producer: window 1 without gaps, then random gaps
      begin
        while (n_in < NSTEP) begin
          @(negedge clk);
          in_valid = (n_in < T) ? 1'b1 : ($urandom_range(0, 3) != 0);
          for (int i = 0; i < NI; i++) in_data[i] = W'(x[n_in][i]);
          #1;
          if (in_valid && in_ready) begin
            acc_cycles[n_in] = cycle;
            n_in++;
          end
        end
        @(negedge clk);
        in_valid = 0;
      end
      // consumer: window 1 always ready, then random back-pressure
      begin
        while (n_out < NSTEP) begin
          @(negedge clk);
          out_ready = (n_out < T) ? 1'b1 : ($urandom_range(0, 2) != 0);
          #1;
          if (out_valid && first_out_cycle < 0) first_out_cycle = cycle;
          if (out_valid && out_ready) begin
            for (int o = 0; o < NO; o++)
              check(int'(out_score[o]) == exp_score[n_out][o],
                    $sformatf("step %0d score[%0d] %0d exp %0d", n_out, o, out_score[o], exp_score[n_out][o]));
            check(out_decided == exp_dec[n_out], $sformatf("step %0d decided", n_out));
            if (exp_dec[n_out])
              check(int'(out_class) == exp_class[n_out],
                    $sformatf("step %0d class %0d exp %0d", n_out, out_class, exp_class[n_out]));
            check(out_last == (n_out % T == T - 1), $sformatf("step %0d last flag", n_out));
            n_out++;
          end
        end
        @(negedge clk);
        out_ready = 0;
      end
    join

    // timing of window 1
    check(first_out_cycle - acc_cycles[0] == 7 + 8 + 1,   // one more stage: output LIF
          $sformatf("latency %0d", first_out_cycle - acc_cycles[0]));
    for (int t = 10; t < T; t++)
      check(acc_cycles[t] - acc_cycles[t - 1] == RF_HIDDEN,
            $sformatf("interval at step %0d: %0d", t, acc_cycles[t] - acc_cycles[t - 1]));
    $display("latency=%0d interval=%0d window1 cycles=%0d",
             first_out_cycle - acc_cycles[0], acc_cycles[T - 1] - acc_cycles[T - 2],
             acc_cycles[T - 1] - acc_cycles[0]);

    // mechanisms
    $display("hidden spikes=%0d (ref %0d)", n_hid_spikes, n_ref_spike);
    $display("window clears=%0d back-pressure=%0d internal stalls=%0d overlap=%0d",
             n_ref_clear, n_back, n_int_stall, n_overlap);
    check(n_hid_spikes == n_ref_spike && n_hid_spikes > 0, "hidden spikes");
    $display("output spikes=%0d decided windows=%0d undecided windows=%0d",
             n_ref_ospike, n_win_dec, n_win_undec);
    check(n_ref_ospike > 0, "output layer never spiked");
    check(n_win_dec > 0 && n_win_undec > 0, "threshold rule not exercised both ways");
    check(n_ref_clear > 0, "window clear never mattered");
    check(n_back > 0, "back-pressure never happened");
    check(n_int_stall > 0, "internal stall never happened");
    check(n_overlap > 0, "layers never overlapped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
