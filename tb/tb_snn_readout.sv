// tb_snn_readout - self-checking test of snn_readout in all its modes.
//
// Six readouts (4 classes, window of 5 timesteps) see the same random
// per-timestep inputs: membrane mode with argmax (decay 0.75) and with the
// binary logit (decay 1.0), and spike mode with argmax, first-to-threshold,
// threshold-then-argmax and binary logit (count threshold 3). A reference
// model written here tracks membranes (exact product, round half to even,
// saturation), spike counts and the first class to reach the threshold,
// and predicts every result beat: scores, class, decided flag, logit and
// the end-of-window marker. State must be cleared after each window. The
// test counts argmax ties, undecided windows, decided windows and membrane
// saturation, and fails if any never occurred.
module tb_snn_readout;
  import snn_pkg::*;
  localparam int N = 4, WIN = 5, W = 10, F = 6, NSTEP = 1000, CT = 3;
  localparam int ND = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_ready;
  logic signed [W-1:0] in_current [N];
  logic [N-1:0] in_spike;
  logic in_ready [ND], out_valid [ND], out_last [ND], out_decided [ND];
  logic [1:0] out_class [ND];
  logic signed [W:0] out_logit [ND];
  logic signed [W-1:0] out_score [ND][N];

  localparam readout_mode_e  MODES [ND] = '{RO_MEMBRANE, RO_MEMBRANE, RO_SPIKE, RO_SPIKE, RO_SPIKE, RO_SPIKE};
  localparam decision_rule_e RULES [ND] = '{RULE_ARGMAX, RULE_BINARY_LOGIT, RULE_ARGMAX,
                                            RULE_FIRST_TO_THRESH, RULE_THRESH_ARGMAX, RULE_BINARY_LOGIT};
  localparam int BETAS [ND] = '{48, 64, 48, 48, 48, 48};

  for (genvar d = 0; d < ND; d++) begin : g_dut
    snn_readout #(.N(N), .WINDOW(WIN), .MODE(MODES[d]), .RULE(RULES[d]),
                  .BETA_RO(BETAS[d]), .COUNT_THRESH(CT)) dut (
      .clk, .rst_n, .in_valid, .in_ready(in_ready[d]), .in_current, .in_spike,
      .out_valid(out_valid[d]), .out_ready, .out_last(out_last[d]),
      .out_decided(out_decided[d]), .out_class(out_class[d]),
      .out_logit(out_logit[d]), .out_score(out_score[d]));
  end

  int checks = 0, failures = 0, cycle = 0;
  int n_tie = 0, n_undecided = 0, n_decided = 0, n_sat = 0, n_last = 0;
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

  function automatic int rq(longint v);
    longint q, r;
    q = v >>> 6;
    r = v - (q <<< 6);
    if (r > 32 || (r == 32 && q[0])) q++;
    if (q > 511) begin q = 511; n_sat++; end
    if (q < -512) begin q = -512; n_sat++; end
    return int'(q);
  endfunction

  int sc [ND][N];       // running scores per readout
  bit hit;              // first-to-threshold record (spike counts are shared)
  int hit_cls;

  initial begin
    in_valid = 0; out_ready = 0; in_spike = '0;
    foreach (in_current[i]) in_current[i] = 0;
    foreach (sc[d, c]) sc[d][c] = 0;
    hit = 0; hit_cls = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    for (int t = 0; t < NSTEP; t++) begin
      int z [N];
      bit last;
      int es [ND][N];
      bit ehit; int ehcls;
      last = (t % WIN == WIN - 1);
      for (int c = 0; c < N; c++) begin
        z[c] = ($urandom_range(0, 7) == 0) ? int'($urandom_range(0, 1023)) - 512
                                           : int'($urandom_range(0, 200)) - 100;
        in_current[c] = W'(z[c]);
        in_spike[c] = ($urandom_range(0, 2) == 0);
      end
      for (int d = 0; d < ND; d++)
        for (int c = 0; c < N; c++)
          if (MODES[d] == RO_MEMBRANE) sc[d][c] = rq(longint'(BETAS[d]) * sc[d][c] + (longint'(z[c]) <<< 6));
          else                         sc[d][c] = sc[d][c] + int'(in_spike[c]);
      if (!hit)
        for (int c = 0; c < N; c++)
          if (!hit && sc[2][c] >= CT) begin hit = 1; hit_cls = c; end
      es = sc; ehit = hit; ehcls = hit_cls;
      if (last) begin
        foreach (sc[d, c]) sc[d][c] = 0;
        hit = 0; hit_cls = 0;
      end

      @(negedge clk);
      in_valid = 1;
      #1;
      while (!in_ready[0]) begin @(negedge clk); #1; end
      @(negedge clk);
      in_valid = 0;
      forever begin
        out_ready = ($urandom_range(0, 3) != 0);
        #1;
        for (int d = 0; d < ND; d++) begin
          int amax, vmax, ties, logit;
          bit dec; int cls;
          amax = 0; vmax = es[d][0]; ties = 0;
          for (int c = 1; c < N; c++)
            if (es[d][c] > vmax) begin vmax = es[d][c]; amax = c; end
          for (int c = 0; c < N; c++) if (es[d][c] == vmax) ties++;
          if (ties > 1) n_tie++;
          logit = es[d][1] - es[d][0];
          case (RULES[d])
            RULE_FIRST_TO_THRESH: begin dec = ehit; cls = ehcls; end
            RULE_THRESH_ARGMAX:   begin dec = (vmax >= CT); cls = amax; end
            RULE_BINARY_LOGIT:    begin dec = 1; cls = (logit > 0) ? 1 : 0; end
            default:              begin dec = 1; cls = amax; end
          endcase
          if (last && RULES[d] != RULE_ARGMAX && RULES[d] != RULE_BINARY_LOGIT) begin
            if (dec) n_decided++; else n_undecided++;
          end
          check(out_valid[d], "result missing");
          check(out_last[d] == last, $sformatf("dut%0d step %0d last flag", d, t));
          for (int c = 0; c < N; c++)
            check(int'(out_score[d][c]) == es[d][c],
                  $sformatf("dut%0d step %0d score[%0d] %0d exp %0d", d, t, c, out_score[d][c], es[d][c]));
          check(out_decided[d] == dec, $sformatf("dut%0d step %0d decided", d, t));
          if (dec) check(int'(out_class[d]) == cls,
                         $sformatf("dut%0d step %0d class %0d exp %0d", d, t, out_class[d], cls));
          if (RULES[d] == RULE_BINARY_LOGIT)
            check(int'(out_logit[d]) == logit, $sformatf("dut%0d step %0d logit", d, t));
        end
        if (out_ready) break;
        @(negedge clk);
      end
      if (last) n_last++;
      @(negedge clk);
      out_ready = 0;
    end
    check(n_last == NSTEP / WIN, "window count");
    $display("ties=%0d decided=%0d undecided=%0d saturations=%0d windows=%0d",
             n_tie, n_decided, n_undecided, n_sat, n_last);
    check(n_tie > 0, "no argmax tie");
    check(n_decided > 0 && n_undecided > 0, "threshold rules not exercised both ways");
    check(n_sat > 0, "membrane saturation never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
