// tb_snn_top_precision - runs the full-size classifier at the four other
// fixed-point precisions of the reference precision sweep, ap_fixed<8,4>,
// <12,4>, <16,4> and <24,4>, one 140-timestep window each, side by side.
// Each instance of snn_prec_run loads random parameters, streams a window
// and checks every result beat bit-exactly against its own reference
// model. The default precision <10,4> is covered by tb_snn_top.
module tb_snn_top_precision;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int NP = 4;
  logic done [NP];
  int   chk [NP], fail [NP], spk [NP];

  snn_prec_run #(.DW(8),  .DF(4))  p8  (.clk, .rst_n, .done(done[0]), .checks(chk[0]), .failures(fail[0]), .spikes(spk[0]));
  snn_prec_run #(.DW(12), .DF(8))  p12 (.clk, .rst_n, .done(done[1]), .checks(chk[1]), .failures(fail[1]), .spikes(spk[1]));
  snn_prec_run #(.DW(16), .DF(12)) p16 (.clk, .rst_n, .done(done[2]), .checks(chk[2]), .failures(fail[2]), .spikes(spk[2]));
  snn_prec_run #(.DW(24), .DF(20)) p24 (.clk, .rst_n, .done(done[3]), .checks(chk[3]), .failures(fail[3]), .spikes(spk[3]));

  int checks = 0, failures = 0;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done[0] && done[1] && done[2] && done[3]);
    for (int p = 0; p < NP; p++) begin
      $display("precision %0d: checks=%0d failures=%0d hidden spikes=%0d", p, chk[p], fail[p], spk[p]);
      checks   += chk[p];
      failures += fail[p];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
