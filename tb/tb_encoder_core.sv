// tb_encoder_core: self-checking test of encoder_core in both variants
// (full: II 4, latency 24; nano: II 3, latency 4) and with 8-sample pulses,
// the shortest readout considered, via three enc_harness instances sharing a
// clock.
module tb_encoder_core;
  import ae_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  enc_harness #(.MODEL(MODEL_FULL)) h_full (.clk);
  enc_harness #(.MODEL(MODEL_NANO)) h_nano (.clk);
  enc_harness #(.MODEL(MODEL_FULL), .N_IN(8)) h_short (.clk);

  int checks, failures;

  initial begin
    repeat (50000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", h_full.checks + h_nano.checks + h_short.checks,
             h_full.failures + h_nano.failures + h_short.failures + 1);
    $finish;
  end

  initial begin
    wait (h_full.done && h_nano.done && h_short.done);
    checks   = h_full.checks + h_nano.checks + h_short.checks;
    failures = h_full.failures + h_nano.failures + h_short.failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
