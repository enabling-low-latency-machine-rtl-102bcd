// tb_relu_quant: self-checking test of relu_quant, both arithmetic variants.
// Directed values around zero, rounding ties and the saturation/wrap point,
// then random accumulator values, under a random enable; checks the
// one-stage latency and every output code.
module tb_relu_quant;
  import ae_pkg::*;
  import ae_ref_pkg::*;
  localparam int N_OUT = 2;

  logic clk = 0, rst_n = 0, en = 1, in_valid = 0;
  logic [N_OUT-1:0][ACC_W-1:0] x = '0;
  logic vf, vn;
  logic [N_OUT-1:0][RES_W-1:0] qf, qn;
  int checks = 0, failures = 0;
  int n_zero = 0, n_round_up = 0, n_sat = 0, n_wrap = 0;

  relu_quant #(.N_OUT(N_OUT), .MODEL(MODEL_FULL)) dut_full (
    .clk, .rst_n, .en, .in_valid, .x, .out_valid(vf), .q(qf));
  relu_quant #(.N_OUT(N_OUT), .MODEL(MODEL_NANO)) dut_nano (
    .clk, .rst_n, .en, .in_valid, .x, .out_valid(vn), .q(qn));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint directed[] = '{0, -1, 1, 511, 512, 513, 1023, 1024, 1535, 1536,
                         -536870912, 536870911, 1023 * 1024 + 511, 1023 * 1024 + 512,
                         1024 * 1024, 1024 * 1024 + 5000, 131072 * 3 + 700};

  initial begin
    bit     pv;
    longint pvals[N_OUT];
    longint v[N_OUT];
    pv = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      en       = (n < directed.size()) ? 1'b1 : ($urandom_range(0, 4) != 0);
      in_valid = ($urandom_range(0, 5) != 0) || (n < directed.size());
      for (int o = 0; o < N_OUT; o++) begin
        if (n < directed.size()) v[o] = (o == 0) ? directed[n] : directed[directed.size() - 1 - n];
        else case ($urandom_range(0, 3))
          0: v[o] = longint'($urandom_range(0, 32'h3fffffff)) - (64'sd1 <<< 29);
          1: v[o] = longint'($urandom_range(0, 1 << 21));
          2: v[o] = longint'($urandom_range(0, 4000)) * 1024 + 512;
          default: v[o] = longint'($urandom_range(0, 1 << 24));
        endcase
        x[o] = ACC_W'(v[o]);
      end
      @(posedge clk);
      if (en) begin
        pv = in_valid;
        pvals = v;
      end
      #1;
      check(vf == pv && vn == pv, "out_valid latency");
      if (pv && en) begin
        for (int o = 0; o < N_OUT; o++) begin
          int ef, en_;
          ef  = relu_q(pvals[o], 1'b0);
          en_ = relu_q(pvals[o], 1'b1);
          check(int'(qf[o]) == ef, $sformatf("full q(%0d)=%0d exp %0d", pvals[o], qf[o], ef));
          check(int'(qn[o]) == en_, $sformatf("nano q(%0d)=%0d exp %0d", pvals[o], qn[o], en_));
          if (pvals[o] <= 0) n_zero++;
          if (pvals[o] > 0 && pvals[o] % 1024 >= 512 && ef != 1023) n_round_up++;
          if (pvals[o] >= 1023 * 1024 + 512) n_sat++;
          if (pvals[o] >= 1024 * 1024) n_wrap++;
        end
      end
    end
    check(n_zero > 0 && n_round_up > 0 && n_sat > 0 && n_wrap > 0, "a mechanism was never exercised");
    $display("relu zero %0d, round up %0d, saturate %0d, wrap %0d", n_zero, n_round_up, n_sat, n_wrap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
