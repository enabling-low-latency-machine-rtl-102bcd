// tb_dense_layer: self-checking test of dense_layer, both arithmetic variants.
// A full-model and a nano-model instance get the same stimulus (random,
// pulse-shaped, and vectors that overflow the <30,17> accumulator in both
// directions) under a random pipeline enable. A two-deep model of the pipeline
// checks every output, its valid bit, and the two-stage latency.
module tb_dense_layer;
  import ae_pkg::*;
  import ae_ref_pkg::*;
  localparam int N_IN = 32, N_OUT = 2;

  logic clk = 0, rst_n = 0, en = 0, in_valid = 0;
  logic [N_IN-1:0][IN_W-1:0] x = '0;
  logic [N_OUT-1:0][N_IN-1:0][W_W-1:0] w = '0;
  logic [N_OUT-1:0][W_W-1:0] b = '0;
  logic vf, vn;
  logic [N_OUT-1:0][ACC_W-1:0] yf, yn;
  int checks = 0, failures = 0, n_ovf = 0, n_stall = 0;

  dense_layer #(.N_IN(N_IN), .N_OUT(N_OUT), .MODEL(MODEL_FULL)) dut_full (
    .clk, .rst_n, .en, .in_valid, .x, .w, .b, .out_valid(vf), .y(yf));
  dense_layer #(.N_IN(N_IN), .N_OUT(N_OUT), .MODEL(MODEL_NANO)) dut_nano (
    .clk, .rst_n, .en, .in_valid, .x, .w, .b, .out_valid(vn), .y(yn));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // pipeline model: stage valid and expected sums per output
  bit     m_v[2];
  longint m_s[2][N_OUT];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int xi[] = new[N_IN], wi[] = new[N_IN], bi;
    longint s_cur[N_OUT];
    int kind;
    m_v = '{0, 0};
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 1500; n++) begin
      @(negedge clk);
      en       = (n < 200) ? 1'b1 : ($urandom_range(0, 3) != 0);
      in_valid = ($urandom_range(0, 3) != 0);
      kind = (n % 20 == 7) ? 2 : (n % 20 == 17) ? 3 : $urandom_range(0, 4);
      for (int o = 0; o < N_OUT; o++) begin
        make_vector(kind, N_IN, xi, wi, bi);
        if (o == 0) for (int i = 0; i < N_IN; i++) x[i] = IN_W'(xi[i]);
        for (int i = 0; i < N_IN; i++) w[o][i] = W_W'(wi[i]);
        b[o] = W_W'(bi);
      end
      // expected sums use the x actually driven
      for (int o = 0; o < N_OUT; o++) begin
        for (int i = 0; i < N_IN; i++) begin
          xi[i] = int'($signed(x[i]));
          wi[i] = int'($signed(w[o][i]));
        end
        s_cur[o] = exact_sum(N_IN, xi, wi, int'($signed(b[o])));
      end
      if (!en) n_stall++;
      @(posedge clk);
      if (en) begin
        m_v[1] = m_v[0];
        m_s[1] = m_s[0];
        m_v[0] = in_valid;
        m_s[0] = s_cur;
      end
      #1;
      check(vf == m_v[1] && vn == m_v[1], "out_valid vs two-stage model");
      if (m_v[1]) begin
        for (int o = 0; o < N_OUT; o++) begin
          longint ef, en_;
          ef  = to_acc(m_s[1][o], 1'b0);
          en_ = to_acc(m_s[1][o], 1'b1);
          check(longint'($signed(yf[o])) == ef,
                $sformatf("full y[%0d]=%0d exp %0d", o, $signed(yf[o]), ef));
          check(longint'($signed(yn[o])) == en_,
                $sformatf("nano y[%0d]=%0d exp %0d", o, $signed(yn[o]), en_));
          if (acc_overflow(m_s[1][o]) && en) n_ovf++;
        end
      end
    end
    check(n_ovf > 0, "accumulator overflow never exercised");
    check(n_stall > 0, "enable never low");
    $display("overflows %0d, stall cycles %0d", n_ovf, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
