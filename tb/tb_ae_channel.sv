// tb_ae_channel: self-checking test of one encoder channel (input FIFO,
// encoder core, output FIFO) at its default configuration (full model).
// Checks the write-to-read latency of isolated pulses (LATENCY+2), the
// sustained rate of one pulse per II cycles, and every result under random
// producer/consumer traffic against the bit-exact reference.
module tb_ae_channel;
  import ae_pkg::*;
  import ae_ref_pkg::*;
  localparam int N_IN = 32, N_OUT = 2;
  localparam int II = default_ii(MODEL_FULL), LAT = default_latency(MODEL_FULL);

  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [N_IN-1:0][IN_W-1:0] in_data = '0;
  logic [N_OUT-1:0][N_IN-1:0][W_W-1:0] w;
  logic [N_OUT-1:0][W_W-1:0] b;
  logic [N_OUT-1:0][RES_W-1:0] out_data;

  ae_channel dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_acc = 0, n_full = 0, n_stall = 0;
  int wi[] = new[N_OUT * N_IN], bi[] = new[N_OUT];
  logic [N_OUT-1:0][15:0] exp_q[$];
  longint t_wr[$];
  longint cyc = 0;
  bit check_latency = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    if (rst_n) begin
      if (in_valid && !in_ready) n_full++;
      if (out_valid && !out_ready) n_stall++;
      if (in_valid && in_ready) begin
        int xi[] = new[N_IN];
        logic [N_OUT-1:0][15:0] q;
        for (int i = 0; i < N_IN; i++) xi[i] = int'($signed(in_data[i]));
        for (int o = 0; o < N_OUT; o++) q[o] = 16'(expect_q(N_IN, o, xi, wi, bi, 1'b0));
        exp_q.push_back(q);
        t_wr.push_back(cyc);
        n_acc++;
      end
      if (out_valid && out_ready) begin
        logic [N_OUT-1:0][15:0] q;
        longint t;
        if (exp_q.size() == 0) check(0, "unexpected result");
        else begin
          q = exp_q.pop_front();
          t = t_wr.pop_front();
          for (int o = 0; o < N_OUT; o++)
            check(16'(out_data[o]) == q[o], $sformatf("out[%0d]=%0d exp %0d", o, out_data[o], q[o]));
          if (check_latency) check(cyc - t == LAT + 2, $sformatf("latency %0d", cyc - t));
        end
      end
    end
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic new_pulse(input int kind);
    int xi[] = new[N_IN], wd[] = new[N_IN], bd;
    make_vector(kind, N_IN, xi, wd, bd);
    for (int i = 0; i < N_IN; i++) in_data[i] <= IN_W'(xi[i]);
  endtask

  initial begin
    int xi[] = new[N_IN], wrow[] = new[N_IN], bo;
    for (int o = 0; o < N_OUT; o++) begin
      make_vector(1, N_IN, xi, wrow, bo);
      for (int i = 0; i < N_IN; i++) begin wi[o * N_IN + i] = wrow[i]; w[o][i] = W_W'(wrow[i]); end
      bi[o] = bo; b[o] = W_W'(bo);
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    out_ready <= 1;
    @(posedge clk);
    // isolated pulses
    check_latency = 1;
    for (int n = 0; n < 8; n++) begin
      new_pulse(1);
      in_valid <= 1;
      @(posedge clk);
      in_valid <= 0;
      repeat (LAT + 5) @(posedge clk);
    end
    check_latency = 0;
    // sustained rate
    in_valid <= 1;
    repeat (20) begin new_pulse(1); @(posedge clk); end
    n_acc = 0;
    repeat (400) begin new_pulse(1); @(posedge clk); end
    check(n_acc >= 400 / II - 1 && n_acc <= 400 / II + 1, $sformatf("rate: %0d pulses in 400 cycles", n_acc));
    // random traffic
    for (int n = 0; n < 400; n++) begin
      in_valid  <= ($urandom_range(0, 3) != 0);
      out_ready <= ($urandom_range(0, 3) == 0);
      new_pulse($urandom_range(0, 4));
      @(posedge clk);
    end
    in_valid <= 0;
    out_ready <= 1;
    wait (exp_q.size() == 0);
    repeat (LAT + 4) @(posedge clk);
    check(!out_valid, "spurious result");
    check(n_full > 0 && n_stall > 0, "back-pressure never exercised");
    $display("input FIFO full %0d, output not taken %0d", n_full, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
