// tb_ae_frontend_nano: end-to-end test of the eight-channel compression front end
// built with the nano model: truncation, wrap-around, II 3, latency 4.
//
// 1. Loads a weight set through the weight-store port.
// 2. Sends isolated pulses on every channel and checks the write-to-read
//    latency (LATENCY+2 edges through the two FIFOs).
// 3. Streams pulses on all channels at once with the consumer always ready and
//    checks that each channel sustains one pulse every II cycles.
// 4. Random traffic with consumer back-pressure, including pulses that
//    overflow the accumulator; every result is checked in order against the
//    bit-exact reference.
// 5. Reloads a second weight set and repeats step 4.
// 6. Loads extreme weights so that full-scale pulses overflow the accumulator.
// Counted mechanisms (each must occur): initiation-interval throttling, output
// stall, input FIFO full, accumulator overflow, latent saturation/wrap,
// round-up, ReLU clamping to zero, weight reload.
module tb_ae_frontend_nano;
  import ae_pkg::*;
  import ae_ref_pkg::*;

  localparam model_e MODEL = MODEL_NANO;
  localparam int N_CH = 8, N_IN = 32, N_OUT = 2;
  localparam int II = default_ii(MODEL), LAT = default_latency(MODEL);
  localparam bit NANO = (MODEL == MODEL_NANO);
  localparam int N_PARAM = N_OUT * N_IN + N_OUT;
  localparam int AW = $clog2(N_PARAM);
  localparam int N_RANDOM = 150;   // pulses per channel per random phase

  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [AW-1:0] wr_addr = '0;
  logic [W_W-1:0] wr_data = '0;
  logic [N_CH-1:0] in_valid = '0, in_ready, out_valid, out_ready = '0;
  logic [N_CH-1:0][N_IN-1:0][IN_W-1:0] in_data = '0;
  logic [N_CH-1:0][N_OUT-1:0][RES_W-1:0] out_data;

  ae_frontend #(.MODEL(MODEL)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_throttle = 0, n_stall = 0, n_in_full = 0, n_acc_ovf = 0, n_sat = 0;
  int n_round = 0, n_zero = 0, n_reload = 0;
  int wi[] = new[N_PARAM - N_OUT], bi[] = new[N_OUT];
  logic [N_OUT-1:0][15:0] exp_q[N_CH][$];
  longint t_wr[N_CH][$];
  longint cyc = 0;
  bit check_latency = 0;
  int n_acc[N_CH];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) cyc <= cyc + 1;

  // Scoreboard.
  always @(posedge clk) begin
    if (rst_n) begin
      for (int c = 0; c < N_CH; c++) begin
        if (in_valid[c] && !in_ready[c]) n_in_full++;
        if (in_valid[c] && in_ready[c]) begin
          int xi[] = new[N_IN];
          logic [N_OUT-1:0][15:0] q;
          for (int i = 0; i < N_IN; i++) xi[i] = int'($signed(in_data[c][i]));
          for (int o = 0; o < N_OUT; o++) begin
            int wr[] = new[N_IN];
            longint s;
            for (int i = 0; i < N_IN; i++) wr[i] = wi[o * N_IN + i];
            s = exact_sum(N_IN, xi, wr, bi[o]);
            q[o] = 16'(relu_q(to_acc(s, NANO), NANO));
            if (acc_overflow(s)) n_acc_ovf++;
            if (to_acc(s, NANO) <= 0) n_zero++;
            if (to_acc(s, NANO) >= 1023 * 1024 + 512) n_sat++;
            if (!NANO && to_acc(s, NANO) > 0 && to_acc(s, NANO) % 1024 >= 512) n_round++;
            if (NANO && to_acc(s, NANO) > 0 && to_acc(s, NANO) % 1024 != 0) n_round++;
          end
          exp_q[c].push_back(q);
          t_wr[c].push_back(cyc);
          n_acc[c]++;
        end
        if (out_valid[c] && out_ready[c]) begin
          logic [N_OUT-1:0][15:0] q;
          longint t;
          if (exp_q[c].size() == 0) check(0, $sformatf("ch%0d unexpected result", c));
          else begin
            q = exp_q[c].pop_front();
            t = t_wr[c].pop_front();
            for (int o = 0; o < N_OUT; o++)
              check(16'(out_data[c][o]) == q[o],
                    $sformatf("ch%0d out[%0d]=%0d exp %0d", c, o, out_data[c][o], q[o]));
            if (check_latency)
              check(cyc - t == LAT + 2, $sformatf("ch%0d latency %0d", c, cyc - t));
          end
        end
      end
    end
  end

  // Mechanisms inside the channels.
  for (genvar c = 0; c < N_CH; c++) begin : g_mon
    always @(posedge clk) begin
      if (rst_n && dut.g_ch[c].u_ch.u_core.in_valid && !dut.g_ch[c].u_ch.u_core.in_ready
          && dut.g_ch[c].u_ch.u_core.gap != 0) n_throttle++;
      if (rst_n && dut.g_ch[c].u_ch.u_core.out_valid && !dut.g_ch[c].u_ch.u_core.out_ready)
        n_stall++;
    end
  end

  task automatic load_weights(input int seed_kind);
    int xi[] = new[N_IN], wrow[] = new[N_IN], bo;
    for (int o = 0; o < N_OUT; o++) begin
      make_vector(seed_kind, N_IN, xi, wrow, bo);
      for (int i = 0; i < N_IN; i++) wi[o * N_IN + i] = wrow[i];
      bi[o] = bo;
    end
    for (int k = 0; k < N_PARAM; k++) begin
      wr_en   <= 1;
      wr_addr <= AW'(k);
      wr_data <= W_W'((k < N_OUT * N_IN) ? wi[k] : bi[k - N_OUT * N_IN]);
      @(posedge clk);
    end
    wr_en <= 0;
    @(posedge clk);
  endtask

  task automatic drain();
    out_ready <= '1;
    in_valid  <= '0;
    for (int c = 0; c < N_CH; c++) wait (exp_q[c].size() == 0);
    repeat (4) @(posedge clk);
  endtask

  function automatic int pulse_kind(input int n);
    return (n % 11 == 3) ? 2 : (n % 11 == 8) ? 3 : (n % 11 == 5) ? 0 : 1;
  endfunction

  task automatic random_phase(input int n_pulses);
    int sent[N_CH];
    bit all_sent;
    sent = '{default: 0};
    do begin
      for (int c = 0; c < N_CH; c++) begin
        int xi[] = new[N_IN], wd[] = new[N_IN], bd;
        out_ready[c] <= ($urandom_range(0, 2) != 0);
        if (sent[c] < n_pulses) begin
          in_valid[c] <= ($urandom_range(0, 3) != 0);
          make_vector(pulse_kind(sent[c]), N_IN, xi, wd, bd);
          for (int i = 0; i < N_IN; i++) in_data[c][i] <= IN_W'(xi[i]);
        end else in_valid[c] <= 0;
      end
      @(posedge clk);
      all_sent = 1;
      for (int c = 0; c < N_CH; c++) begin
        if (in_valid[c] && in_ready[c]) sent[c]++;
        if (sent[c] < n_pulses) all_sent = 0;
      end
    end while (!all_sent);
    drain();
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int xi[] = new[N_IN], wd[] = new[N_IN], bd;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    load_weights(1);
    out_ready <= '1;

    // 2. isolated pulses: latency
    check_latency = 1;
    for (int n = 0; n < 6; n++) begin
      for (int c = 0; c < N_CH; c++) begin
        make_vector(1, N_IN, xi, wd, bd);
        for (int i = 0; i < N_IN; i++) in_data[c][i] <= IN_W'(xi[i]);
      end
      in_valid <= '1;
      @(posedge clk);
      in_valid <= '0;
      repeat (LAT + 6) @(posedge clk);
    end
    check_latency = 0;

    // 3. sustained rate: every channel one pulse per II cycles
    in_valid <= '1;
    repeat (40) @(posedge clk);           // fill the FIFOs
    n_acc = '{default: 0};
    for (int k = 0; k < 400; k++) begin
      for (int c = 0; c < N_CH; c++) begin
        make_vector(1, N_IN, xi, wd, bd);
        for (int i = 0; i < N_IN; i++) in_data[c][i] <= IN_W'(xi[i]);
      end
      @(posedge clk);
    end
    for (int c = 0; c < N_CH; c++)
      check(n_acc[c] >= 400 / II - 1 && n_acc[c] <= 400 / II + 1,
            $sformatf("ch%0d took %0d pulses in 400 cycles, expected %0d", c, n_acc[c], 400 / II));
    drain();

    // 4. random traffic
    random_phase(N_RANDOM);

    // 5. new weights, random traffic again
    load_weights(0);
    n_reload++;
    random_phase(N_RANDOM);

    // 6. extreme weights (all -512): full-scale pulses overflow the accumulator
    load_weights(2);
    n_reload++;
    random_phase(30);

    check(n_throttle > 0, "II throttling never happened");
    check(n_stall > 0, "output stall never happened");
    check(n_in_full > 0, "input FIFO never full");
    check(n_acc_ovf > 0, "accumulator overflow never happened");
    check(n_sat > 0, "latent saturation/wrap never happened");
    check(n_round > 0, "rounding/truncation never mattered");
    check(n_zero > 0, "ReLU never clamped");
    check(n_reload > 0, "weights never reloaded");
    $display("II throttles %0d, output stalls %0d, input FIFO full %0d", n_throttle, n_stall, n_in_full);
    $display("accumulator overflows %0d, latent saturations %0d, rounded %0d, ReLU zeros %0d, reloads %0d",
             n_acc_ovf, n_sat, n_round, n_zero, n_reload);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
