// enc_harness: drives and checks one encoder_core of a given variant and
// pulse length (N_IN samples).
// Phase 1 streams pulses with the consumer always ready and checks that pulses
// are taken exactly every II cycles and results come out exactly LATENCY edges
// after their pulse. Phase 2 randomises the producer and consumer, so the
// pipeline stalls, and checks every result in order. Results: checks,
// failures, done, and counts of II throttling and output stalls.
module enc_harness
  import ae_pkg::*;
  import ae_ref_pkg::*;
#(
  parameter model_e MODEL = MODEL_FULL,
  parameter int     N_PULSES = 300,
  parameter int     N_IN     = 32
) (
  input logic clk
);
  localparam int N_OUT = 2;
  localparam int II = default_ii(MODEL), LAT = default_latency(MODEL);
  localparam bit NANO = (MODEL == MODEL_NANO);

  logic rst_n = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [N_IN-1:0][IN_W-1:0] in_data = '0;
  logic [N_OUT-1:0][N_IN-1:0][W_W-1:0] w;
  logic [N_OUT-1:0][W_W-1:0] b;
  logic [N_OUT-1:0][RES_W-1:0] out_data;

  int checks = 0, failures = 0, n_throttle = 0, n_stall = 0;
  bit done = 0;

  encoder_core #(.N_IN(N_IN), .N_OUT(N_OUT), .MODEL(MODEL)) dut (.*);

  int wi[] = new[N_OUT * N_IN], bi[] = new[N_OUT];
  logic [N_OUT-1:0][15:0] exp_q[$];
  longint t_acc[$];
  longint cyc = 0;
  longint last_acc = -1;
  bit phase2 = 0;

  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL[%s/%0d]: %s", MODEL.name(), N_IN, what); end
  endtask

  // Scoreboard at each edge.
  always @(posedge clk) begin
    if (rst_n) begin
      if (in_valid && !in_ready && dut.gap != 0) n_throttle++;
      if (out_valid && !out_ready) n_stall++;
      if (in_valid && in_ready) begin
        int xi[] = new[N_IN];
        logic [N_OUT-1:0][15:0] q;
        for (int i = 0; i < N_IN; i++) xi[i] = int'($signed(in_data[i]));
        for (int o = 0; o < N_OUT; o++) q[o] = 16'(expect_q(N_IN, o, xi, wi, bi, NANO));
        exp_q.push_back(q);
        t_acc.push_back(cyc);
        if (!phase2 && last_acc >= 0) check(cyc - last_acc == II, $sformatf("II %0d", cyc - last_acc));
        last_acc = cyc;
      end
      if (out_valid && out_ready) begin
        logic [N_OUT-1:0][15:0] q;
        longint t;
        if (exp_q.size() == 0) check(0, "unexpected result");
        else begin
          q = exp_q.pop_front();
          t = t_acc.pop_front();
          for (int o = 0; o < N_OUT; o++)
            check(16'(out_data[o]) == q[o], $sformatf("out[%0d]=%0d exp %0d", o, out_data[o], q[o]));
          if (!phase2) check(cyc - t == LAT, $sformatf("latency %0d", cyc - t));
        end
      end
    end
  end

  initial begin
    int xi[] = new[N_IN], wrow[] = new[N_IN], bo;
    // weights: a pulse-like random set
    for (int o = 0; o < N_OUT; o++) begin
      make_vector(1, N_IN, xi, wrow, bo);
      for (int i = 0; i < N_IN; i++) begin wi[o * N_IN + i] = wrow[i]; w[o][i] = W_W'(wrow[i]); end
      bi[o] = bo; b[o] = W_W'(bo);
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    out_ready <= 1;
    // phase 1: full rate
    in_valid <= 1;
    for (int n = 0; n < 40; ) begin
      make_vector(1, N_IN, xi, wrow, bo);
      for (int i = 0; i < N_IN; i++) in_data[i] <= IN_W'(xi[i]);
      @(posedge clk);
      if (in_valid && in_ready) n++;
    end
    in_valid <= 0;
    wait (exp_q.size() == 0);
    @(posedge clk);
    phase2 = 1;
    // phase 2: random traffic, including overflowing pulses
    for (int n = 0; n < N_PULSES; ) begin
      in_valid  <= ($urandom_range(0, 2) != 0);
      out_ready <= ($urandom_range(0, 2) != 0);
      make_vector((n % 9 == 4) ? 2 : (n % 9 == 6) ? 0 : 1, N_IN, xi, wrow, bo);
      for (int i = 0; i < N_IN; i++) in_data[i] <= IN_W'(xi[i]);
      @(posedge clk);
      if (in_valid && in_ready) n++;
    end
    in_valid  <= 0;
    out_ready <= 1;
    wait (exp_q.size() == 0);
    repeat (LAT + 2) @(posedge clk);
    check(!out_valid, "spurious result after drain");
    check(n_throttle > 0, "II throttling never happened");
    check(n_stall > 0, "output stall never happened");
    $display("[%s/%0d samples] II throttles %0d, output stalls %0d", MODEL.name(), N_IN, n_throttle, n_stall);
    done = 1;
  end
endmodule
