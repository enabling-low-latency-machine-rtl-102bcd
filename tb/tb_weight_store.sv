// tb_weight_store: self-checking test of weight_store.
// Loads every weight and bias with random values, checks the parallel outputs
// against the address map (o*N_IN+i for weights, N_OUT*N_IN+o for biases),
// that an out-of-range write changes nothing, and that reset clears the store.
module tb_weight_store;
  import ae_pkg::*;
  localparam int N_IN = 32, N_OUT = 2;
  localparam int N_PARAM = N_OUT * N_IN + N_OUT;
  localparam int AW = $clog2(N_PARAM);

  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [AW-1:0] wr_addr = '0;
  logic [W_W-1:0] wr_data = '0;
  logic [N_OUT-1:0][N_IN-1:0][W_W-1:0] w;
  logic [N_OUT-1:0][W_W-1:0] b;
  logic [W_W-1:0] img[N_PARAM];
  int checks = 0, failures = 0;

  weight_store dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic check_all(input string tag);
    for (int o = 0; o < N_OUT; o++) begin
      for (int i = 0; i < N_IN; i++)
        check(w[o][i] == img[o * N_IN + i], $sformatf("%s w[%0d][%0d]", tag, o, i));
      check(b[o] == img[N_OUT * N_IN + o], $sformatf("%s b[%0d]", tag, o));
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    foreach (img[k]) img[k] = '0;
    @(negedge clk);
    check_all("after reset");
    // load in a random order
    for (int k = 0; k < N_PARAM; k++) img[k] = W_W'($urandom);
    for (int n = 0; n < 3 * N_PARAM; n++) begin
      int k;
      k = (n < N_PARAM) ? n : $urandom_range(0, N_PARAM - 1);
      if (n >= N_PARAM) img[k] = W_W'($urandom);
      @(negedge clk);
      wr_en <= 1; wr_addr <= AW'(k); wr_data <= img[k];
    end
    @(negedge clk);
    wr_en <= 0;
    @(negedge clk);
    check_all("after load");
    // out-of-range address
    @(negedge clk);
    wr_en <= 1; wr_addr <= AW'(N_PARAM); wr_data <= 10'h155;
    @(negedge clk);
    wr_en <= 0;
    @(negedge clk);
    check_all("after out-of-range write");
    // reset
    rst_n <= 0;
    @(negedge clk);
    rst_n <= 1;
    foreach (img[k]) img[k] = '0;
    @(negedge clk);
    check_all("after second reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
