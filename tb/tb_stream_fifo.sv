// tb_stream_fifo: self-checking test of stream_fifo.
// Random writes and reads against a queue model; checks data order, the
// full/empty flags, the occupancy count and simultaneous read/write.
module tb_stream_fifo;
  localparam int WIDTH = 24;
  localparam int DEPTH = 3;

  logic clk = 0, rst_n = 0;
  logic wr_valid = 0, wr_ready, rd_valid, rd_ready = 0;
  logic [WIDTH-1:0] wr_data = '0, rd_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [WIDTH-1:0] model[$];
  int n_full = 0, n_both = 0;

  stream_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      // drive
      wr_valid <= ($urandom_range(0, 99) < ((cyc / 500) % 2 ? 70 : 35));
      wr_data  <= WIDTH'($urandom);
      rd_ready <= ($urandom_range(0, 99) < ((cyc / 500) % 2 ? 35 : 70));
      @(negedge clk);
      // check outputs against the model before the edge
      check(count == model.size(), $sformatf("count %0d vs %0d", count, model.size()));
      check(wr_ready == (model.size() < DEPTH), "wr_ready");
      check(rd_valid == (model.size() > 0), "rd_valid");
      if (model.size() > 0) check(rd_data == model[0], "rd_data order");
      if (model.size() == DEPTH) n_full++;
      @(posedge clk);
      if (rd_valid && rd_ready) void'(model.pop_front());
      if (wr_valid && wr_ready) model.push_back(wr_data);
      if (rd_valid && rd_ready && wr_valid && wr_ready) n_both++;
    end
    check(n_full > 0, "FIFO was never full");
    check(n_both > 0, "no simultaneous read and write");
    $display("full cycles %0d, simultaneous r/w %0d", n_full, n_both);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
