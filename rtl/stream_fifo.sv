// stream_fifo: synchronous first-in first-out buffer with valid/ready ports.
//
// The encoder talks to the outside world only through FIFOs: one holds whole
// input pulses (32 samples side by side in one entry), one holds pairs of
// latent values. This is a plain circular buffer of DEPTH registers with a
// read pointer, a write pointer and an occupancy counter.
//
// Interface: a write happens on a rising clock edge when wr_valid && wr_ready,
// a read when rd_valid && rd_ready. wr_ready is high while the buffer is not
// full, rd_valid while it is not empty; rd_data shows the oldest entry. A read
// and a write in the same cycle are both allowed, also when full (the read
// frees the slot in the same edge only for the next cycle, so a full FIFO
// refuses the write). count gives the occupancy. Reset is synchronous and
// active low; it empties the buffer but does not clear the storage.
//
// The use of FIFO buffers at the encoder's boundary follows the published
// design; the depth and the handshake are this design's choice.
module stream_fifo #(
  parameter int WIDTH = 512,
  parameter int DEPTH = 2
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_valid,
  output logic                       wr_ready,
  input  logic [WIDTH-1:0]           wr_data,
  output logic                       rd_valid,
  input  logic                       rd_ready,
  output logic [WIDTH-1:0]           rd_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wr_ptr, rd_ptr;
  logic             do_wr, do_rd;

  assign wr_ready = (count != ($clog2(DEPTH+1))'(DEPTH));
  assign rd_valid = (count != '0);
  assign rd_data  = mem[rd_ptr];
  assign do_wr    = wr_valid && wr_ready;
  assign do_rd    = rd_valid && rd_ready;

  function automatic logic [PW-1:0] next_ptr(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_wr) wr_ptr <= next_ptr(wr_ptr);
      if (do_rd) rd_ptr <= next_ptr(rd_ptr);
      case ({do_wr, do_rd})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= wr_data;
  end

  // The occupancy never leaves 0..DEPTH.
  a_count_range: assert property (@(posedge clk) disable iff (!rst_n)
    count <= ($clog2(DEPTH+1))'(DEPTH));

endmodule
