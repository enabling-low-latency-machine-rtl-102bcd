// ae_channel: one calorimeter channel of the compressor - input FIFO, encoder
// core, output FIFO.
//
// This is the streaming accelerator as a whole: pulses (N_IN samples of
// <16,9>, packed side by side, sample 0 in the lowest bits) are written into
// the input FIFO, the encoder core pops one at most every II cycles, and each
// pair of <10,7> latent values is pushed into the output FIFO, from which the
// consumer reads it. The FIFO boundary follows the published design; the FIFO
// depths are this design's choice (two entries each are enough for full rate
// because the core stalls instead of dropping results).
//
// Interface: valid/ready on in_* and out_*. Weights and biases come from a
// weight store (shared by all channels of the front end). Timing: with both
// FIFOs empty and the consumer ready, a pulse written at edge t is popped by
// the core at edge t+1 and its result is readable from the output FIFO after
// edge t+1+LATENCY, i.e. LATENCY+2 edges from write to read.
module ae_channel
  import ae_pkg::*;
#(
  parameter int     N_IN     = N_IN_DEF,
  parameter int     N_OUT    = N_OUT_DEF,
  parameter model_e MODEL    = MODEL_FULL,
  parameter int     II       = default_ii(MODEL),
  parameter int     LATENCY  = default_latency(MODEL),
  parameter int     IN_DEPTH  = 2,
  parameter int     OUT_DEPTH = 2
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                in_valid,
  output logic                                in_ready,
  input  logic [N_IN-1:0][IN_W-1:0]           in_data,
  input  logic [N_OUT-1:0][N_IN-1:0][W_W-1:0] w,
  input  logic [N_OUT-1:0][W_W-1:0]           b,
  output logic                                out_valid,
  input  logic                                out_ready,
  output logic [N_OUT-1:0][RES_W-1:0]         out_data
);

  logic                        c_in_valid, c_in_ready;
  logic [N_IN-1:0][IN_W-1:0]   c_in_data;
  logic                        c_out_valid, c_out_ready;
  logic [N_OUT-1:0][RES_W-1:0] c_out_data;

  stream_fifo #(.WIDTH(N_IN * IN_W), .DEPTH(IN_DEPTH)) u_in_fifo (
    .clk, .rst_n,
    .wr_valid(in_valid),   .wr_ready(in_ready),   .wr_data(in_data),
    .rd_valid(c_in_valid), .rd_ready(c_in_ready), .rd_data(c_in_data),
    .count   ()
  );

  encoder_core #(
    .N_IN(N_IN), .N_OUT(N_OUT), .MODEL(MODEL), .II(II), .LATENCY(LATENCY)
  ) u_core (
    .clk, .rst_n,
    .in_valid (c_in_valid),  .in_ready (c_in_ready),  .in_data (c_in_data),
    .w, .b,
    .out_valid(c_out_valid), .out_ready(c_out_ready), .out_data(c_out_data)
  );

  stream_fifo #(.WIDTH(N_OUT * RES_W), .DEPTH(OUT_DEPTH)) u_out_fifo (
    .clk, .rst_n,
    .wr_valid(c_out_valid), .wr_ready(c_out_ready), .wr_data(c_out_data),
    .rd_valid(out_valid),   .rd_ready(out_ready),   .rd_data(out_data),
    .count   ()
  );

endmodule
