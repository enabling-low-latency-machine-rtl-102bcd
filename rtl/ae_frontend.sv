// ae_frontend: the on-detector compression block of one front-end FPGA.
//
// N_CH calorimeter channels are compressed in parallel, each by its own
// encoder channel (input FIFO, dense layer + ReLU pipeline, output FIFO). Each
// channel turns a 32-sample pulse of 16-bit samples (512 bits) into two 10-bit
// latent values (20 bits), a 25.6:1 compression. All channels run the same
// trained model, so a single weight store feeds all of them. Eight channels per
// FPGA, a 160 MHz clock and one pulse per channel every four cycles (40 MHz)
// are the published operating point; sharing the weight store is this
// design's choice.
//
// Interface: per channel, valid/ready input and output streams (array index =
// channel). The weight-store write port (wr_en, wr_addr, wr_data) loads the
// 64 weights and 2 biases; hold the pulse inputs while loading it. Timing is that
// of ae_channel: LATENCY+2 edges from writing a pulse to reading its result
// when nothing stalls, and a new pulse per channel every II cycles.
module ae_frontend
  import ae_pkg::*;
#(
  parameter int     N_CH      = 8,
  parameter int     N_IN      = N_IN_DEF,
  parameter int     N_OUT     = N_OUT_DEF,
  parameter model_e MODEL     = MODEL_FULL,
  parameter int     II        = default_ii(MODEL),
  parameter int     LATENCY   = default_latency(MODEL),
  parameter int     IN_DEPTH  = 2,
  parameter int     OUT_DEPTH = 2,
  localparam int    AW        = $clog2(N_OUT * N_IN + N_OUT)
) (
  input  logic                                    clk,
  input  logic                                    rst_n,
  // weight store loading
  input  logic                                    wr_en,
  input  logic [AW-1:0]                           wr_addr,
  input  logic [W_W-1:0]                          wr_data,
  // pulses in
  input  logic [N_CH-1:0]                         in_valid,
  output logic [N_CH-1:0]                         in_ready,
  input  logic [N_CH-1:0][N_IN-1:0][IN_W-1:0]     in_data,
  // latent values out
  output logic [N_CH-1:0]                         out_valid,
  input  logic [N_CH-1:0]                         out_ready,
  output logic [N_CH-1:0][N_OUT-1:0][RES_W-1:0]   out_data
);

  logic [N_OUT-1:0][N_IN-1:0][W_W-1:0] w;
  logic [N_OUT-1:0][W_W-1:0]           b;

  weight_store #(.N_IN(N_IN), .N_OUT(N_OUT)) u_weights (
    .clk, .rst_n, .wr_en, .wr_addr, .wr_data, .w, .b
  );

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    ae_channel #(
      .N_IN(N_IN), .N_OUT(N_OUT), .MODEL(MODEL), .II(II), .LATENCY(LATENCY),
      .IN_DEPTH(IN_DEPTH), .OUT_DEPTH(OUT_DEPTH)
    ) u_ch (
      .clk, .rst_n,
      .in_valid (in_valid[c]),  .in_ready (in_ready[c]),  .in_data (in_data[c]),
      .w, .b,
      .out_valid(out_valid[c]), .out_ready(out_ready[c]), .out_data(out_data[c])
    );
  end

endmodule
