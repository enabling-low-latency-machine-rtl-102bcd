// encoder_core: pipelined pulse encoder, one dense layer followed by a ReLU.
//
// A pulse of N_IN samples enters on in_data; N_OUT latent values leave on
// out_data LATENCY clock edges later. The core takes a new pulse at most once
// every II cycles (the initiation interval). The published variants are
//   MODEL_FULL: II 4, LATENCY 24   (rounding, saturation)
//   MODEL_NANO: II 3, LATENCY 4    (truncation, wrap-around)
// With a 160 MHz clock, II 4 means one pulse per 25 ns, i.e. every 40 MHz
// bunch crossing.
//
// Pipeline: dense_layer (products, then sum) -> relu_quant -> a delay line of
// LATENCY-3 registers. The arithmetic needs only the first three stages; the
// delay line brings the latency up to the published figure, which for the
// full model includes work of the original implementation whose structure is
// not published. The whole pipeline stalls (every stage holds) while the last
// stage holds a result that the consumer does not take, so no result is lost.
//
// Interface: valid/ready on both sides. A pulse is taken on an edge where
// in_valid && in_ready; in_ready is high when the pipeline is not stalled and
// at least II cycles have passed since the last pulse was taken. A result is
// delivered on an edge where out_valid && out_ready; out_data is stable while
// out_valid waits for out_ready. w and b come from the weight store; they are
// sampled on the edge after a pulse is taken, together with its products. Timing: a pulse taken at edge t
// without stalls is offered on out_data from just after edge t+LATENCY-1 and
// can be taken at edge t+LATENCY. Reset (synchronous, active low) empties the
// pipeline.
module encoder_core
  import ae_pkg::*;
#(
  parameter int     N_IN    = N_IN_DEF,
  parameter int     N_OUT   = N_OUT_DEF,
  parameter model_e MODEL   = MODEL_FULL,
  parameter int     II      = default_ii(MODEL),
  parameter int     LATENCY = default_latency(MODEL)
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

  localparam int PAD = LATENCY - 3;
  localparam int GW  = (II > 1) ? $clog2(II) : 1;

  if (LATENCY < 4) begin : g_bad_latency
    $error("encoder_core: LATENCY must be at least 4");
  end
  if (II < 1) begin : g_bad_ii
    $error("encoder_core: II must be at least 1");
  end

  logic          en;
  logic          accept;
  logic [GW-1:0] gap;

  // Initiation-interval counter: after a pulse is taken, hold in_ready low for
  // II-1 cycles.
  assign accept   = in_valid && in_ready;
  assign in_ready = en && (gap == '0);

  always_ff @(posedge clk) begin
    if (!rst_n)            gap <= '0;
    else if (accept)       gap <= GW'(II - 1);
    else if (gap != '0)    gap <= gap - 1'b1;
  end

  // Arithmetic stages.
  logic                        d_valid;
  logic [N_OUT-1:0][ACC_W-1:0] d_y;
  logic                        q_valid;
  logic [N_OUT-1:0][RES_W-1:0] q_y;

  dense_layer #(.N_IN(N_IN), .N_OUT(N_OUT), .MODEL(MODEL)) u_dense (
    .clk, .rst_n, .en,
    .in_valid (accept),
    .x        (in_data),
    .w, .b,
    .out_valid(d_valid),
    .y        (d_y)
  );

  relu_quant #(.N_OUT(N_OUT), .MODEL(MODEL)) u_relu (
    .clk, .rst_n, .en,
    .in_valid (d_valid),
    .x        (d_y),
    .out_valid(q_valid),
    .q        (q_y)
  );

  // Delay line up to the published latency.
  logic [PAD-1:0]                         dl_valid;
  logic [PAD-1:0][N_OUT-1:0][RES_W-1:0]   dl_data;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dl_valid <= '0;
    end else if (en) begin
      dl_valid[0] <= q_valid;
      for (int k = 1; k < PAD; k++) dl_valid[k] <= dl_valid[k-1];
    end
  end

  always_ff @(posedge clk) begin
    if (en) begin
      dl_data[0] <= q_y;
      for (int k = 1; k < PAD; k++) dl_data[k] <= dl_data[k-1];
    end
  end

  assign out_valid = dl_valid[PAD-1];
  assign out_data  = dl_data[PAD-1];
  assign en        = !out_valid || out_ready;

  // A result that waits for the consumer stays put.
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
