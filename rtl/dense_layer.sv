// dense_layer: fully unrolled fixed-point dense layer, N_IN inputs -> N_OUT outputs.
//
// y[o] = sum_i x[i] * w[o][i] + b[o], with x in <16,9>, w and b in <10,4> and
// y in the <30,17> accumulator format. Every one of the N_OUT x N_IN products
// has its own multiplier (no resource sharing), as the published encoder was
// built for the lowest latency; products are exact (13 fractional bits, the
// accumulator's own). The bias is shifted left by 7 to the same 13 fractional
// bits. The sum is formed at full width (PROD_W + log2(N_IN) + 1 bits) and then
// cast to <30,17>:
//   MODEL_FULL: saturates to the most positive / most negative <30,17> value
//               (the "overflow protection" of the full model);
//   MODEL_NANO: keeps the low 30 bits (wrap-around, no protection).
// Because products and bias are exact, the choice of rounding plays no role
// here; it matters only in the ReLU's requantisation.
//
// Timing: two register stages, both advancing only when en is high.
// Stage 1 registers the products and the bias (weights and bias are
// sampled on the same edge), stage 2 the cast sum. in_valid is carried
// along as out_valid, so a value accepted at edge t appears on y after edge t+1
// (two enabled edges). The adder tree sits in one stage; how the published
// implementation spread it over cycles is not known, so this split is this
// design's choice. Reset (synchronous, active low) clears the valid bits.
module dense_layer
  import ae_pkg::*;
#(
  parameter int     N_IN  = N_IN_DEF,
  parameter int     N_OUT = N_OUT_DEF,
  parameter model_e MODEL = MODEL_FULL
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                en,
  input  logic                                in_valid,
  input  logic [N_IN-1:0][IN_W-1:0]           x,
  input  logic [N_OUT-1:0][N_IN-1:0][W_W-1:0] w,
  input  logic [N_OUT-1:0][W_W-1:0]           b,
  output logic                                out_valid,
  output logic [N_OUT-1:0][ACC_W-1:0]         y
);

  localparam int SUM_W   = PROD_W + $clog2(N_IN) + 1;
  localparam int B_SHIFT = ACC_F - W_F;

  if (IN_F + W_F != ACC_F) begin : g_bad_format
    $error("dense_layer: products must carry the accumulator's fractional bits");
  end

  // Stage 1: products.
  logic signed [PROD_W-1:0] prod [N_OUT][N_IN];
  logic signed [W_W-1:0]    bias [N_OUT];
  logic                     s1_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
    end else if (en) begin
      s1_valid <= in_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (en) begin
      for (int o = 0; o < N_OUT; o++) begin
        bias[o] <= $signed(b[o]);
        for (int i = 0; i < N_IN; i++)
          prod[o][i] <= PROD_W'($signed(x[i])) * PROD_W'($signed(w[o][i]));
      end
    end
  end

  // Stage 2: adder tree, bias, cast to the accumulator format.
  logic signed [SUM_W-1:0] sum [N_OUT];
  logic [N_OUT-1:0][ACC_W-1:0] y_next;

  localparam logic signed [SUM_W-1:0] ACC_MAX = SUM_W'({1'b0, {(ACC_W-1){1'b1}}});
  localparam logic signed [SUM_W-1:0] ACC_MIN = -ACC_MAX - 1;

  always_comb begin
    for (int o = 0; o < N_OUT; o++) begin
      sum[o] = SUM_W'(bias[o]) <<< B_SHIFT;
      for (int i = 0; i < N_IN; i++)
        sum[o] = sum[o] + SUM_W'(prod[o][i]);
      if (MODEL == MODEL_FULL && sum[o] > ACC_MAX)
        y_next[o] = ACC_MAX[ACC_W-1:0];
      else if (MODEL == MODEL_FULL && sum[o] < ACC_MIN)
        y_next[o] = ACC_MIN[ACC_W-1:0];
      else
        y_next[o] = sum[o][ACC_W-1:0];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
    end else if (en) begin
      out_valid <= s1_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (en) y <= y_next;
  end

endmodule
