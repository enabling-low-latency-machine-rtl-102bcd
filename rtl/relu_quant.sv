// relu_quant: ReLU activation and requantisation of the latent values.
//
// Each <30,17> accumulator value is passed through max(0, v) and converted to
// the unsigned <10,7> latent format, which drops 10 fractional bits:
//   MODEL_FULL: rounds to the nearest representable value (a tie rounds up)
//               and saturates at 1023 (127.875) - the full model's rounding
//               and overflow protection;
//   MODEL_NANO: truncates the 10 bits and keeps the low 10 integer+fraction
//               bits (wrap-around), so a value of 128 or more wraps.
// The ReLU itself follows the published model; that ties round up and that the
// latent code is unsigned are this design's choices.
//
// Timing: one register stage advancing when en is high; in_valid is carried
// as out_valid. Reset (synchronous, active low) clears out_valid.
module relu_quant
  import ae_pkg::*;
#(
  parameter int     N_OUT = N_OUT_DEF,
  parameter model_e MODEL = MODEL_FULL
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        en,
  input  logic                        in_valid,
  input  logic [N_OUT-1:0][ACC_W-1:0] x,
  output logic                        out_valid,
  output logic [N_OUT-1:0][RES_W-1:0] q
);

  localparam int DROP = ACC_F - RES_F;              // 10 fractional bits dropped
  localparam int KW   = ACC_W - DROP + 1;           // kept bits plus a carry bit

  logic [N_OUT-1:0][RES_W-1:0] q_next;

  always_comb begin
    for (int o = 0; o < N_OUT; o++) begin
      logic signed [ACC_W-1:0] v;
      logic [KW-1:0]           r;
      v = $signed(x[o]);
      r = KW'(v[ACC_W-1:DROP]) + KW'(v[DROP-1]);
      if (v <= 0) begin
        q_next[o] = '0;
      end else if (MODEL == MODEL_FULL) begin
        q_next[o] = (r > KW'({RES_W{1'b1}})) ? {RES_W{1'b1}} : r[RES_W-1:0];
      end else begin
        q_next[o] = v[DROP +: RES_W];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
    end else if (en) begin
      out_valid <= in_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (en) q <= q_next;
  end

endmodule
