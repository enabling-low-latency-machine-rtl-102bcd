// ae_pkg: number formats and shared constants of the pulse-compression encoder.
//
// The encoder maps a 32-sample calorimeter pulse onto a two-value latent code
// with one dense layer and a ReLU. Every number is fixed point, written here as
// <total bits, integer bits including sign>:
//   input sample      <16,9>  signed, 7 fractional bits
//   weight and bias   <10,4>  signed, 6 fractional bits
//   accumulator       <30,17> signed, 13 fractional bits (output of the dense layer)
//   latent value      <10,7>  unsigned, 3 fractional bits (output of the ReLU)
// These formats are the ones of the published model. A sample times a weight
// has exactly 13 fractional bits, so products enter the accumulator format
// without any rounding. The unsignedness of the latent value is this design's
// choice (a ReLU output is never negative).
//
// Two arithmetic variants of the same model exist:
//   MODEL_FULL  rounds to nearest and saturates on overflow (bit-exact with the
//               quantised software model); II 4, latency 24 cycles.
//   MODEL_NANO  truncates and wraps on overflow (smaller, faster);
//               II 3, latency 4 cycles.
package ae_pkg;

  // Layer sizes of the published encoder.
  localparam int N_IN_DEF  = 32;
  localparam int N_OUT_DEF = 2;

  // Input sample <16,9>.
  localparam int IN_W = 16;
  localparam int IN_F = 7;
  // Weight and bias <10,4>.
  localparam int W_W  = 10;
  localparam int W_F  = 6;
  // Accumulator <30,17>.
  localparam int ACC_W = 30;
  localparam int ACC_F = 13;
  // Latent value <10,7>.
  localparam int RES_W = 10;
  localparam int RES_F = 3;

  // A product carries IN_F + W_F fractional bits, which equals ACC_F.
  localparam int PROD_W = IN_W + W_W;

  typedef enum logic {
    MODEL_FULL = 1'b0,
    MODEL_NANO = 1'b1
  } model_e;

  // Initiation interval and latency (clock cycles) of each variant.
  function automatic int default_ii(model_e m);
    return (m == MODEL_FULL) ? 4 : 3;
  endfunction

  function automatic int default_latency(model_e m);
    return (m == MODEL_FULL) ? 24 : 4;
  endfunction

endpackage
