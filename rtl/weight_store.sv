// weight_store: register file for the dense layer's weights and biases.
//
// The encoder has N_OUT x N_IN weights and N_OUT biases, all <10,4> signed
// fixed point (64 + 2 values for the published 32 -> 2 model). The datapath is
// fully unrolled, so every value must be visible at once: the store is a bank
// of registers whose contents are presented in parallel on w and b.
//
// Loading: one value is written per clock edge with wr_en, wr_addr, wr_data.
// Address o*N_IN + i holds the weight from input i to latent output o;
// address N_OUT*N_IN + o holds the bias of output o. Writes to higher addresses
// are ignored. Reset (synchronous, active low) clears every value to zero.
// The new value appears on w/b the cycle after the write edge.
//
// The published model stores trained constants next to the encoder. Those
// numbers are not published, so this design makes the store writable; the
// layout and the loading port are its own choice.
module weight_store
  import ae_pkg::*;
#(
  parameter int N_IN  = N_IN_DEF,
  parameter int N_OUT = N_OUT_DEF,
  localparam int N_PARAM = N_OUT * N_IN + N_OUT,
  localparam int AW      = $clog2(N_PARAM)
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               wr_en,
  input  logic [AW-1:0]                      wr_addr,
  input  logic [W_W-1:0]                     wr_data,
  output logic [N_OUT-1:0][N_IN-1:0][W_W-1:0] w,
  output logic [N_OUT-1:0][W_W-1:0]           b
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      w <= '0;
      b <= '0;
    end else if (wr_en) begin
      for (int o = 0; o < N_OUT; o++) begin
        for (int i = 0; i < N_IN; i++) begin
          if (int'(wr_addr) == o * N_IN + i) w[o][i] <= wr_data;
        end
        if (int'(wr_addr) == N_OUT * N_IN + o) b[o] <= wr_data;
      end
    end
  end

endmodule
