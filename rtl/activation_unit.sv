// activation_unit: element-wise non-linearity on a row of results.
//
// Sits on the write-back path below the systolic tiles and applies the
// layer's activation to one row of T accumulator values per cycle: none,
// ReLU, or LeakyReLU.  The negative slope of LeakyReLU is 2^-LEAKY_SHIFT,
// an arithmetic shift.  The row comes out one cycle later.
//
// The design names an "Activation/Exponential" unit and ReLU/LeakyReLU as
// activations; the slope as a power of two and the one-cycle register are
// this design's choices.  The exponential used by the attention softmax is
// not built: the number format and approximation it uses are not given.
module activation_unit
  import versagnn_pkg::*;
#(
  parameter int LANES = 32,
  parameter int AW    = 32,
  parameter int LEAKY_SHIFT = 3
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     valid_i,
  input  act_e                     act_i,
  input  logic [LANES-1:0][AW-1:0] x_i,
  output logic                     valid_o,
  output logic [LANES-1:0][AW-1:0] y_o
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_o <= 1'b0;
      y_o     <= '0;
    end else begin
      valid_o <= valid_i;
      for (int l = 0; l < LANES; l++) begin
        if (!x_i[l][AW-1] || act_i == ACT_NONE) y_o[l] <= x_i[l];
        else if (act_i == ACT_RELU)            y_o[l] <= '0;
        else                                   y_o[l] <= AW'($signed(x_i[l]) >>> LEAKY_SHIFT);
      end
    end
  end
endmodule
