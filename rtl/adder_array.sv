// adder_array: 1-D array of adders on one side of a systolic tile.
//
// Each tile of a Strassen cluster has an adder column (on its west side,
// producing a column of the A-side operand) and an adder row (on its
// north side, producing a row of the B-side operand).  Every cycle the
// array takes one column/row of two operand quadrants from the shared
// buffers and produces x, x + y, x - y or zero, lane by lane, so the sums
// S_i of Strassen's algorithm are formed on the fly as the tile consumes
// them.  The result is registered: it reaches the tile one cycle after the
// adder array receives its inputs, as in the cycle diagram of the design.
//
// Interface: valid_i/x_i/y_i/op_i in, valid_o/z_o one cycle later.
// Operand width is kept (wrap-around on overflow); that, and the
// pass/zero operations for tiles whose operand needs no sum, are this
// design's choice.
module adder_array
  import versagnn_pkg::*;
#(
  parameter int LANES = 32,
  parameter int DW    = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    valid_i,
  input  add_op_e                 op_i,
  input  logic [LANES-1:0][DW-1:0] x_i,
  input  logic [LANES-1:0][DW-1:0] y_i,
  output logic                    valid_o,
  output logic [LANES-1:0][DW-1:0] z_o
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_o <= 1'b0;
      z_o     <= '0;
    end else begin
      valid_o <= valid_i;
      for (int l = 0; l < LANES; l++) begin
        unique case (op_i)
          ADD_PASS_X:    z_o[l] <= x_i[l];
          ADD_X_PLUS_Y:  z_o[l] <= x_i[l] + y_i[l];
          ADD_X_MINUS_Y: z_o[l] <= x_i[l] - y_i[l];
          default:       z_o[l] <= '0;
        endcase
      end
    end
  end
endmodule
