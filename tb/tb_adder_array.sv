// tb_adder_array: self-checking test of the 1-D adder array.
// Random operands under each operation (pass, add, sub, zero); the result
// must appear exactly one cycle after the inputs, with its valid bit.
module tb_adder_array;
  import versagnn_pkg::*;
  localparam int L = 8, DW = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic valid_i, valid_o;
  add_op_e op_i;
  logic [L-1:0][DW-1:0] x_i, y_i, z_o;
  adder_array #(.LANES(L), .DW(DW)) dut (.*);

  int checks = 0, failures = 0;
  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [L-1:0][DW-1:0] ex;
    valid_i = 0; op_i = ADD_PASS_X; x_i = '0; y_i = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      valid_i = $urandom_range(0, 3) != 0;
      op_i = add_op_e'($urandom_range(0, 3));
      for (int l = 0; l < L; l++) begin
        x_i[l] = DW'($urandom);
        y_i[l] = DW'($urandom);
        unique case (op_i)
          ADD_PASS_X:    ex[l] = x_i[l];
          ADD_X_PLUS_Y:  ex[l] = DW'(int'(x_i[l]) + int'(y_i[l]));
          ADD_X_MINUS_Y: ex[l] = DW'(int'(x_i[l]) - int'(y_i[l]));
          default:       ex[l] = '0;
        endcase
      end
      @(posedge clk); #1;
      checks++;
      if (valid_o != valid_i) begin failures++; $display("FAIL valid"); end
      for (int l = 0; l < L; l++) begin
        checks++;
        if (z_o[l] != ex[l]) begin
          failures++; $display("FAIL op %0d lane %0d: %h expected %h", op_i, l, z_o[l], ex[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
