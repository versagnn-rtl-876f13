// tb_activation_unit: self-checking test of ReLU / LeakyReLU.
// Random signed rows under each function; the output row, one cycle
// later, must be x, max(x, 0) or (x < 0 ? x >>> 3 : x).
module tb_activation_unit;
  import versagnn_pkg::*;
  localparam int L = 8, AW = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic valid_i, valid_o;
  act_e act_i;
  logic [L-1:0][AW-1:0] x_i, y_o;
  activation_unit #(.LANES(L), .AW(AW), .LEAKY_SHIFT(3)) dut (.*);

  int checks = 0, failures = 0;
  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ex [L];
    valid_i = 0; act_i = ACT_NONE; x_i = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 150; t++) begin
      @(negedge clk);
      valid_i = 1;
      act_i = act_e'(t % 3);
      for (int l = 0; l < L; l++) begin
        int v;
        v = $urandom_range(0, 2000000) - 1000000;
        x_i[l] = AW'(v);
        if (v >= 0 || act_i == ACT_NONE) ex[l] = v;
        else if (act_i == ACT_RELU) ex[l] = 0;
        else ex[l] = v >>> 3;
      end
      @(posedge clk); #1;
      checks++;
      if (!valid_o) begin failures++; $display("FAIL valid"); end
      for (int l = 0; l < L; l++) begin
        checks++;
        if ($signed(y_o[l]) != ex[l]) begin
          failures++; $display("FAIL act %0d: %0d -> %0d expected %0d", act_i, $signed(x_i[l]), $signed(y_o[l]), ex[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
