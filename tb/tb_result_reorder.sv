// tb_result_reorder: self-checking test of the write-back reorder unit.
// Loads the reorder vectors of the packing example of the design (packed
// rows 0..3 come from rows 1,4,2,3 of the first tile and rows 3,2,4,1 of
// the second, numbered from 1 there, stored here from 0) and checks that
// every (row, mask) pair maps to its original row; then random vectors;
// after reset the mapping is the identity.
module tb_result_reorder;
  localparam int ROWS = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en, wr_tag, tag_i;
  logic [2:0] wr_row, wr_dest, row_i, dest_o;
  result_reorder #(.ROWS(ROWS), .TAGS(2), .RW(3)) dut (.*);

  int checks = 0, failures = 0;
  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  int vec [ROWS][2];

  task automatic check_all();
    for (int i = 0; i < ROWS; i++)
      for (int m = 0; m < 2; m++) begin
        row_i = 3'(i); tag_i = 1'(m); #1;
        checks++;
        if (int'(dest_o) != vec[i][m]) begin
          failures++; $display("FAIL row %0d mask %0d -> %0d expected %0d", i, m, dest_o, vec[i][m]);
        end
      end
  endtask

  initial begin
    int ex0 [4] = '{0, 3, 1, 2};   // 1,4,2,3 minus one
    int ex1 [4] = '{2, 1, 3, 0};   // 3,2,4,1 minus one
    wr_en = 0; wr_tag = 0; wr_row = 0; wr_dest = 0; row_i = 0; tag_i = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < ROWS; i++) begin vec[i][0] = i; vec[i][1] = i; end
    @(negedge clk); check_all();
    for (int i = 0; i < 4; i++) begin
      vec[i][0] = ex0[i]; vec[i][1] = ex1[i];
      for (int m = 0; m < 2; m++) begin
        @(negedge clk); wr_en = 1; wr_row = 3'(i); wr_tag = 1'(m); wr_dest = 3'(vec[i][m]);
      end
    end
    @(negedge clk); wr_en = 0;
    check_all();
    for (int t = 0; t < 50; t++) begin
      int i, m;
      i = $urandom_range(0, ROWS-1); m = $urandom_range(0, 1);
      vec[i][m] = $urandom_range(0, ROWS-1);
      @(negedge clk); wr_en = 1; wr_row = 3'(i); wr_tag = 1'(m); wr_dest = 3'(vec[i][m]);
    end
    @(negedge clk); wr_en = 0;
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
