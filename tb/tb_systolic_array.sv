// tb_systolic_array: self-checking test of one T x T hybrid tile.
//  Dense: C = A x B with column k of A on the west edge and row k of B on
//  the north edge in cycle k (the tile skews them); c_o must equal the
//  product, and be complete 3T-1 cycles after the first input.
//  Shift: T shift cycles push the result out of the bottom, last row
//  first, while the north input fills the tile.
//  Sparse: a random sparse A (sorted column indices per row) times a dense
//  X entering from the south, weighted and direct (add) aggregation.
module tb_systolic_array;
  import versagnn_pkg::*;
  localparam int T = 4, DW = 16, AW = 32, IW = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  pe_mode_e mode; ro_e ro;
  logic clear, shift, d_preskewed, ovf_o;
  logic [T-1:0] west_valid_i, north_valid_i, south_valid_o, d_valid_i, d_top_valid_o;
  logic [T-1:0][IW-1:0] west_idx_i;
  logic [T-1:0][DW-1:0] west_val_i;
  logic [T-1:0][AW-1:0] north_val_i, south_val_o, d_val_i, d_top_val_o;
  logic [T-1:0][T-1:0][AW-1:0] c_o;
  systolic_array #(.T(T), .DW(DW), .AW(AW), .IW(IW)) dut (.*);

  int checks = 0, failures = 0;
  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic idle();
    west_valid_i = 0; north_valid_i = 0; d_valid_i = 0; clear = 0; shift = 0;
    west_idx_i = '0; west_val_i = '0; north_val_i = '0; d_val_i = '0;
  endtask

  int a [T][T], b [T][T];
  longint cr [T][T];
  int nnz [T]; int sc [T][T]; int sv [T][T];

  initial begin
    idle(); mode = MODE_DENSE; ro = RO_ADD; d_preskewed = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 4; trial++) begin
      for (int i = 0; i < T; i++) for (int j = 0; j < T; j++) begin
        a[i][j] = $urandom_range(0, 2000) - 1000; b[i][j] = $urandom_range(0, 2000) - 1000;
      end
      for (int i = 0; i < T; i++) for (int j = 0; j < T; j++) begin
        cr[i][j] = 0;
        for (int k = 0; k < T; k++) cr[i][j] += a[i][k] * b[k][j];
      end
      @(negedge clk); mode = MODE_DENSE; clear = 1;
      @(negedge clk); clear = 0;
      for (int t = 0; t < 3*T; t++) begin
        for (int r = 0; r < T; r++) begin
          west_valid_i[r] = (t < T);  west_val_i[r] = (t < T) ? DW'(a[r][t]) : '0;
          north_valid_i[r] = (t < T); north_val_i[r] = (t < T) ? AW'(b[t][r]) : '0;
        end
        @(negedge clk);
        // after cycle 3T-2 the last PE has not yet added its last product
        if (t == 3*T-3) check(c_o[T-1][T-1] != AW'(cr[T-1][T-1]) || cr[T-1][T-1] == 0 ||
                              a[T-1][T-1] * b[T-1][T-1] == 0, "result complete too early");
      end
      idle();
      for (int i = 0; i < T; i++) for (int j = 0; j < T; j++)
        check($signed(c_o[i][j]) == cr[i][j], $sformatf("dense C[%0d][%0d]=%0d expected %0d",
              i, j, $signed(c_o[i][j]), cr[i][j]));
    end
    // shift the last result out of the bottom
    for (int s = 0; s < T; s++) begin
      shift = 1;
      for (int j = 0; j < T; j++) north_val_i[j] = AW'(100 * s + j);
      #1;
      for (int j = 0; j < T; j++)
        check(south_valid_o[j] && $signed(south_val_o[j]) == cr[T-1-s][j],
              $sformatf("shift step %0d col %0d: %0d expected %0d", s, j, $signed(south_val_o[j]), cr[T-1-s][j]));
      @(negedge clk);
    end
    idle();
    for (int i = 0; i < T; i++) for (int j = 0; j < T; j++)
      check(c_o[i][j] == AW'(100 * (T-1-i) + j), "shift did not fill the tile from the north");

    // sparse x dense
    for (int trial = 0; trial < 6; trial++) begin
      pe_mode_e m;
      m = (trial % 2) ? MODE_DRT_AGG : MODE_WGT_AGG;
      for (int i = 0; i < T; i++) begin
        nnz[i] = 0;
        for (int c = 0; c < T; c++)
          if ($urandom_range(0, 1)) begin sc[i][nnz[i]] = c; sv[i][nnz[i]] = $urandom_range(0, 10) - 5; nnz[i]++; end
      end
      for (int i = 0; i < T; i++) for (int j = 0; j < T; j++) b[i][j] = $urandom_range(0, 200) - 100;
      @(negedge clk); mode = m; ro = RO_ADD; clear = 1;
      @(negedge clk); clear = 0;
      for (int t = 0; t < 3*T + 2; t++) begin
        for (int r = 0; r < T; r++) begin
          west_valid_i[r] = (t < nnz[r]);
          west_idx_i[r] = (t < nnz[r]) ? IW'(sc[r][t]) : '0;
          west_val_i[r] = (t < nnz[r]) ? DW'(sv[r][t]) : '0;
          d_valid_i[r] = (t < T);
          d_val_i[r] = (t < T) ? AW'(b[t][r]) : '0;
        end
        @(negedge clk);
      end
      idle();
      for (int i = 0; i < T; i++) for (int j = 0; j < T; j++) begin
        longint e;
        e = 0;
        for (int k = 0; k < nnz[i]; k++) e += (m == MODE_WGT_AGG ? sv[i][k] : 1) * b[sc[i][k]][j];
        check($signed(c_o[i][j]) == e, $sformatf("sparse mode %0d C[%0d][%0d]=%0d expected %0d",
              m, i, j, $signed(c_o[i][j]), e));
      end
      check(!ovf_o, "unexpected overflow");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
