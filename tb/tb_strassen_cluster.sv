// tb_strassen_cluster: self-checking test of the four-tile Strassen cluster.
//
// GEMM: random N x N integer matrices A and B (N = 2T) are loaded quadrant
// by quadrant, C = A x B is run, and every element of C is compared with a
// product computed here by the plain triple loop.  The start-to-done cycle
// count is checked against 9T + 8.
// SpMM: every tile gets its own random sparse T x T matrix (rows of sorted
// column indices, generated so that no FIFO_CAM overflows), the dense X
// enters tile 0; the tile stream of tile s starts T*s cycles after tile 0.
// Weighted aggregation (sum of a*x) and direct aggregation with add and
// max are checked against a reference computed here.
module tb_strassen_cluster;
  import versagnn_pkg::*;
  localparam int T  = 4;
  localparam int N  = 2*T;
  localparam int DW = 16;
  localparam int AW = 32;
  localparam int IW = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          wr_en, wr_mat, start, busy, done, sp_run, ovf;
  logic [1:0]    wr_quad, rd_sel;
  logic [$clog2(T)-1:0] wr_row, rd_row;
  logic [T-1:0][DW-1:0] wr_data;
  cl_cmd_e       cmd;
  pe_mode_e      agg_mode;
  ro_e           ro;
  logic [15:0]   len;
  logic [3:0][T-1:0]          sp_valid;
  logic [3:0][T-1:0][IW-1:0]  sp_idx;
  logic [3:0][T-1:0][DW-1:0]  sp_val;
  logic [T-1:0]               x_valid;
  logic [T-1:0][AW-1:0]       x_val;
  logic [T-1:0][AW-1:0]       rd_data;

  strassen_cluster #(.T(T), .DW(DW), .AW(AW), .IW(IW)) dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int a [N][N], b [N][N];
  longint cref [N][N];

  task automatic load(input int m [N][N], input logic mat);
    for (int q = 0; q < 4; q++)
      for (int r = 0; r < T; r++) begin
        @(negedge clk);
        wr_en = 1; wr_mat = mat; wr_quad = 2'(q); wr_row = $clog2(T)'(r);
        for (int c = 0; c < T; c++)
          wr_data[c] = DW'(m[(q/2)*T + r][(q%2)*T + c]);
      end
    @(negedge clk); wr_en = 0;
  endtask

  task automatic run(input cl_cmd_e c, output int cycles);
    int t0;
    @(negedge clk); start = 1; cmd = c;
    @(posedge clk); t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(posedge clk);
    cycles = cyc - t0;
  endtask

  // ---------------- SpMM data ----------------
  int nnz [4][T];
  int scol [4][T][T];
  int sval [4][T][T];
  int xm [T][T];

  function automatic bit row_ok(input int s, input int i);
    // every entry pushed into the FIFO_CAM must find a free slot
    for (int t = 0; t < nnz[s][i]; t++) begin
      int pend = 0;
      if (scol[s][i][t] == t) continue;
      for (int n = 0; n < t; n++)
        if (scol[s][i][n] > n && scol[s][i][n] >= t) pend++;
      if (pend >= 4) return 0;
    end
    return 1;
  endfunction

  task automatic gen_sparse();
    for (int s = 0; s < 4; s++)
      for (int i = 0; i < T; i++) begin
        do begin
          nnz[s][i] = 0;
          for (int c = 0; c < T; c++)
            if ($urandom_range(0, 99) < 45) begin
              scol[s][i][nnz[s][i]] = c;
              sval[s][i][nnz[s][i]] = $urandom_range(0, 14) - 7;
              nnz[s][i]++;
            end
        end while (!row_ok(s, i));
      end
    for (int r = 0; r < T; r++)
      for (int c = 0; c < T; c++) xm[r][c] = $urandom_range(0, 200) - 100;
  endtask

  task automatic run_spmm(input pe_mode_e m, input ro_e rop);
    int t0, cycles;
    @(negedge clk);
    start = 1; cmd = CMD_SPMM; agg_mode = m; ro = rop; len = 16'(T);
    @(posedge clk); t0 = cyc;
    @(negedge clk); start = 0;
    while (!sp_run) @(negedge clk);
    // stream cycle n: tile s row i presents its entry n - s*T
    for (int n = 0; n < 5*T; n++) begin
      for (int s = 0; s < 4; s++)
        for (int i = 0; i < T; i++) begin
          int e = n - s*T;
          sp_valid[s][i] = (e >= 0 && e < nnz[s][i]);
          sp_idx[s][i]   = (e >= 0 && e < nnz[s][i]) ? IW'(scol[s][i][e]) : '0;
          sp_val[s][i]   = (e >= 0 && e < nnz[s][i]) ? DW'(sval[s][i][e]) : '0;
        end
      for (int j = 0; j < T; j++) begin
        x_valid[j] = (n < T);
        x_val[j]   = (n < T) ? AW'(xm[n][j]) : '0;
      end
      @(negedge clk);
    end
    sp_valid = '0; x_valid = '0;
    while (!done) @(posedge clk);
    cycles = cyc - t0;
    checks++;
    if (cycles != T + 5*T + 5) begin
      failures++;
      $display("FAIL spmm cycles %0d expected %0d", cycles, T + 5*T + 5);
    end
    @(negedge clk);
    for (int s = 0; s < 4; s++)
      for (int i = 0; i < T; i++) begin
        rd_sel = 2'(s); rd_row = $clog2(T)'(i);
        #1;
        for (int j = 0; j < T; j++) begin
          longint e;
          e = (m == MODE_DRT_AGG && rop == RO_MAX) ? longint'(32'sh8000_0000) : 0;
          for (int k = 0; k < nnz[s][i]; k++) begin
            int xv = xm[scol[s][i][k]][j];
            if (m == MODE_WGT_AGG) e += sval[s][i][k] * xv;
            else if (rop == RO_MAX) e = (xv > e) ? xv : e;
            else e += xv;
          end
          checks++;
          if ($signed(rd_data[j]) != e) begin
            failures++;
            $display("FAIL spmm mode=%0d tile %0d C[%0d][%0d]=%0d expected %0d",
                     m, s, i, j, $signed(rd_data[j]), e);
          end
        end
      end
    checks++;
    if (ovf) begin failures++; $display("FAIL unexpected FIFO_CAM overflow"); end
  endtask

  initial begin
    int cycles;
    wr_en = 0; start = 0; wr_mat = 0; wr_quad = 0; wr_row = 0; wr_data = '0;
    cmd = CMD_GEMM; agg_mode = MODE_WGT_AGG; ro = RO_ADD; len = 0;
    sp_valid = '0; sp_idx = '0; sp_val = '0; x_valid = '0; x_val = '0;
    rd_sel = 0; rd_row = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 3; trial++) begin
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          a[i][j] = $urandom_range(0, 400) - 200;
          b[i][j] = $urandom_range(0, 400) - 200;
        end
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          cref[i][j] = 0;
          for (int k = 0; k < N; k++) cref[i][j] += a[i][k] * b[k][j];
        end
      load(a, 0);
      load(b, 1);
      run(CMD_GEMM, cycles);
      checks++;
      if (cycles != 9*T + 8) begin
        failures++;
        $display("FAIL gemm cycles %0d expected %0d", cycles, 9*T + 8);
      end
      @(negedge clk);
      for (int q = 0; q < 4; q++)
        for (int r = 0; r < T; r++) begin
          rd_sel = 2'(q); rd_row = $clog2(T)'(r);
          #1;
          for (int c = 0; c < T; c++) begin
            checks++;
            if ($signed(rd_data[c]) != cref[(q/2)*T + r][(q%2)*T + c]) begin
              failures++;
              $display("FAIL gemm C[%0d][%0d]=%0d expected %0d", (q/2)*T + r,
                       (q%2)*T + c, $signed(rd_data[c]), cref[(q/2)*T + r][(q%2)*T + c]);
            end
          end
        end
    end
    gen_sparse();
    run_spmm(MODE_WGT_AGG, RO_ADD);
    run_spmm(MODE_DRT_AGG, RO_ADD);
    gen_sparse();
    run_spmm(MODE_DRT_AGG, RO_MAX);
    run_spmm(MODE_WGT_AGG, RO_ADD);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
