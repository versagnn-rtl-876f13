// tb_versagnn_top: end-to-end test of the accelerator through its host,
// instruction and stream ports, at a small size (T = 4, two clusters,
// FIFO_CAM depth 2 so that an overflow can be provoked with 4-wide rows).
//
// Program (all through the instruction queue):
//   1. host writes A and B (8 x 8) into bank 0;
//   2. LOAD the four quadrants of A and of B into cluster 0, GEMM, STORE
//      the four C quadrants with ReLU into bank 1; the host reads them back
//      and compares with ReLU(A x B) computed here;
//      while the LOADs run the host also tries bank 0 (must be refused)
//      and bank 3 (must be granted);
//   3. SpMM with weighted aggregation on cluster 1, streams driven here;
//      STORE tile 0 with reordering (tag 1), tiles 1..3 in order;
//   4. SpMM with direct aggregation (max) on cluster 1, STORE and check;
//   5. SpMM whose X arrives late so that one FIFO_CAM must overflow: the
//      exception bit must rise (and must not have risen before).
// Cycle counts: GEMM start-to-done 9T + 8, SpMM len + 5T + 5, measured on
// the cluster start/done pins.
// Every mechanism is counted from the design's own signals (Strassen
// GEMM, ring shift, weighted and direct aggregation, FIFO_CAM hit,
// activation, reordered write-back, host refused on a busy bank,
// exception); a mechanism that never happened is a failure.
module tb_versagnn_top;
  import versagnn_pkg::*;
  localparam int NC = 2, T = 4, N = 2*T, DW = 16, AW = 32, IW = 16;
  localparam int FD = 2, BANKS = 4, DEPTH = 64;
  localparam int TW = $clog2(T);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          instr_valid, instr_ready;
  instr_t        instr;
  logic          host_req, host_we, host_gnt;
  logic [1:0]    host_bank;
  logic [5:0]    host_addr;
  logic [T*AW-1:0] host_wdata, host_rdata;
  logic          ro_wr_en, ro_wr_tag;
  logic [TW-1:0] ro_wr_row, ro_wr_dest;
  logic [NC-1:0] sp_run;
  logic [NC-1:0][3:0][T-1:0]         sp_valid;
  logic [NC-1:0][3:0][T-1:0][IW-1:0] sp_idx;
  logic [NC-1:0][3:0][T-1:0][DW-1:0] sp_val;
  logic [NC-1:0][T-1:0]              x_valid;
  logic [NC-1:0][T-1:0][AW-1:0]      x_val;
  logic          busy, exception;
  logic [15:0]   retired;

  versagnn_top #(.NC(NC), .T(T), .DW(DW), .AW(AW), .IW(IW), .FIFO_DEPTH(FD),
                 .BANKS(BANKS), .DEPTH(DEPTH), .QDEPTH(4)) dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_gemm = 0, n_shift = 0, n_wgt = 0, n_drt = 0, n_hit = 0;
  int n_act = 0, n_reorder = 0, n_refused = 0, n_exc = 0;
  logic [NC-1:0] hit_any;
  for (genvar c = 0; c < NC; c++) begin : g_mon
    logic [3:0][T-1:0][T-1:0] h;
    for (genvar s = 0; s < 4; s++) begin : g_s
      for (genvar i = 0; i < T; i++) begin : g_i
        for (genvar j = 0; j < T; j++) begin : g_j
          assign h[s][i][j] = dut.g_cl[c].u_cl.g_sa[s].u_sa.g_row[i].g_col[j].u_pe.cam_found;
        end
      end
    end
    assign hit_any[c] = |h;
  end
  always @(posedge clk) begin
    if (dut.g_cl[0].u_cl.sa_shift) n_shift++;
    if (|hit_any) n_hit++;
    if (host_req && !host_gnt) n_refused++;
  end

  // cluster start-to-done cycle counts
  int t_start [NC], t_run [NC];
  for (genvar c = 0; c < NC; c++) begin : g_tm
    always @(posedge clk) begin
      if (dut.cl_start[c]) t_start[c] = cyc;
      if (dut.cl_done[c])  t_run[c]   = cyc - t_start[c];
    end
  end

  // ---------------- host helpers ----------------
  task automatic host_write(input int bank, input int addr, input int row [T]);
    @(negedge clk);
    host_req = 1; host_we = 1; host_bank = 2'(bank); host_addr = 6'(addr);
    for (int l = 0; l < T; l++) host_wdata[l*AW +: AW] = AW'(row[l]);
    @(posedge clk);
    while (!host_gnt) @(posedge clk);
    @(negedge clk); host_req = 0; host_we = 0;
  endtask

  task automatic host_read(input int bank, input int addr, output logic [T*AW-1:0] data);
    @(negedge clk);
    host_req = 1; host_we = 0; host_bank = 2'(bank); host_addr = 6'(addr);
    #1;
    while (!host_gnt) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    data = host_rdata;
    @(negedge clk); host_req = 0;
  endtask

  task automatic issue(input instr_t i);
    @(negedge clk);
    instr_valid = 1; instr = i;
    @(posedge clk);
    while (!instr_ready) @(posedge clk);
    @(negedge clk); instr_valid = 0;
  endtask

  task automatic wait_retired(input int n);
    while (int'(retired) < n) @(posedge clk);
  endtask

  function automatic instr_t mk(input opcode_e op, input int cl, input int mat,
                                input int quad, input int bank, input int addr);
    instr_t i = '0;
    i.op = op; i.cl = 2'(cl); i.mat = mat[0]; i.quad = 2'(quad);
    i.bank = 2'(bank); i.addr = 16'(addr);
    i.agg = MODE_WGT_AGG; i.ro = RO_ADD; i.act = ACT_NONE;
    return i;
  endfunction

  // ---------------- SpMM data and stream driver ----------------
  int nnz [4][T];
  int scol [4][T][T];
  int sval [4][T][T];
  int xm [T][T];

  function automatic bit row_ok(input int s, input int i);
    for (int t = 0; t < nnz[s][i]; t++) begin
      int pend;
      pend = 0;
      if (scol[s][i][t] == t) continue;
      for (int n = 0; n < t; n++)
        if (scol[s][i][n] > n && scol[s][i][n] >= t) pend++;
      if (pend >= FD) return 0;
    end
    return 1;
  endfunction

  task automatic gen_sparse();
    for (int s = 0; s < 4; s++)
      for (int i = 0; i < T; i++) begin
        do begin
          nnz[s][i] = 0;
          for (int c = 0; c < T; c++)
            if ($urandom_range(0, 99) < 50) begin
              scol[s][i][nnz[s][i]] = c;
              sval[s][i][nnz[s][i]] = $urandom_range(0, 14) - 7;
              nnz[s][i]++;
            end
        end while (!row_ok(s, i));
      end
    for (int r = 0; r < T; r++)
      for (int c = 0; c < T; c++) xm[r][c] = $urandom_range(0, 200) - 100;
  endtask

  // drives cluster c's streams; X rows start xdel cycles late
  task automatic drive_streams(input int c, input int xdel);
    while (!sp_run[c]) @(negedge clk);
    for (int n = 0; n < 5*T + xdel; n++) begin
      for (int s = 0; s < 4; s++)
        for (int i = 0; i < T; i++) begin
          int e;
          e = n - s*T;
          sp_valid[c][s][i] = (e >= 0 && e < nnz[s][i]);
          sp_idx[c][s][i]   = (e >= 0 && e < nnz[s][i]) ? IW'(scol[s][i][e]) : '0;
          sp_val[c][s][i]   = (e >= 0 && e < nnz[s][i]) ? DW'(sval[s][i][e]) : '0;
        end
      for (int j = 0; j < T; j++) begin
        x_valid[c][j] = (n >= xdel && n < xdel + T);
        x_val[c][j]   = (n >= xdel && n < xdel + T) ? AW'(xm[n-xdel][j]) : '0;
      end
      @(negedge clk);
    end
    sp_valid[c] = '0; x_valid[c] = '0;
  endtask

  int perm [T];

  // runs one SpMM on cluster 1 and checks all four tiles after write-back
  task automatic spmm_check(input pe_mode_e m, input ro_e rop, input bit reorder,
                            inout int nret);
    instr_t i;
    gen_sparse();
    i = mk(OP_SPMM, 1, 0, 0, 0, 0);
    i.agg = m; i.ro = rop; i.len = 16'(T);
    fork
      issue(i);
      drive_streams(1, 0);
    join
    nret++;
    wait_retired(nret);
    checks++;
    if (t_run[1] != T + 5*T + 5) begin
      failures++; $display("FAIL spmm cycles %0d expected %0d", t_run[1], T + 5*T + 5);
    end
    for (int s = 0; s < 4; s++) begin
      i = mk(OP_STORE, 1, 0, s, 2, T*s);
      if (s == 0 && reorder) begin i.reorder = 1; i.tag = 1; end
      issue(i);
    end
    nret += 4;
    wait_retired(nret);
    for (int s = 0; s < 4; s++)
      for (int r = 0; r < T; r++) begin
        logic [T*AW-1:0] row;
        int dst;
        dst = (s == 0 && reorder) ? perm[r] : r;
        host_read(2, T*s + dst, row);
        for (int j = 0; j < T; j++) begin
          longint e;
          e = (m == MODE_DRT_AGG && rop == RO_MAX) ? longint'(32'sh8000_0000) : 0;
          for (int k = 0; k < nnz[s][r]; k++) begin
            int xv;
            xv = xm[scol[s][r][k]][j];
            if (m == MODE_WGT_AGG) e += sval[s][r][k] * xv;
            else if (rop == RO_MAX) e = (xv > e) ? xv : e;
            else e += xv;
          end
          checks++;
          if ($signed(row[j*AW +: AW]) != e) begin
            failures++;
            $display("FAIL spmm mode %0d tile %0d row %0d col %0d: %0d expected %0d",
                     m, s, r, j, $signed(row[j*AW +: AW]), e);
          end else if (j == 0 && s == 0 && reorder && perm[r] != r) n_reorder++;
        end
      end
  endtask

  int a [N][N], b [N][N];
  longint cref [N][N];

  initial begin
    int nret;
    bit gemm_ok;
    instr_valid = 0; instr = '0;
    host_req = 0; host_we = 0; host_bank = 0; host_addr = 0; host_wdata = '0;
    ro_wr_en = 0; ro_wr_tag = 0; ro_wr_row = 0; ro_wr_dest = 0;
    sp_valid = '0; sp_idx = '0; sp_val = '0; x_valid = '0; x_val = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    nret = 0;

    // ---- 1. operands into bank 0 ----
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        a[r][c] = $urandom_range(0, 60) - 30;
        b[r][c] = $urandom_range(0, 60) - 30;
      end
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        cref[r][c] = 0;
        for (int k = 0; k < N; k++) cref[r][c] += a[r][k] * b[k][c];
      end
    for (int q = 0; q < 4; q++)
      for (int r = 0; r < T; r++) begin
        int ra [T], rb [T];
        for (int c = 0; c < T; c++) begin
          ra[c] = a[(q/2)*T + r][(q%2)*T + c];
          rb[c] = b[(q/2)*T + r][(q%2)*T + c];
        end
        host_write(0, T*q + r, ra);
        host_write(0, 4*T + T*q + r, rb);
      end

    // ---- 2. GEMM on cluster 0 ----
    fork
      begin
        for (int q = 0; q < 4; q++) issue(mk(OP_LOAD, 0, 0, q, 0, T*q));
        for (int q = 0; q < 4; q++) issue(mk(OP_LOAD, 0, 1, q, 0, 4*T + T*q));
      end
      begin
        // host traffic while the loads run: bank 0 is the controller's
        logic [T*AW-1:0] d;
        int row0 [T];
        for (int c = 0; c < T; c++) row0[c] = 1000 + c;
        host_write(3, 5, row0);
        // read bank 0 for 40 cycles: refused exactly while the controller
        // uses it
        for (int k = 0; k < 40; k++) begin
          @(negedge clk); host_req = 1; host_we = 0; host_bank = 0; host_addr = 0;
          #1;
          checks++;
          if (host_gnt == (dut.c_req && dut.c_bank == 2'd0)) begin
            failures++; $display("FAIL host grant %0b with controller request %0b", host_gnt, dut.c_req);
          end
        end
        @(negedge clk); host_req = 0;
        host_read(3, 5, d);
        for (int c = 0; c < T; c++) begin
          checks++;
          if (d[c*AW +: AW] != AW'(1000 + c)) begin failures++; $display("FAIL host bank 3 data"); end
        end
      end
    join
    nret += 8;
    issue(mk(OP_GEMM, 0, 0, 0, 0, 0));
    nret++;
    wait_retired(nret);
    checks++;
    if (t_run[0] != 9*T + 8) begin
      failures++; $display("FAIL gemm cycles %0d expected %0d", t_run[0], 9*T + 8);
    end
    for (int q = 0; q < 4; q++) begin
      instr_t i;
      i = mk(OP_STORE, 0, 0, q, 1, T*q);
      i.act = ACT_RELU;
      issue(i);
    end
    nret += 4;
    wait_retired(nret);
    gemm_ok = 1;
    for (int q = 0; q < 4; q++)
      for (int r = 0; r < T; r++) begin
        logic [T*AW-1:0] row;
        host_read(1, T*q + r, row);
        for (int c = 0; c < T; c++) begin
          longint e;
          e = cref[(q/2)*T + r][(q%2)*T + c];
          if (e < 0) begin e = 0; n_act++; end
          checks++;
          if ($signed(row[c*AW +: AW]) != e) begin
            failures++; gemm_ok = 0;
            $display("FAIL C[%0d][%0d] = %0d expected %0d", (q/2)*T + r, (q%2)*T + c,
                     $signed(row[c*AW +: AW]), e);
          end
        end
      end
    if (gemm_ok) n_gemm++;

    // ---- 3. weighted SpMM, tile 0 written back reordered ----
    for (int r = 0; r < T; r++) perm[r] = (3*r + 2) % T;
    for (int r = 0; r < T; r++) begin
      @(negedge clk);
      ro_wr_en = 1; ro_wr_tag = 1; ro_wr_row = TW'(r); ro_wr_dest = TW'(perm[r]);
    end
    @(negedge clk); ro_wr_en = 0;
    begin
      int f0;
      f0 = failures;
      spmm_check(MODE_WGT_AGG, RO_ADD, 1, nret);
      if (failures == f0) n_wgt++;
    end

    // ---- 4. direct aggregation with max ----
    begin
      int f0;
      f0 = failures;
      spmm_check(MODE_DRT_AGG, RO_MAX, 0, nret);
      if (failures == f0) n_drt++;
    end
    checks++;
    if (exception) begin failures++; $display("FAIL exception without overflow"); end

    // ---- 5. provoke a FIFO_CAM overflow ----
    gen_sparse();
    nnz[0][0] = 3;
    scol[0][0][0] = 1; scol[0][0][1] = 2; scol[0][0][2] = 3;
    sval[0][0][0] = 1; sval[0][0][1] = 1; sval[0][0][2] = 1;
    begin
      instr_t i;
      i = mk(OP_SPMM, 1, 0, 0, 0, 0);
      i.len = 16'(2*T);
      fork
        issue(i);
        drive_streams(1, T);
      join
      nret++;
      wait_retired(nret);
    end
    if (exception) n_exc++;

    // ---- mechanism summary ----
    $display("mechanisms: gemm=%0d shift_cycles=%0d wgt_agg=%0d drt_agg=%0d cam_hits=%0d relu_zeroed=%0d reordered_rows=%0d host_refused=%0d exception=%0d",
             n_gemm, n_shift, n_wgt, n_drt, n_hit, n_act, n_reorder, n_refused, n_exc);
    checks += 9;
    if (n_gemm == 0)    begin failures++; $display("FAIL no Strassen GEMM"); end
    if (n_shift == 0)   begin failures++; $display("FAIL no ring shift"); end
    if (n_wgt == 0)     begin failures++; $display("FAIL no weighted aggregation"); end
    if (n_drt == 0)     begin failures++; $display("FAIL no direct aggregation"); end
    if (n_hit == 0)     begin failures++; $display("FAIL no FIFO_CAM hit"); end
    if (n_act == 0)     begin failures++; $display("FAIL no activation"); end
    if (n_reorder == 0) begin failures++; $display("FAIL no reordered write-back"); end
    if (n_refused == 0) begin failures++; $display("FAIL host never refused"); end
    if (n_exc == 0)     begin failures++; $display("FAIL no overflow exception"); end
    checks++;
    if (int'(retired) != nret) begin failures++; $display("FAIL retired %0d expected %0d", retired, nret); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
