// tb_versagnn_full: the accelerator at its default size (two clusters of
// four 32 x 32 tiles, 512 KiB scratchpad) taken through one complete dense
// operation: the host writes a random 64 x 64 A and B into bank 0, eight
// LOADs fill cluster 0's operand buffers, one Strassen GEMM runs, four
// STOREs with ReLU write C to bank 1, and the host reads every row back and
// compares it with ReLU(A x B) computed here.  The GEMM start-to-done
// count must be 9T + 8 = 296 cycles.  The top is instantiated with no
// parameter overrides.
module tb_versagnn_full;
  import versagnn_pkg::*;
  localparam int NC = 2, T = 32, N = 2*T, DW = 16, AW = 32, IW = 16;
  localparam int FD = 4, BANKS = 4, DEPTH = 1024;
  localparam int TW = $clog2(T);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          instr_valid, instr_ready;
  instr_t        instr;
  logic          host_req, host_we, host_gnt;
  logic [1:0]    host_bank;
  logic [9:0]    host_addr;
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

  versagnn_top dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_gemm = 0, n_shift = 0, n_act = 0, n_refused = 0;
  always @(posedge clk) begin
    if (dut.g_cl[0].u_cl.sa_shift) n_shift++;
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
    host_req = 1; host_we = 1; host_bank = 2'(bank); host_addr = 10'(addr);
    for (int l = 0; l < T; l++) host_wdata[l*AW +: AW] = AW'(row[l]);
    @(posedge clk);
    while (!host_gnt) @(posedge clk);
    @(negedge clk); host_req = 0; host_we = 0;
  endtask

  task automatic host_read(input int bank, input int addr, output logic [T*AW-1:0] data);
    @(negedge clk);
    host_req = 1; host_we = 0; host_bank = 2'(bank); host_addr = 10'(addr);
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

    checks += 3;
    if (n_gemm == 0)    begin failures++; $display("FAIL no Strassen GEMM"); end
    if (n_shift == 0)   begin failures++; $display("FAIL no ring shift"); end
    if (n_refused == 0) begin failures++; $display("FAIL host never refused"); end
    checks++;
    if (int'(retired) != nret) begin failures++; $display("FAIL retired %0d expected %0d", retired, nret); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
