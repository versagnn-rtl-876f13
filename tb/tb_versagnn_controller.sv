// tb_versagnn_controller: self-checking test of the instruction sequencer.
// The scratchpad, the clusters, the activation unit and the reorder unit
// are modelled here behaviourally:
//   scratchpad  - one-cycle read latency, writes recorded;
//   cluster c   - takes operand rows into a model buffer, answers start
//                 with done after a random delay, returns row r of
//                 output quadrant q as (c*1000 + q*100 + r*10 + lane);
//   activation  - one-cycle register, ReLU on negative lanes;
//   reorder     - dest = (T-1) - row for tag 1, row for tag 0.
// Checks: LOAD writes all T rows of the right quadrant of the right cluster
// with the scratchpad data; GEMM/SPMM give one start pulse to the right
// cluster and retire only after its done; STORE writes T rows, with the
// activation applied, at addr + r or at addr + dest when reordering; the
// retired count, busy and the sticky exception bit.
module tb_versagnn_controller;
  import versagnn_pkg::*;
  localparam int T = 4, NC = 2, DW = 16, AW = 32, BANKS = 4, DEPTH = 64;
  localparam int TW = $clog2(T);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          instr_valid, instr_ready;
  instr_t        instr;
  logic          sp_req, sp_we;
  logic [1:0]    sp_bank;
  logic [5:0]    sp_addr;
  logic [T*AW-1:0] sp_wdata, sp_rdata;
  logic [NC-1:0] cl_wr_en, cl_start, cl_done, cl_ovf;
  logic          cl_wr_mat;
  logic [1:0]    cl_wr_quad, cl_rd_sel;
  logic [TW-1:0] cl_wr_row, cl_rd_row;
  logic [T-1:0][DW-1:0] cl_wr_data;
  cl_cmd_e       cl_cmd;
  pe_mode_e      cl_agg;
  ro_e           cl_ro;
  logic [15:0]   cl_len;
  logic [NC-1:0][T-1:0][AW-1:0] cl_rd_data;
  logic          act_valid, act_valid_o;
  act_e          act_fn;
  logic [T-1:0][AW-1:0] act_x, act_y;
  logic [TW-1:0] ro_row, ro_dest;
  logic          ro_tag;
  logic          busy, exception;
  logic [15:0]   retired;

  versagnn_controller #(.T(T), .NC(NC), .DW(DW), .AW(AW), .BANKS(BANKS), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- behavioural neighbours ----------------
  logic [T*AW-1:0] mem [BANKS][DEPTH];
  always @(posedge clk) begin
    if (sp_req && !sp_we) sp_rdata <= mem[sp_bank][sp_addr];
    if (sp_req && sp_we)  mem[sp_bank][sp_addr] <= sp_wdata;
  end

  int opbuf [NC][2][4][T][T];
  int wr_count [NC];
  always @(posedge clk)
    for (int c = 0; c < NC; c++)
      if (cl_wr_en[c]) begin
        wr_count[c]++;
        for (int l = 0; l < T; l++)
          opbuf[c][cl_wr_mat][cl_wr_quad][cl_wr_row][l] = int'($signed(cl_wr_data[l]));
      end

  int starts [NC];
  int delay [NC];
  logic [NC-1:0] running;
  int sign_neg = 0;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cl_done <= '0; running <= '0;
    end else begin
      cl_done <= '0;
      for (int c = 0; c < NC; c++) begin
        if (cl_start[c]) begin
          starts[c]++; running[c] <= 1; delay[c] = $urandom_range(3, 20);
        end else if (running[c]) begin
          if (delay[c] == 0) begin cl_done[c] <= 1; running[c] <= 0; end
          else delay[c]--;
        end
      end
    end
  end
  always_comb
    for (int c = 0; c < NC; c++)
      for (int l = 0; l < T; l++)
        cl_rd_data[c][l] = AW'((sign_neg ? -1 : 1) * (c*1000 + int'(cl_rd_sel)*100 + int'(cl_rd_row)*10 + l));

  always @(posedge clk or negedge rst_n)
    if (!rst_n) act_valid_o <= 0;
    else begin
      act_valid_o <= act_valid;
      for (int l = 0; l < T; l++)
        act_y[l] <= (act_fn == ACT_RELU && $signed(act_x[l]) < 0) ? '0 : act_x[l];
    end

  assign ro_dest = ro_tag ? TW'(T - 1 - int'(ro_row)) : ro_row;

  // ---------------- helpers ----------------
  task automatic issue(input instr_t i);
    @(negedge clk);
    instr_valid = 1; instr = i;
    @(posedge clk);
    while (!instr_ready) @(posedge clk);
    @(negedge clk); instr_valid = 0;
  endtask

  task automatic wait_idle();
    @(posedge clk);
    while (busy) @(posedge clk);
  endtask

  function automatic instr_t mk(input opcode_e op, input int cl, input int mat,
                                input int quad, input int bank, input int addr);
    instr_t i = '0;
    i.op = op; i.cl = 2'(cl); i.mat = mat[0]; i.quad = 2'(quad);
    i.bank = 2'(bank); i.addr = 16'(addr);
    return i;
  endfunction

  initial begin
    int nret;
    instr_valid = 0; instr = '0; cl_ovf = '0;
    for (int c = 0; c < NC; c++) begin wr_count[c] = 0; starts[c] = 0; end
    for (int b = 0; b < BANKS; b++)
      for (int a = 0; a < DEPTH; a++) mem[b][a] = {$urandom, $urandom, $urandom, $urandom};
    repeat (3) @(posedge clk);
    rst_n = 1;
    nret = 0;
    checks++;
    if (busy || !instr_ready) begin failures++; $display("FAIL not idle after reset"); end

    // LOADs: every cluster, matrix and quadrant
    for (int t = 0; t < 8; t++) begin
      int c, m, q, bank, addr, w0;
      c = $urandom_range(0, NC-1); m = $urandom_range(0, 1); q = $urandom_range(0, 3);
      bank = $urandom_range(0, BANKS-1); addr = $urandom_range(0, DEPTH - T);
      w0 = wr_count[c];
      issue(mk(OP_LOAD, c, m, q, bank, addr));
      wait_idle();
      nret++;
      checks++;
      if (wr_count[c] - w0 != T) begin failures++; $display("FAIL load wrote %0d rows", wr_count[c] - w0); end
      for (int r = 0; r < T; r++)
        for (int l = 0; l < T; l++) begin
          checks++;
          if (opbuf[c][m][q][r][l] != int'($signed(mem[bank][addr + r][l*AW +: DW]))) begin
            failures++; $display("FAIL load cl %0d mat %0d quad %0d row %0d lane %0d", c, m, q, r, l);
          end
        end
    end

    // GEMM / SPMM: start pulse and wait for done
    for (int t = 0; t < 6; t++) begin
      int c, s0;
      instr_t i;
      c = t % NC;
      s0 = starts[c];
      i = mk((t < 3) ? OP_GEMM : OP_SPMM, c, 0, 0, 0, 0);
      i.len = 16'(t);
      issue(i);
      @(posedge clk); #1;
      checks += 2;
      if (cl_cmd != ((t < 3) ? CMD_GEMM : CMD_SPMM) || cl_len != 16'(t)) begin
        failures++; $display("FAIL command fields");
      end
      if (!busy) begin failures++; $display("FAIL not busy while the cluster runs"); end
      wait_idle();
      nret++;
      checks += 2;
      if (starts[c] - s0 != 1) begin failures++; $display("FAIL %0d start pulses", starts[c] - s0); end
      if (running[c]) begin failures++; $display("FAIL retired before done"); end
    end

    // STOREs: plain, ReLU on negative data, reordered
    for (int t = 0; t < 6; t++) begin
      int c, q, bank, addr;
      instr_t i;
      c = $urandom_range(0, NC-1); q = $urandom_range(0, 3);
      bank = $urandom_range(0, BANKS-1); addr = $urandom_range(0, DEPTH - T);
      sign_neg = (t % 3 == 1);
      i = mk(OP_STORE, c, 0, q, bank, addr);
      i.act = (t % 2) ? ACT_RELU : ACT_NONE;
      i.reorder = (t >= 3); i.tag = (t >= 4);
      issue(i);
      wait_idle();
      nret++;
      for (int r = 0; r < T; r++) begin
        int dst;
        dst = (i.reorder && i.tag) ? T - 1 - r : r;
        for (int l = 0; l < T; l++) begin
          int e;
          e = (sign_neg ? -1 : 1) * (c*1000 + q*100 + r*10 + l);
          if (i.act == ACT_RELU && e < 0) e = 0;
          checks++;
          if ($signed(mem[bank][addr + dst][l*AW +: AW]) != e) begin
            failures++;
            $display("FAIL store t=%0d row %0d lane %0d: %0d expected %0d", t, r, l,
                     $signed(mem[bank][addr + dst][l*AW +: AW]), e);
          end
        end
      end
    end
    sign_neg = 0;

    // retired count and exception
    checks += 2;
    if (int'(retired) != nret) begin failures++; $display("FAIL retired %0d expected %0d", retired, nret); end
    if (exception) begin failures++; $display("FAIL spurious exception"); end
    @(negedge clk); cl_ovf = 2'b10;
    @(negedge clk); cl_ovf = '0;
    repeat (3) @(negedge clk);
    checks++;
    if (!exception) begin failures++; $display("FAIL exception not sticky"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
