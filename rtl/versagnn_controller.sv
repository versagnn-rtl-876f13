// versagnn_controller: executes instructions from the instruction queue.
//
// One instruction at a time, in order:
//   OP_LOAD  reads T consecutive scratchpad rows (one per cycle, data one
//            cycle later) and writes them as rows 0..T-1 of an operand
//            quadrant of one cluster;
//   OP_GEMM/OP_SPMM pulse the cluster's start and wait for its done;
//   OP_STORE reads T rows of a cluster output buffer, passes them through
//            the activation unit (one cycle) and writes them to the
//            scratchpad, at addr + r or, for SpMM of a reordered tile, at
//            addr + row_reordering[r][tag] from the result-reorder unit.
// While an instruction runs the controller owns the scratchpad port of
// that instruction's bank; the host reaches the other banks.
// status: busy, a count of retired instructions, and a sticky exception
// bit set when a cluster reports a FIFO_CAM overflow.
//
// The design describes a controller with an instruction queue and a DMA
// engine that fills the scratchpad; neither their instruction set nor
// their timing is published, so this sequencer and the instruction format
// in versagnn_pkg are this design's own.
module versagnn_controller
  import versagnn_pkg::*;
#(
  parameter int T  = 32,
  parameter int NC = 2,
  parameter int DW = 16,
  parameter int AW = 32,
  parameter int BANKS = 4,
  parameter int DEPTH = 1024
) (
  input  logic          clk,
  input  logic          rst_n,
  // instruction queue
  input  logic          instr_valid,
  output logic          instr_ready,
  input  instr_t        instr,
  // scratchpad port used by the controller (one bank at a time)
  output logic          sp_req,
  output logic          sp_we,
  output logic [$clog2(BANKS)-1:0] sp_bank,
  output logic [$clog2(DEPTH)-1:0] sp_addr,
  output logic [T*AW-1:0] sp_wdata,
  input  logic [T*AW-1:0] sp_rdata,
  // clusters
  output logic [NC-1:0] cl_wr_en,
  output logic          cl_wr_mat,
  output logic [1:0]    cl_wr_quad,
  output logic [$clog2(T)-1:0] cl_wr_row,
  output logic [T-1:0][DW-1:0] cl_wr_data,
  output logic [NC-1:0] cl_start,
  output cl_cmd_e       cl_cmd,
  output pe_mode_e      cl_agg,
  output ro_e           cl_ro,
  output logic [15:0]   cl_len,
  input  logic [NC-1:0] cl_done,
  input  logic [NC-1:0] cl_ovf,
  output logic [1:0]    cl_rd_sel,
  output logic [$clog2(T)-1:0] cl_rd_row,
  input  logic [NC-1:0][T-1:0][AW-1:0] cl_rd_data,
  // activation unit on the write-back path
  output logic          act_valid,
  output act_e          act_fn,
  output logic [T-1:0][AW-1:0] act_x,
  input  logic          act_valid_o,
  input  logic [T-1:0][AW-1:0] act_y,
  // result reorder unit
  output logic [$clog2(T)-1:0] ro_row,
  output logic          ro_tag,
  input  logic [$clog2(T)-1:0] ro_dest,
  // status to the host
  output logic          busy,
  output logic [15:0]   retired,
  output logic          exception
);
  localparam int TW = $clog2(T);
  localparam int AWD = $clog2(DEPTH);

  typedef enum logic [2:0] { C_IDLE, C_LOAD, C_RUN, C_WAIT, C_STORE, C_FIN } cstate_e;

  cstate_e       st_q;
  instr_t        in_q;
  logic [TW:0]   r_q;          // row counter (T+1 or T+2 steps)
  logic          ld_v_q;       // scratchpad read data valid next cycle
  logic [TW-1:0] ld_row_q;
  logic [AWD-1:0] st_addr_q;   // write address following the activation

  assign instr_ready = (st_q == C_IDLE);
  assign busy        = (st_q != C_IDLE);

  // ---------------- scratchpad port ----------------
  logic ld_issue, st_write;
  assign ld_issue = (st_q == C_LOAD) && (r_q < (TW+1)'(T));
  assign st_write = (st_q == C_STORE) && act_valid_o;

  always_comb begin
    sp_req   = ld_issue || st_write;
    sp_we    = st_write;
    sp_bank  = $clog2(BANKS)'(in_q.bank);
    sp_addr  = st_write ? st_addr_q : AWD'(in_q.addr) + AWD'(r_q);
    sp_wdata = act_y;
  end

  // ---------------- operand load ----------------
  always_comb begin
    for (int c = 0; c < NC; c++) cl_wr_en[c] = ld_v_q && (in_q.cl == 2'(c));
    cl_wr_mat  = in_q.mat;
    cl_wr_quad = in_q.quad;
    cl_wr_row  = ld_row_q;
    for (int l = 0; l < T; l++) cl_wr_data[l] = sp_rdata[l*AW +: DW];
  end

  // ---------------- commands ----------------
  always_comb begin
    for (int c = 0; c < NC; c++) cl_start[c] = (st_q == C_RUN) && (in_q.cl == 2'(c));
    cl_cmd = (in_q.op == OP_GEMM) ? CMD_GEMM : CMD_SPMM;
    cl_agg = in_q.agg;
    cl_ro  = in_q.ro;
    cl_len = in_q.len;
  end

  // ---------------- result store ----------------
  logic st_read;
  assign st_read   = (st_q == C_STORE) && (r_q < (TW+1)'(T));
  assign cl_rd_sel = in_q.quad;
  assign cl_rd_row = TW'(r_q);
  assign ro_row    = TW'(r_q);
  assign ro_tag    = in_q.tag;
  assign act_valid = st_read;
  assign act_fn    = in_q.act;
  always_comb begin
    act_x = cl_rd_data[0];
    for (int c = 0; c < NC; c++) if (in_q.cl == 2'(c)) act_x = cl_rd_data[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q      <= C_IDLE;
      in_q      <= '0;
      r_q       <= '0;
      ld_v_q    <= 1'b0;
      ld_row_q  <= '0;
      st_addr_q <= '0;
      retired   <= '0;
      exception <= 1'b0;
    end else begin
      ld_v_q   <= ld_issue;
      ld_row_q <= TW'(r_q);
      if (st_read)
        st_addr_q <= AWD'(in_q.addr) + (in_q.reorder ? AWD'(ro_dest) : AWD'(r_q));
      if (|cl_ovf) exception <= 1'b1;
      unique case (st_q)
        C_IDLE: if (instr_valid) begin
          in_q <= instr;
          r_q  <= '0;
          unique case (instr.op)
            OP_LOAD:  st_q <= C_LOAD;
            OP_STORE: st_q <= C_STORE;
            default:  st_q <= C_RUN;
          endcase
        end
        C_LOAD: begin
          r_q <= r_q + 1'b1;
          if (r_q == (TW+1)'(T)) st_q <= C_FIN;    // last write lands now
        end
        C_RUN:  st_q <= C_WAIT;
        C_WAIT: if (|(cl_done & (NC'(1) << in_q.cl))) st_q <= C_FIN;
        C_STORE: begin
          if (r_q < (TW+1)'(T)) r_q <= r_q + 1'b1;
          if (r_q == (TW+1)'(T) && !act_valid_o) st_q <= C_FIN;
        end
        default: begin               // C_FIN
          retired <= retired + 1'b1;
          st_q    <= C_IDLE;
        end
      endcase
    end
  end

endmodule
