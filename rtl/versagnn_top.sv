// versagnn_top: the VersaGNN accelerator.
//
// NC clusters of four T x T hybrid systolic tiles (default 2 x 4 = 8 tiles
// of 32 x 32 PEs, 8192 PEs), a banked scratchpad, an instruction queue and
// a controller, an activation unit and a result-reorder unit on the
// write-back path.  Each cluster runs dense matrix products with one level
// of Strassen's algorithm (Transformation phase) or, with its tiles as a
// chain, sparse-dense products and sparse accumulation (Aggregation
// phase) on the same PEs.
//
// Host side (stands in for the processor and the system bus, which are
// outside this RTL):
//   instr_*      push an instruction (instr_t) into the queue;
//   host_*       read/write scratchpad rows; host_gnt tells whether the
//                access was taken this cycle (the controller has priority
//                on the bank it is using); read data one cycle later;
//   ro_wr_*      fill the reorder vectors of the packed-tile write-back;
//   busy/retired/exception  status: exception is a FIFO_CAM overflow.
// Stream side (stands in for the DMA engine and the adjacency/input
// buffers, whose format is not published): per cluster, the sparse rows of
// each tile and the dense X rows of an SpMM, taken while sp_run is high.
module versagnn_top
  import versagnn_pkg::*;
#(
  parameter int NC    = 2,
  parameter int T     = 32,
  parameter int DW    = 16,
  parameter int AW    = 32,
  parameter int IW    = 16,
  parameter int FIFO_DEPTH = 4,
  parameter int BANKS = 4,
  parameter int DEPTH = 1024,
  parameter int QDEPTH = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  // instructions
  input  logic          instr_valid,
  output logic          instr_ready,
  input  instr_t        instr,
  // host scratchpad access
  input  logic          host_req,
  input  logic          host_we,
  input  logic [$clog2(BANKS)-1:0] host_bank,
  input  logic [$clog2(DEPTH)-1:0] host_addr,
  input  logic [T*AW-1:0] host_wdata,
  output logic          host_gnt,
  output logic [T*AW-1:0] host_rdata,
  // reorder vectors
  input  logic          ro_wr_en,
  input  logic          ro_wr_tag,
  input  logic [$clog2(T)-1:0] ro_wr_row,
  input  logic [$clog2(T)-1:0] ro_wr_dest,
  // SpMM streams, per cluster
  output logic [NC-1:0]                      sp_run,
  input  logic [NC-1:0][3:0][T-1:0]          sp_valid,
  input  logic [NC-1:0][3:0][T-1:0][IW-1:0]  sp_idx,
  input  logic [NC-1:0][3:0][T-1:0][DW-1:0]  sp_val,
  input  logic [NC-1:0][T-1:0]               x_valid,
  input  logic [NC-1:0][T-1:0][AW-1:0]       x_val,
  // status
  output logic          busy,
  output logic [15:0]   retired,
  output logic          exception
);
  localparam int BW = $clog2(BANKS);
  localparam int TW = $clog2(T);

  // ---------------- instruction queue ----------------
  logic   q_valid, q_ready;
  instr_t q_data;
  instruction_queue #(.DEPTH(QDEPTH)) u_iq (
    .clk, .rst_n,
    .push_valid(instr_valid), .push_ready(instr_ready), .push_data(instr),
    .pop_valid(q_valid), .pop_ready(q_ready), .pop_data(q_data));

  // ---------------- controller ----------------
  logic          c_req, c_we;
  logic [BW-1:0] c_bank;
  logic [$clog2(DEPTH)-1:0] c_addr;
  logic [T*AW-1:0] c_wdata, c_rdata;
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
  logic          act_v, act_vo;
  act_e          act_fn;
  logic [T-1:0][AW-1:0] act_x, act_y;
  logic [TW-1:0] ro_row, ro_dest;
  logic          ro_tag;

  versagnn_controller #(.T(T), .NC(NC), .DW(DW), .AW(AW), .BANKS(BANKS), .DEPTH(DEPTH)) u_ctrl (
    .clk, .rst_n,
    .instr_valid(q_valid), .instr_ready(q_ready), .instr(q_data),
    .sp_req(c_req), .sp_we(c_we), .sp_bank(c_bank), .sp_addr(c_addr),
    .sp_wdata(c_wdata), .sp_rdata(c_rdata),
    .cl_wr_en, .cl_wr_mat, .cl_wr_quad, .cl_wr_row, .cl_wr_data,
    .cl_start, .cl_cmd, .cl_agg, .cl_ro, .cl_len, .cl_done, .cl_ovf,
    .cl_rd_sel, .cl_rd_row, .cl_rd_data,
    .act_valid(act_v), .act_fn, .act_x, .act_valid_o(act_vo), .act_y,
    .ro_row, .ro_tag, .ro_dest,
    .busy, .retired, .exception);

  // ---------------- clusters ----------------
  for (genvar c = 0; c < NC; c++) begin : g_cl
    strassen_cluster #(.T(T), .DW(DW), .AW(AW), .IW(IW), .FIFO_DEPTH(FIFO_DEPTH)) u_cl (
      .clk, .rst_n,
      .wr_en(cl_wr_en[c]), .wr_mat(cl_wr_mat), .wr_quad(cl_wr_quad),
      .wr_row(cl_wr_row), .wr_data(cl_wr_data),
      .start(cl_start[c]), .cmd(cl_cmd), .agg_mode(cl_agg), .ro(cl_ro), .len(cl_len),
      .busy(), .done(cl_done[c]), .sp_run(sp_run[c]),
      .sp_valid(sp_valid[c]), .sp_idx(sp_idx[c]), .sp_val(sp_val[c]),
      .x_valid(x_valid[c]), .x_val(x_val[c]),
      .rd_sel(cl_rd_sel), .rd_row(cl_rd_row), .rd_data(cl_rd_data[c]),
      .ovf(cl_ovf[c]));
  end

  // ---------------- write-back path ----------------
  activation_unit #(.LANES(T), .AW(AW)) u_act (
    .clk, .rst_n, .valid_i(act_v), .act_i(act_fn), .x_i(act_x),
    .valid_o(act_vo), .y_o(act_y));

  result_reorder #(.ROWS(T), .TAGS(2), .RW(TW)) u_reorder (
    .clk, .rst_n,
    .wr_en(ro_wr_en), .wr_tag(ro_wr_tag), .wr_row(ro_wr_row), .wr_dest(ro_wr_dest),
    .row_i(ro_row), .tag_i(ro_tag), .dest_o(ro_dest));

  // ---------------- scratchpad and its bank arbitration ----------------
  logic [BANKS-1:0]                    sp_req, sp_we;
  logic [BANKS-1:0][$clog2(DEPTH)-1:0] sp_addr;
  logic [BANKS-1:0][T*AW-1:0]          sp_wdata, sp_rdata;
  logic [BW-1:0] c_bank_q, h_bank_q;

  assign host_gnt = host_req && !(c_req && c_bank == host_bank);

  always_comb begin
    for (int b = 0; b < BANKS; b++) begin
      if (c_req && c_bank == BW'(b)) begin
        sp_req[b] = 1'b1; sp_we[b] = c_we; sp_addr[b] = c_addr; sp_wdata[b] = c_wdata;
      end else begin
        sp_req[b]   = host_req && host_bank == BW'(b);
        sp_we[b]    = host_we;
        sp_addr[b]  = host_addr;
        sp_wdata[b] = host_wdata;
      end
    end
  end

  scratchpad #(.BANKS(BANKS), .DEPTH(DEPTH), .WIDTH(T*AW)) u_spad (
    .clk, .req(sp_req), .we(sp_we), .addr(sp_addr), .wdata(sp_wdata), .rdata(sp_rdata));

  always_ff @(posedge clk) begin
    c_bank_q <= c_bank;
    h_bank_q <= host_bank;
  end
  assign c_rdata    = sp_rdata[c_bank_q];
  assign host_rdata = sp_rdata[h_bank_q];

endmodule
