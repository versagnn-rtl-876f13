// strassen_cluster: four systolic tiles in a ring, with their adder arrays,
// shared operand buffers and output buffers.
//
// GEMM (Transformation phase): computes C = A x B for one N x N tile,
// N = 2T, with one level of Strassen's algorithm: seven T x T products
// instead of eight.  Two passes run one after the other.  In each pass the
// adder column and adder row of every tile form that tile's operand sums
// S_i from the shared A and B buffers, one column of A-side operand and one
// row of B-side operand per cycle, and the tile multiplies them (stage 1).
// The finished product M_i is added into the C quadrant owned by the tile
// (stage 2); then all tiles shift their products one place along the ring,
// which takes T cycles, and each tile adds or subtracts what it now holds
// into its C quadrant (stage 3).  The schedule (which S_i, which sign after
// how many ring steps) is in versagnn_pkg.  The ring direction and the
// placement of the right-column products follow the cluster figure of the
// design; the placement of the left-column products, running the two
// passes one after the other rather than overlapped, and keeping C in a
// per-tile output buffer with a parallel add are this design's choices.
//
// SpMM (Aggregation phase): the four tiles form a chain.  Each tile takes
// its own sparse tile (rows of (column index, value) entries, indices
// increasing) on its west edge; the dense tile X enters tile 0 from the
// south and climbs through tile 0, 1, 2, 3 in turn.  Because X reaches
// tile s T*s cycles after tile 0, the sparse stream of tile s must start
// T*s cycles after that of tile 0.  At the end each output buffer holds
// its tile's product; results are not summed across tiles.
//
// Interface:
//   wr_*           write one row (T values) of quadrant wr_quad of A
//                  (wr_mat=0) or B (wr_mat=1).
//   start/cmd      start a GEMM or an SpMM; mode/ro select weighted or
//                  direct aggregation and the reduction for SpMM; len is
//                  the number of stream cycles of tile 0 for SpMM.
//   busy/done      done pulses one cycle when the output buffers are final.
//   sp_*           sparse streams, one per tile and PE row, taken while
//                  sp_run is high (from the second cycle after start).
//   x_*            dense X rows for SpMM, one row of T values per cycle.
//   rd_sel/rd_row  read a row of the output buffers: for GEMM rd_sel is
//                  the C quadrant, for SpMM the tile number.
// Timing (GEMM): 1 + T + 2T + 1 + (T+1) for pass 0, 1 + T + 2T + 1 +
// 2(T+1) for pass 1, plus one cycle to clear the output buffers: 9T + 8
// cycles from the start edge to the first edge with done high.  SpMM:
// len + 5T + 5 cycles.
module strassen_cluster
  import versagnn_pkg::*;
#(
  parameter int T  = 32,
  parameter int DW = 16,
  parameter int AW = 32,
  parameter int IW = 16,
  parameter int FIFO_DEPTH = 4,
  parameter int LW = 16       // width of the SpMM stream length
) (
  input  logic          clk,
  input  logic          rst_n,
  // operand buffers
  input  logic          wr_en,
  input  logic          wr_mat,
  input  logic [1:0]    wr_quad,
  input  logic [$clog2(T)-1:0] wr_row,
  input  logic [T-1:0][DW-1:0] wr_data,
  // command
  input  logic          start,
  input  cl_cmd_e       cmd,
  input  pe_mode_e      agg_mode,
  input  ro_e           ro,
  input  logic [LW-1:0] len,
  output logic          busy,
  output logic          done,
  output logic          sp_run,     // SpMM streams are taken in these cycles
  // SpMM streams
  input  logic [3:0][T-1:0]          sp_valid,
  input  logic [3:0][T-1:0][IW-1:0]  sp_idx,
  input  logic [3:0][T-1:0][DW-1:0]  sp_val,
  input  logic [T-1:0]               x_valid,
  input  logic [T-1:0][AW-1:0]       x_val,
  // results
  input  logic [1:0]    rd_sel,
  input  logic [$clog2(T)-1:0] rd_row,
  output logic [T-1:0][AW-1:0] rd_data,
  output logic          ovf
);
  localparam int TW = $clog2(T);
  localparam int CW = LW + 2;

  typedef enum logic [2:0] {
    ST_IDLE, ST_CLEAR, ST_FEED, ST_WAIT, ST_ACC, ST_SHIFT, ST_SPRUN, ST_DONE
  } state_e;

  state_e        state_q;
  cl_cmd_e       cmd_q;
  pe_mode_e      agg_q;
  ro_e           ro_q;
  logic          pass_q;
  logic [1:0]    rot_q;
  logic [CW-1:0] cnt_q;
  logic [LW-1:0] len_q;

  // ---------------- shared operand buffers ----------------
  logic [DW-1:0] abuf [4][T][T];
  logic [DW-1:0] bbuf [4][T][T];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int c = 0; c < T; c++) begin
        if (!wr_mat) abuf[wr_quad][wr_row][c] <= wr_data[c];
        else         bbuf[wr_quad][wr_row][c] <= wr_data[c];
      end
    end
  end

  // ---------------- adder arrays ----------------
  logic [TW-1:0] k;
  assign k = cnt_q[TW-1:0];

  logic [3:0]                  feed_v;
  logic [3:0][T-1:0][DW-1:0]   ax, ay, bx, by;
  add_op_e                     aop [4];
  add_op_e                     bop [4];
  logic [3:0]                  acol_v, brow_v;
  logic [3:0][T-1:0][DW-1:0]   acol_z, brow_z;

  always_comb begin
    for (int s = 0; s < 4; s++) begin
      operand_sel_t as, bs;
      as = strassen_a_sel(int'(pass_q), s);
      bs = strassen_b_sel(int'(pass_q), s);
      aop[s] = as.op;
      bop[s] = bs.op;
      feed_v[s] = (state_q == ST_FEED);
      for (int l = 0; l < T; l++) begin
        ax[s][l] = abuf[as.x][l][k];   // column k of the A quadrants
        ay[s][l] = abuf[as.y][l][k];
        bx[s][l] = bbuf[bs.x][k][l];   // row k of the B quadrants
        by[s][l] = bbuf[bs.y][k][l];
      end
    end
  end

  for (genvar s = 0; s < 4; s++) begin : g_add
    adder_array #(.LANES(T), .DW(DW)) u_col (
      .clk, .rst_n, .valid_i(feed_v[s]), .op_i(aop[s]),
      .x_i(ax[s]), .y_i(ay[s]), .valid_o(acol_v[s]), .z_o(acol_z[s]));
    adder_array #(.LANES(T), .DW(DW)) u_row (
      .clk, .rst_n, .valid_i(feed_v[s]), .op_i(bop[s]),
      .x_i(bx[s]), .y_i(by[s]), .valid_o(brow_v[s]), .z_o(brow_z[s]));
  end

  // ---------------- the four tiles ----------------
  pe_mode_e  sa_mode;
  logic      sa_clear, sa_shift, gemm;
  assign gemm     = (cmd_q == CMD_GEMM);
  assign sa_mode  = gemm ? MODE_DENSE : agg_q;
  assign sa_clear = (state_q == ST_CLEAR);
  assign sa_shift = (state_q == ST_SHIFT);

  logic [3:0][T-1:0]          w_v, n_v, s_v, dt_v, dn_v;
  logic [3:0][T-1:0][IW-1:0]  w_i;
  logic [3:0][T-1:0][DW-1:0]  w_d;
  logic [3:0][T-1:0][AW-1:0]  n_d, s_d, dt_d, dn_d;
  logic [3:0][T-1:0][T-1:0][AW-1:0] c_sa;
  logic [3:0]                 ovf_sa;

  for (genvar s = 0; s < 4; s++) begin : g_edge
    always_comb begin
      for (int l = 0; l < T; l++) begin
        if (gemm) begin
          w_v[s][l] = acol_v[s];
          w_i[s][l] = '0;
          w_d[s][l] = acol_z[s][l];
        end else begin
          w_v[s][l] = sp_valid[s][l] && (state_q == ST_SPRUN);
          w_i[s][l] = sp_idx[s][l];
          w_d[s][l] = sp_val[s][l];
        end
        // north edge: B-side operand, or the ring while shifting
        if (sa_shift) begin
          n_v[s][l] = s_v[(s+3)%4][l];
          n_d[s][l] = s_d[(s+3)%4][l];
        end else begin
          n_v[s][l] = brow_v[s] && gemm;
          n_d[s][l] = AW'($signed(brow_z[s][l]));
        end
      end
    end
    // south d edge: X into tile 0, tile s-1 into tile s
    if (s == 0) begin : g_x
      always_comb
        for (int l = 0; l < T; l++) begin
          dn_v[0][l] = x_valid[l] && !gemm && (state_q == ST_SPRUN);
          dn_d[0][l] = x_val[l];
        end
    end else begin : g_chain
      assign dn_v[s] = dt_v[s-1];
      assign dn_d[s] = dt_d[s-1];
    end
  end

  for (genvar s = 0; s < 4; s++) begin : g_sa
    systolic_array #(.T(T), .DW(DW), .AW(AW), .IW(IW), .FIFO_DEPTH(FIFO_DEPTH)) u_sa (
      .clk, .rst_n, .mode(sa_mode), .ro(ro_q), .clear(sa_clear), .shift(sa_shift),
      .d_preskewed(s != 0),
      .west_valid_i(w_v[s]), .west_idx_i(w_i[s]), .west_val_i(w_d[s]),
      .north_valid_i(n_v[s]), .north_val_i(n_d[s]),
      .south_valid_o(s_v[s]), .south_val_o(s_d[s]),
      .d_valid_i(dn_v[s]), .d_val_i(dn_d[s]),
      .d_top_valid_o(dt_v[s]), .d_top_val_o(dt_d[s]),
      .c_o(c_sa[s]), .ovf_o(ovf_sa[s]));
  end
  assign ovf = |ovf_sa;

  // ---------------- output buffers ----------------
  logic [AW-1:0] obuf [4][T][T];

  always_ff @(posedge clk) begin
    if (state_q == ST_IDLE && start) begin
      for (int s = 0; s < 4; s++)
        for (int i = 0; i < T; i++)
          for (int j = 0; j < T; j++)
            obuf[s][i][j] <= '0;
    end else if (state_q == ST_ACC) begin
      for (int s = 0; s < 4; s++) begin
        acc_sign_e g;
        g = gemm ? strassen_sign(int'(pass_q), int'(rot_q), s) : SGN_ADD;
        for (int i = 0; i < T; i++)
          for (int j = 0; j < T; j++)
            unique case (g)
              SGN_ADD: obuf[s][i][j] <= obuf[s][i][j] + c_sa[s][i][j];
              SGN_SUB: obuf[s][i][j] <= obuf[s][i][j] - c_sa[s][i][j];
              default: ;
            endcase
      end
    end
  end

  logic [1:0] rd_site;
  assign rd_site = gemm ? site_of_quad(rd_sel) : rd_sel;
  always_comb
    for (int j = 0; j < T; j++) rd_data[j] = obuf[rd_site][rd_row][j];

  // ---------------- sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= ST_IDLE;
      cmd_q   <= CMD_GEMM;
      agg_q   <= MODE_WGT_AGG;
      ro_q    <= RO_ADD;
      pass_q  <= 1'b0;
      rot_q   <= '0;
      cnt_q   <= '0;
      len_q   <= '0;
    end else begin
      unique case (state_q)
        ST_IDLE: if (start) begin
          cmd_q   <= cmd;
          agg_q   <= (agg_mode == MODE_DENSE) ? MODE_WGT_AGG : agg_mode;
          ro_q    <= ro;
          len_q   <= len;
          pass_q  <= 1'b0;
          rot_q   <= '0;
          cnt_q   <= '0;
          state_q <= ST_CLEAR;
        end
        ST_CLEAR: begin
          cnt_q   <= '0;
          state_q <= gemm ? ST_FEED : ST_SPRUN;
        end
        ST_FEED: begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == CW'(T-1)) begin
            cnt_q   <= '0;
            state_q <= ST_WAIT;
          end
        end
        ST_WAIT: begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == CW'(2*T-1)) begin
            cnt_q   <= '0;
            state_q <= ST_ACC;
          end
        end
        ST_SPRUN: begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == CW'(len_q) + CW'(5*T + 1)) begin
            cnt_q   <= '0;
            state_q <= ST_ACC;
          end
        end
        ST_ACC: begin
          if (!gemm)                                        state_q <= ST_DONE;
          else if (int'(rot_q) < strassen_rots(int'(pass_q))) state_q <= ST_SHIFT;
          else if (!pass_q) begin
            pass_q  <= 1'b1;
            rot_q   <= '0;
            state_q <= ST_CLEAR;
          end else                                          state_q <= ST_DONE;
        end
        ST_SHIFT: begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == CW'(T-1)) begin
            cnt_q   <= '0;
            rot_q   <= rot_q + 1'b1;
            state_q <= ST_ACC;
          end
        end
        default: state_q <= ST_IDLE;   // ST_DONE
      endcase
    end
  end

  assign busy = (state_q != ST_IDLE);
  assign done = (state_q == ST_DONE);
  assign sp_run = (state_q == ST_SPRUN);

endmodule
