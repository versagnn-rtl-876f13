// systolic_array: one T x T tile of hybrid-mode PEs (output stationary).
//
// Dataflow, as in the systolic-array and PE figures of the design:
//   west edge  : one operand stream per PE row (dense a, or sparse
//                (index, value) entries of one row of the sparse matrix),
//                moving east one PE per cycle;
//   north edge : one dense b stream per PE column, moving south;
//   south edge : one dense d stream per PE column, moving north (used by
//                the aggregation modes);
// every PE accumulates its own element of the result in c.
//
// The tile skews its edge inputs itself, so a caller presents element k of
// every row/column in the same cycle:
//   dense mode : row i of the west input is delayed by i cycles and column
//                j of the north input by j cycles;
//   sparse mode: row i of the west input is delayed by T-1-i cycles and
//                column j of the south input by j cycles (the d stream
//                enters at the bottom row).
// Then PE(i,j) sees matching operands in the same cycle.  A south input
// coming from the top of another tile (chain) is already skewed: set
// d_preskewed and it enters unchanged.
//
// shift (prop_c) moves every accumulator one row south per cycle; the
// bottom row leaves on south_val_o and the top row loads north_val_i
// unskewed.  After T shift cycles the tile holds the tile that was above
// it: this is how a finished product moves to the next tile of the ring.
// c_o exposes all accumulators to the output buffer (row-major).
//
// The skew lines and the d_preskewed bypass are this design's choice; the
// paper describes the operand streams but not how they are staggered.
module systolic_array
  import versagnn_pkg::*;
#(
  parameter int T  = 32,
  parameter int DW = 16,
  parameter int AW = 32,
  parameter int IW = 16,
  parameter int FIFO_DEPTH = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  pe_mode_e      mode,
  input  ro_e           ro,
  input  logic          clear,
  input  logic          shift,
  input  logic          d_preskewed,
  // west edge, row i
  input  logic [T-1:0]          west_valid_i,
  input  logic [T-1:0][IW-1:0]  west_idx_i,
  input  logic [T-1:0][DW-1:0]  west_val_i,
  // north edge, column j
  input  logic [T-1:0]          north_valid_i,
  input  logic [T-1:0][AW-1:0]  north_val_i,
  // south edge, column j
  output logic [T-1:0]          south_valid_o,
  output logic [T-1:0][AW-1:0]  south_val_o,
  input  logic [T-1:0]          d_valid_i,
  input  logic [T-1:0][AW-1:0]  d_val_i,
  // top of the d streams (feeds the next tile of a chain)
  output logic [T-1:0]          d_top_valid_o,
  output logic [T-1:0][AW-1:0]  d_top_val_o,
  // results
  output logic [T-1:0][T-1:0][AW-1:0] c_o,
  output logic          ovf_o
);
  localparam int SK = (T > 1) ? T-1 : 1;

  // ---------------- edge skew lines ----------------
  // sk_*[r][k] is the input of row/column r delayed by k+1 cycles
  logic          wsk_v [T][SK];
  logic [IW-1:0] wsk_i [T][SK];
  logic [DW-1:0] wsk_d [T][SK];
  logic          nsk_v [T][SK];
  logic [AW-1:0] nsk_d [T][SK];
  logic          ssk_v [T][SK];
  logic [AW-1:0] ssk_d [T][SK];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < T; r++)
        for (int k = 0; k < SK; k++) begin
          wsk_v[r][k] <= 1'b0; wsk_i[r][k] <= '0; wsk_d[r][k] <= '0;
          nsk_v[r][k] <= 1'b0; nsk_d[r][k] <= '0;
          ssk_v[r][k] <= 1'b0; ssk_d[r][k] <= '0;
        end
    end else begin
      for (int r = 0; r < T; r++) begin
        wsk_v[r][0] <= west_valid_i[r] && !clear;
        wsk_i[r][0] <= west_idx_i[r];
        wsk_d[r][0] <= west_val_i[r];
        nsk_v[r][0] <= north_valid_i[r] && !clear;
        nsk_d[r][0] <= north_val_i[r];
        ssk_v[r][0] <= d_valid_i[r] && !clear;
        ssk_d[r][0] <= d_val_i[r];
        for (int k = 1; k < SK; k++) begin
          wsk_v[r][k] <= wsk_v[r][k-1] && !clear;
          wsk_i[r][k] <= wsk_i[r][k-1];
          wsk_d[r][k] <= wsk_d[r][k-1];
          nsk_v[r][k] <= nsk_v[r][k-1] && !clear;
          nsk_d[r][k] <= nsk_d[r][k-1];
          ssk_v[r][k] <= ssk_v[r][k-1] && !clear;
          ssk_d[r][k] <= ssk_d[r][k-1];
        end
      end
    end
  end

  // skewed edge values
  logic [T-1:0]         w_v;
  logic [T-1:0][IW-1:0] w_i;
  logic [T-1:0][DW-1:0] w_d;
  logic [T-1:0]         n_v;
  logic [T-1:0][AW-1:0] n_d;
  logic [T-1:0]         s_v;
  logic [T-1:0][AW-1:0] s_d;

  always_comb begin
    for (int r = 0; r < T; r++) begin
      int dw, dn, ds;
      dw = (mode == MODE_DENSE) ? r : T-1-r;
      dn = r;
      ds = r;
      if (dw == 0) begin
        w_v[r] = west_valid_i[r]; w_i[r] = west_idx_i[r]; w_d[r] = west_val_i[r];
      end else begin
        w_v[r] = wsk_v[r][dw-1]; w_i[r] = wsk_i[r][dw-1]; w_d[r] = wsk_d[r][dw-1];
      end
      if (shift || dn == 0) begin
        n_v[r] = north_valid_i[r]; n_d[r] = north_val_i[r];
      end else begin
        n_v[r] = nsk_v[r][dn-1]; n_d[r] = nsk_d[r][dn-1];
      end
      if (d_preskewed || ds == 0) begin
        s_v[r] = d_valid_i[r]; s_d[r] = d_val_i[r];
      end else begin
        s_v[r] = ssk_v[r][ds-1]; s_d[r] = ssk_d[r][ds-1];
      end
    end
  end

  // ---------------- PE mesh ----------------
  // Each PE's registered outputs are declared in its own generate scope
  // and read by its east, south and north neighbours.
  logic [T-1:0][T-1:0] ovf;

  for (genvar i = 0; i < T; i++) begin : g_row
    for (genvar j = 0; j < T; j++) begin : g_col
      logic          a_v, b_v, d_v;
      logic [IW-1:0] a_i;
      logic [DW-1:0] a_d;
      logic [AW-1:0] b_d, d_d;
      logic          ai_v, bi_v, di_v;
      logic [IW-1:0] ai_i;
      logic [DW-1:0] ai_d;
      logic [AW-1:0] bi_d, di_d;

      if (j == 0) begin : g_w
        assign ai_v = w_v[i]; assign ai_i = w_i[i]; assign ai_d = w_d[i];
      end else begin : g_w
        assign ai_v = g_row[i].g_col[j-1].a_v;
        assign ai_i = g_row[i].g_col[j-1].a_i;
        assign ai_d = g_row[i].g_col[j-1].a_d;
      end
      if (i == 0) begin : g_n
        assign bi_v = n_v[j]; assign bi_d = n_d[j];
      end else begin : g_n
        assign bi_v = g_row[i-1].g_col[j].b_v;
        assign bi_d = g_row[i-1].g_col[j].b_d;
      end
      if (i == T-1) begin : g_s
        assign di_v = s_v[j]; assign di_d = s_d[j];
        assign south_valid_o[j] = b_v;
        assign south_val_o[j]   = b_d;
      end else begin : g_s
        assign di_v = g_row[i+1].g_col[j].d_v;
        assign di_d = g_row[i+1].g_col[j].d_d;
      end
      if (i == 0) begin : g_top
        assign d_top_valid_o[j] = d_v;
        assign d_top_val_o[j]   = d_d;
      end

      versagnn_pe #(.DW(DW), .AW(AW), .IW(IW), .FIFO_DEPTH(FIFO_DEPTH)) u_pe (
        .clk, .rst_n, .mode, .ro, .clear, .shift,
        .a_valid_i(ai_v), .a_idx_i(ai_i), .a_val_i(ai_d),
        .a_valid_o(a_v),  .a_idx_o(a_i),  .a_val_o(a_d),
        .b_valid_i(bi_v), .b_val_i(bi_d),
        .b_valid_o(b_v),  .b_val_o(b_d),
        .d_valid_i(di_v), .d_val_i(di_d),
        .d_valid_o(d_v),  .d_val_o(d_d),
        .c_o(c_o[i][j]),
        .ovf_o(ovf[i][j])
      );
    end
  end

  assign ovf_o = |ovf;

endmodule
