// versagnn_pe: hybrid-mode processing element of the VersaGNN systolic array.
//
// One PE serves all three GNN kernels on the same multiplier, adder and
// accumulator register c (output stationary):
//   MODE_DENSE   (Transformation, GEMM): operand a arrives from the west,
//                b from the north; c += a * b; both are passed on.
//   MODE_WGT_AGG (weighted Aggregation, SpMM): a sparse entry (column
//                index, value) arrives from the west, a dense value arrives
//                in the d register from the south and flows north.  A
//                counter b_row numbers the dense rows.  If the incoming
//                index equals b_row the PE multiplies at once and purges
//                its FIFO_CAM; if it is larger, it searches the FIFO_CAM for
//                b_row (find & skip) and pushes the new entry; on a hit
//                c += a * d.
//   MODE_DRT_AGG (direct Aggregation, SpAcc): the same matching, but on a
//                hit c = RO(c, d) with RO one of add/min/max; the
//                multiplier is not used.
// The matching and operand fetch take one cycle and the MAC/RO the next
// (two-stage pipeline, as in the cycle-by-cycle example of the design), so
// the PE takes one sparse entry and one dense row every cycle with no stall.
//
// prop_c (shift): when set, the PE sends its c register south on the b
// bus instead of b and loads c from the north input.  A column of PEs then
// shifts its accumulators down one row per cycle; this is used to move a
// finished tile of results into the neighbouring tile of the ring.
// clear loads c with the identity of the reduction (0 for add, the largest
// value for min, the smallest for max) and empties the FIFO_CAM.
//
// Follows the design: modes, FIFO_CAM matching, b_row counter, c/d
// registers, prop_c.  This design's own choices: integer arithmetic instead
// of FP16/FP32, the two-stage pipeline register placement, loading c from
// the north while shifting, and the sticky FIFO_CAM overflow flag.
module versagnn_pe
  import versagnn_pkg::*;
#(
  parameter int DW    = 16,  // operand width
  parameter int AW    = 32,  // accumulator width
  parameter int IW    = 16,  // sparse index width
  parameter int FIFO_DEPTH = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  pe_mode_e      mode,
  input  ro_e           ro,
  input  logic          clear,
  input  logic          shift,
  // west -> east: dense a operand or sparse (index, value) entry
  input  logic          a_valid_i,
  input  logic [IW-1:0] a_idx_i,
  input  logic [DW-1:0] a_val_i,
  output logic          a_valid_o,
  output logic [IW-1:0] a_idx_o,
  output logic [DW-1:0] a_val_o,
  // north -> south: dense b operand, or c while shifting
  input  logic          b_valid_i,
  input  logic [AW-1:0] b_val_i,
  output logic          b_valid_o,
  output logic [AW-1:0] b_val_o,
  // south -> north: dense d operand for aggregation
  input  logic          d_valid_i,
  input  logic [AW-1:0] d_val_i,
  output logic          d_valid_o,
  output logic [AW-1:0] d_val_o,
  // accumulator and status
  output logic [AW-1:0] c_o,
  output logic          ovf_o
);

  logic          sparse;
  assign sparse = (mode != MODE_DENSE);

  // ---------------- stage 1: match and fetch ----------------
  logic [IW-1:0] b_row_q;
  logic          direct_hit, cam_lookup, cam_push, cam_purge;
  logic          cam_found, cam_ovf;
  logic [DW-1:0] cam_val;

  always_comb begin
    direct_hit = sparse && d_valid_i && a_valid_i && (a_idx_i == b_row_q);
    cam_lookup = sparse && d_valid_i && !direct_hit;
    cam_purge  = clear || direct_hit;
    // an entry is kept only if its dense row has not passed yet
    cam_push   = sparse && !clear && a_valid_i && !direct_hit &&
                 (a_idx_i > b_row_q || !d_valid_i && a_idx_i >= b_row_q);
  end

  fifo_cam #(.DEPTH(FIFO_DEPTH), .IW(IW), .DW(DW)) u_cam (
    .clk, .rst_n,
    .purge   (cam_purge),
    .lookup  (cam_lookup),
    .key     (b_row_q),
    .found   (cam_found),
    .val     (cam_val),
    .push    (cam_push),
    .push_idx(a_idx_i),
    .push_val(a_val_i),
    .overflow(cam_ovf),
    .count   ()
  );

  logic          fire_q;
  logic [DW-1:0] abuf_q;
  logic [AW-1:0] bbuf_q;
  logic          fire_d;
  logic [DW-1:0] abuf_d;
  logic [AW-1:0] bbuf_d;

  always_comb begin
    if (!sparse) begin
      fire_d = a_valid_i && b_valid_i && !shift;
      abuf_d = a_val_i;
      bbuf_d = b_val_i;
    end else begin
      fire_d = direct_hit || cam_found;
      abuf_d = direct_hit ? a_val_i : cam_val;
      bbuf_d = d_val_i;
    end
    if (clear) fire_d = 1'b0;
  end

  // ---------------- stage 2: MAC or reduction ----------------
  logic signed [2*DW-1:0] prod;
  logic signed [AW-1:0]   mac, red, c_init;
  logic [AW-1:0]          c_q;
  logic                   b_valid_q;
  logic [AW-1:0]          b_val_q;

  always_comb begin
    prod = $signed(abuf_q) * $signed(bbuf_q[DW-1:0]);
    mac  = $signed(c_q) + AW'(prod);
    unique case (ro)
      RO_MIN:  red = ($signed(bbuf_q) < $signed(c_q)) ? $signed(bbuf_q) : $signed(c_q);
      RO_MAX:  red = ($signed(bbuf_q) > $signed(c_q)) ? $signed(bbuf_q) : $signed(c_q);
      default: red = $signed(c_q) + $signed(bbuf_q);
    endcase
    unique case (ro)
      RO_MIN:  c_init = {1'b0, {(AW-1){1'b1}}};
      RO_MAX:  c_init = {1'b1, {(AW-1){1'b0}}};
      default: c_init = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_row_q   <= '0;
      fire_q    <= 1'b0;
      abuf_q    <= '0;
      bbuf_q    <= '0;
      c_q       <= '0;
      ovf_o     <= 1'b0;
      a_valid_o <= 1'b0;
      a_idx_o   <= '0;
      a_val_o   <= '0;
      b_valid_q <= 1'b0;
      b_val_q   <= '0;
      d_valid_o <= 1'b0;
      d_val_o   <= '0;
    end else begin
      fire_q <= fire_d;
      abuf_q <= abuf_d;
      bbuf_q <= bbuf_d;
      // systolic forwarding
      a_valid_o <= a_valid_i && !clear;
      a_idx_o   <= a_idx_i;
      a_val_o   <= a_val_i;
      d_valid_o <= d_valid_i && !clear;
      d_val_o   <= d_val_i;
      b_valid_q <= b_valid_i && !clear && !shift;
      b_val_q   <= b_val_i;
      // dense-row counter for sparse matching
      if (clear)                   b_row_q <= '0;
      else if (sparse && d_valid_i) b_row_q <= b_row_q + IW'(1);
      // accumulator
      if (clear) begin
        c_q    <= c_init;
        ovf_o  <= 1'b0;
        fire_q <= 1'b0;
      end else if (shift) begin
        c_q <= b_val_i;
      end else if (fire_q) begin
        c_q <= (mode == MODE_DRT_AGG) ? red : mac;
      end
      if (cam_ovf) ovf_o <= 1'b1;
    end
  end

  // while shifting, c leaves on the south bus straight from the register,
  // so a column moves one row per cycle
  assign b_valid_o = shift ? 1'b1 : b_valid_q;
  assign b_val_o   = shift ? c_q  : b_val_q;
  assign c_o = c_q;

endmodule
