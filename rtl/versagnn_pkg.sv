// versagnn_pkg: types and constants shared by the VersaGNN datapath.
//
// The processing element (PE) runs in one of three operation modes, the
// ones the PE figure of the design names: dense GEMM for the Transformation
// phase, sparse-dense SpMM for weighted Aggregation, and sparse accumulate
// ("SpAcc") for direct Aggregation, where the neighbour value is combined
// with a reduction operator (RO) instead of multiplied.  The Strassen
// operand-selection codes used by the tile cluster live here as well.
//
// Number format: the original design uses FP16 operands and FP32
// accumulators.  This RTL uses two's-complement integers of the same widths
// (16-bit operands, 32-bit accumulators); that is this design's own choice.
package versagnn_pkg;

  // PE operation mode.
  typedef enum logic [1:0] {
    MODE_DENSE   = 2'd0,  // c += a * b, a from west, b from north
    MODE_WGT_AGG = 2'd1,  // c += a * d, a sparse from west, d dense from south
    MODE_DRT_AGG = 2'd2   // c = RO(c, d), a sparse only gives the match
  } pe_mode_e;

  // Reduction operator for direct aggregation.  "Mean" is ADD followed by
  // a division by the degree, which is left to software.
  typedef enum logic [1:0] {
    RO_ADD = 2'd0,
    RO_MIN = 2'd1,
    RO_MAX = 2'd2
  } ro_e;

  // Operation of a 1-D adder array (adder row / adder column of a tile).
  typedef enum logic [1:0] {
    ADD_PASS_X = 2'd0,   // z = x
    ADD_X_PLUS_Y = 2'd1, // z = x + y
    ADD_X_MINUS_Y = 2'd2,// z = x - y
    ADD_ZERO = 2'd3      // z = 0 (tile idle in this group)
  } add_op_e;

  // Cluster commands.
  typedef enum logic [1:0] {
    CMD_GEMM = 2'd0,     // one-level Strassen C = A x B on an N x N tile
    CMD_SPMM = 2'd1      // batched SpMM, tiles chained, dense X from south
  } cl_cmd_e;

  // One Strassen operand: quadrant x (op) quadrant y.  Quadrant numbers
  // 0..3 are (row, col) = (0,0), (0,1), (1,0), (1,1) of the N x N tile.
  typedef struct packed {
    logic [1:0] x;
    logic [1:0] y;
    add_op_e    op;
  } operand_sel_t;

  // ------------------------------------------------------------------
  // One-level Strassen schedule on a ring of four tiles.
  //
  // Sites (ring order, data moves site s -> s+1):
  //   site 0 = top-left tile, 1 = top-right, 2 = bottom-right,
  //   3 = bottom-left.
  // Quadrants of A, B, C: 0 = (0,0), 1 = (0,1), 2 = (1,0), 3 = (1,1).
  // C quadrant owned (accumulated) by each site: C0, C2, C3, C1.
  // Pass 0 ("right column" groups):
  //   site0 M6=(A1-A3)(B2+B3)  site1 M1=(A2+A3)B0
  //   site2 M2=A0(B1-B3)       site3 M4=(A1+A0)B3
  //   rotation 0: C0+=M6 C2+=M1 C3+=M2 C1+=M4
  //   rotation 1: C0-=M4 C3-=M1 C1+=M2
  // Pass 1 ("left column" groups, one tile idle):
  //   site0 M3=A3(B2-B0)  site1 M5=(A2-A0)(B0+B1)  site2 M0=(A3+A0)(B0+B3)
  //   rotation 0: C0+=M3 C3+=M0
  //   rotation 1: C2+=M3 C3+=M5
  //   rotation 2: C0+=M0
  // "rotation r" means after every tile has passed its product r places
  // along the ring.
  // ------------------------------------------------------------------
  typedef enum logic [1:0] {
    SGN_NONE = 2'd0,
    SGN_ADD  = 2'd1,
    SGN_SUB  = 2'd2
  } acc_sign_e;

  function automatic int strassen_rots(input int pass);
    return (pass == 0) ? 1 : 2;
  endfunction

  function automatic operand_sel_t strassen_a_sel(input int pass, input int site);
    operand_sel_t s;
    s = '{x: 2'd0, y: 2'd0, op: ADD_ZERO};
    if (pass == 0) begin
      unique case (site)
        0: s = '{x: 2'd1, y: 2'd3, op: ADD_X_MINUS_Y};
        1: s = '{x: 2'd2, y: 2'd3, op: ADD_X_PLUS_Y};
        2: s = '{x: 2'd0, y: 2'd0, op: ADD_PASS_X};
        default: s = '{x: 2'd1, y: 2'd0, op: ADD_X_PLUS_Y};
      endcase
    end else begin
      unique case (site)
        0: s = '{x: 2'd3, y: 2'd0, op: ADD_PASS_X};
        1: s = '{x: 2'd2, y: 2'd0, op: ADD_X_MINUS_Y};
        2: s = '{x: 2'd3, y: 2'd0, op: ADD_X_PLUS_Y};
        default: s = '{x: 2'd0, y: 2'd0, op: ADD_ZERO};
      endcase
    end
    return s;
  endfunction

  function automatic operand_sel_t strassen_b_sel(input int pass, input int site);
    operand_sel_t s;
    s = '{x: 2'd0, y: 2'd0, op: ADD_ZERO};
    if (pass == 0) begin
      unique case (site)
        0: s = '{x: 2'd2, y: 2'd3, op: ADD_X_PLUS_Y};
        1: s = '{x: 2'd0, y: 2'd0, op: ADD_PASS_X};
        2: s = '{x: 2'd1, y: 2'd3, op: ADD_X_MINUS_Y};
        default: s = '{x: 2'd3, y: 2'd0, op: ADD_PASS_X};
      endcase
    end else begin
      unique case (site)
        0: s = '{x: 2'd2, y: 2'd0, op: ADD_X_MINUS_Y};
        1: s = '{x: 2'd0, y: 2'd1, op: ADD_X_PLUS_Y};
        2: s = '{x: 2'd0, y: 2'd3, op: ADD_X_PLUS_Y};
        default: s = '{x: 2'd0, y: 2'd0, op: ADD_ZERO};
      endcase
    end
    return s;
  endfunction

  function automatic acc_sign_e strassen_sign(input int pass, input int rot, input int site);
    acc_sign_e g;
    g = SGN_NONE;
    if (pass == 0) begin
      if (rot == 0) g = SGN_ADD;
      else if (rot == 1) begin
        unique case (site)
          0: g = SGN_SUB;
          2: g = SGN_SUB;
          3: g = SGN_ADD;
          default: g = SGN_NONE;
        endcase
      end
    end else begin
      if (rot == 0 && (site == 0 || site == 2)) g = SGN_ADD;
      if (rot == 1 && (site == 1 || site == 2)) g = SGN_ADD;
      if (rot == 2 && site == 0) g = SGN_ADD;
    end
    return g;
  endfunction

  // C quadrant held by a site in GEMM, and the inverse
  function automatic logic [1:0] site_of_quad(input logic [1:0] q);
    unique case (q)
      2'd0: return 2'd0;
      2'd1: return 2'd3;
      2'd2: return 2'd1;
      default: return 2'd2;
    endcase
  endfunction

  // Activation applied on write-back.
  typedef enum logic [1:0] {
    ACT_NONE  = 2'd0,
    ACT_RELU  = 2'd1,
    ACT_LEAKY = 2'd2
  } act_e;

  // ------------------------------------------------------------------
  // Accelerator instructions (this design's own format; the original
  // design has an instruction queue but does not publish its encoding).
  //   OP_LOAD  : T scratchpad rows bank:addr.. -> operand buffer quadrant
  //              quad of A (mat=0) or B (mat=1) of cluster cl.  The low
  //              16 bits of each 32-bit word are the operand.
  //   OP_GEMM  : Strassen C = A x B in cluster cl.
  //   OP_SPMM  : SpMM in cluster cl with mode agg / reduction ro; the
  //              sparse and dense streams come from the stream ports.
  //   OP_STORE : T result rows of output buffer quad of cluster cl ->
  //              activation act -> scratchpad rows bank:addr + r, or
  //              bank:addr + reorder(r, tag) if reorder is set.
  // ------------------------------------------------------------------
  typedef enum logic [1:0] {
    OP_LOAD  = 2'd0,
    OP_GEMM  = 2'd1,
    OP_SPMM  = 2'd2,
    OP_STORE = 2'd3
  } opcode_e;

  typedef struct packed {
    opcode_e     op;
    logic [1:0]  cl;
    logic        mat;
    logic [1:0]  quad;
    logic [1:0]  bank;
    logic [15:0] addr;
    pe_mode_e    agg;
    ro_e         ro;
    act_e        act;
    logic        reorder;
    logic        tag;
    logic [15:0] len;
  } instr_t;

endpackage
