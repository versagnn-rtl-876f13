// fifo_cam: searchable circular FIFO ("FIFO_CAM") with find & skip.
//
// Each PE keeps the sparse entries (column index, nonzero value) that have
// arrived from the west before the matching dense row has arrived from the
// other side.  Indices are pushed in increasing order, so the queue is
// always sorted from head to tail.  A lookup with a key (the dense row
// number) compares the key with every live entry at once (one "<"
// comparator per entry), builds a mask of entries whose index is not below
// the key, and takes the first set bit after the head, found with a
// leading-zero style priority encoder, as the new head.  Entries in front
// of it are dropped ("skip").  The lookup hits when the new head's index
// equals the key, and the value at the new head is returned.  This follows
// the find & skip algorithm and the FIFO_CAM figure of the design; the hit
// entry itself stays at the head and is skipped by the next lookup, as in
// that algorithm.
//
// Interface (all updates on the rising clock edge, outputs combinational):
//   lookup/key   -> found/val : search in the current contents; on the edge
//                               the entries in front of the new head leave.
//   push/push_idx/push_val    : append at the tail, after the skip.
//   purge                     : empty the queue (dense-rate match, no need
//                               for older entries).
//   overflow                  : push while the queue is full after the skip;
//                               the entry is lost.  The original design
//                               sizes the queue at 4 entries from
//                               experiments and gives no overflow handling;
//                               this flag is this design's addition.
module fifo_cam #(
  parameter int DEPTH = 4,
  parameter int IW    = 16,
  parameter int DW    = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          purge,
  input  logic          lookup,
  input  logic [IW-1:0] key,
  output logic          found,
  output logic [DW-1:0] val,
  input  logic          push,
  input  logic [IW-1:0] push_idx,
  input  logic [DW-1:0] push_val,
  output logic          overflow,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int CW = $clog2(DEPTH+1);

  logic [IW-1:0] idx_q [DEPTH];
  logic [DW-1:0] val_q [DEPTH];
  logic [PW-1:0] head_q;
  logic [CW-1:0] cnt_q;

  // mask in head-relative order: bit o is the entry o places after head
  logic [DEPTH-1:0] mask;
  logic [PW-1:0]    skip;       // number of entries dropped by this lookup
  logic             any;
  logic [PW-1:0]    new_head;
  logic [CW-1:0]    cnt_after;

  function automatic logic [PW-1:0] wrap(input int unsigned p);
    return PW'(p % DEPTH);
  endfunction

  always_comb begin
    for (int o = 0; o < DEPTH; o++) begin
      mask[o] = (CW'(o) < cnt_q) && (idx_q[wrap(int'(head_q) + o)] >= key);
    end
    any  = |mask;
    skip = '0;
    // first set bit of the mask (leading-zero count from the head side)
    for (int o = DEPTH-1; o >= 0; o--) begin
      if (mask[o]) skip = PW'(o);
    end
    new_head  = wrap(int'(head_q) + int'(skip));
    found     = lookup && any && (idx_q[new_head] == key);
    val       = val_q[new_head];
    if (purge)            cnt_after = '0;
    else if (!lookup)     cnt_after = cnt_q;
    else if (!any)        cnt_after = '0;
    else                  cnt_after = cnt_q - CW'(skip);
  end

  assign count    = cnt_q;
  assign overflow = push && (cnt_after == CW'(DEPTH));

  logic [PW-1:0] head_after;
  always_comb begin
    if (purge || (lookup && !any)) head_after = wrap(int'(head_q) + int'(cnt_q));
    else if (lookup)               head_after = new_head;
    else                           head_after = head_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head_q <= '0;
      cnt_q  <= '0;
      for (int i = 0; i < DEPTH; i++) begin
        idx_q[i] <= '0;
        val_q[i] <= '0;
      end
    end else begin
      head_q <= head_after;
      cnt_q  <= cnt_after;
      if (push && !overflow) begin
        idx_q[wrap(int'(head_after) + int'(cnt_after))] <= push_idx;
        val_q[wrap(int'(head_after) + int'(cnt_after))] <= push_val;
        cnt_q <= cnt_after + CW'(1);
      end
    end
  end

endmodule
