// instruction_queue: FIFO of accelerator instructions from the host.
//
// The host processor pushes instructions; the controller pops them in
// order.  A push into a full queue is refused (push_ready low) and counted
// nowhere: the host must check push_ready.  DEPTH entries of type instr_t.
// The design names the queue; its depth and the ready/valid handshake are
// this design's choice.
module instruction_queue
  import versagnn_pkg::*;
#(
  parameter int DEPTH = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   push_valid,
  output logic   push_ready,
  input  instr_t push_data,
  output logic   pop_valid,
  input  logic   pop_ready,
  output instr_t pop_data
);
  localparam int PW = $clog2(DEPTH);
  instr_t        q [DEPTH];
  logic [PW-1:0] rd_q, wr_q;
  logic [PW:0]   cnt_q;
  logic          do_push, do_pop;

  assign push_ready = (cnt_q != (PW+1)'(DEPTH));
  assign pop_valid  = (cnt_q != '0);
  assign pop_data   = q[rd_q];
  assign do_push    = push_valid && push_ready;
  assign do_pop     = pop_valid && pop_ready;

  always_ff @(posedge clk) if (do_push) q[wr_q] <= push_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q <= '0; wr_q <= '0; cnt_q <= '0;
    end else begin
      if (do_push) wr_q <= (wr_q == PW'(DEPTH-1)) ? '0 : wr_q + 1'b1;
      if (do_pop)  rd_q <= (rd_q == PW'(DEPTH-1)) ? '0 : rd_q + 1'b1;
      cnt_q <= cnt_q + (PW+1)'(do_push) - (PW+1)'(do_pop);
    end
  end

  // handshake rules
  a_no_pop_empty: assert property (@(posedge clk) disable iff (!rst_n)
                                   do_pop |-> cnt_q != '0);
  a_cnt_range: assert property (@(posedge clk) disable iff (!rst_n)
                                cnt_q <= (PW+1)'(DEPTH));
endmodule
