// tb_instruction_queue: self-checking test of the instruction FIFO.
// Random pushes and pops against a model queue: order and contents are
// kept, push_ready drops exactly when DEPTH entries are held, pop_valid
// exactly when none are.
module tb_instruction_queue;
  import versagnn_pkg::*;
  localparam int DEPTH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push_valid, push_ready, pop_valid, pop_ready;
  instr_t push_data, pop_data;
  instruction_queue #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, fulls = 0;
  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  instr_t model [$];

  initial begin
    push_valid = 0; pop_ready = 0; push_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      push_valid = $urandom_range(0, 99) < (t < 1500 ? 70 : 30);
      pop_ready  = $urandom_range(0, 99) < (t < 1500 ? 30 : 70);
      push_data  = instr_t'({$urandom, $urandom, $urandom});
      #1;
      checks += 3;
      if (push_ready != (model.size() < DEPTH)) begin failures++; $display("FAIL push_ready"); end
      if (pop_valid != (model.size() > 0)) begin failures++; $display("FAIL pop_valid"); end
      if (model.size() > 0 && pop_data != model[0]) begin failures++; $display("FAIL order"); end
      if (model.size() == DEPTH) fulls++;
      @(posedge clk);
      if (pop_valid && pop_ready) void'(model.pop_front());
      if (push_valid && push_ready) model.push_back(push_data);
    end
    checks++;
    if (fulls == 0) begin failures++; $display("FAIL queue never filled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
