// tb_fifo_cam: self-checking test of the find & skip FIFO.
// A reference model (a sorted queue kept in SystemVerilog arrays) applies
// the same rules: a lookup drops entries below the key, hits if the new
// head equals the key; pushes go to the tail; purge empties.  Random
// sequences of sorted pushes and increasing lookup keys are compared
// cycle by cycle (found, val, count, overflow).
module tb_fifo_cam;
  localparam int DEPTH = 4, IW = 8, DW = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic purge, lookup, found, push, overflow;
  logic [IW-1:0] key, push_idx;
  logic [DW-1:0] val, push_val;
  logic [2:0] count;
  fifo_cam #(.DEPTH(DEPTH), .IW(IW), .DW(DW)) dut (.*);

  int checks = 0, failures = 0;
  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ri [$], rv [$];
  int ovf_seen = 0, hit_seen = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int next_idx, k;
    purge = 0; lookup = 0; push = 0; key = 0; push_idx = 0; push_val = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int seq = 0; seq < 40; seq++) begin
      // purge at the start of a sequence
      @(negedge clk); purge = 1; lookup = 0; push = 0;
      @(posedge clk); ri.delete(); rv.delete();
      @(negedge clk); purge = 0;
      next_idx = $urandom_range(0, 3);
      k = 0;
      for (int c = 0; c < 16; c++) begin
        bit m_found; int m_val; bit m_ovf;
        @(negedge clk);
        lookup = $urandom_range(0, 3) != 0;
        key = IW'(k);
        push = $urandom_range(0, 1);
        push_idx = IW'(next_idx);
        push_val = DW'($urandom_range(0, 255));
        #1;
        // reference
        m_found = 0; m_val = 0;
        if (lookup) begin
          while (ri.size() > 0 && ri[0] < k) begin void'(ri.pop_front()); void'(rv.pop_front()); end
          if (ri.size() > 0 && ri[0] == k) begin m_found = 1; m_val = rv[0]; end
        end
        m_ovf = push && ri.size() == DEPTH;
        check(found == m_found, $sformatf("found %0d vs %0d (key %0d)", found, m_found, k));
        if (m_found) check(val == DW'(m_val), $sformatf("val %0d vs %0d", val, m_val));
        check(overflow == m_ovf, $sformatf("overflow %0d vs %0d", overflow, m_ovf));
        if (m_found) hit_seen++;
        if (m_ovf) ovf_seen++;
        if (push && !m_ovf) begin ri.push_back(next_idx); rv.push_back(push_val); end
        @(posedge clk);
        #1;
        check(int'(count) == ri.size(), $sformatf("count %0d vs %0d", count, ri.size()));
        if (push) next_idx += $urandom_range(1, 3);
        if (lookup) k += $urandom_range(0, 2);
      end
    end
    @(negedge clk); lookup = 0; push = 0;
    check(hit_seen > 0, "no lookup hit exercised");
    check(ovf_seen > 0, "no overflow exercised");
    $display("hits=%0d overflows=%0d", hit_seen, ovf_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
