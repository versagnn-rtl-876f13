// tb_versagnn_pe: self-checking test of the hybrid-mode PE.
//  1. The worked example of the design: sparse row 0 of S holds (col 2,
//     1.0) and (col 3, 2.0), column 0 of D is 1, 3, 4, 3.  The first two
//     cycles find no match, the FIFO_CAM hits column 2 in cycle 2 and
//     column 3 in cycle 3, and the MAC adds 1*4 in cycle 3 and 2*3 in
//     cycle 4: c must be 4 after cycle 3 and 10 after cycle 4.
//  2. Dense MAC: random a, b streams, c = sum a*b.
//  3. Weighted and direct (add, min, max) aggregation on random sparse
//     rows, against a reference computed here.
//  4. prop_c shift: c appears on the south bus, c loads the north value.
//  5. FIFO_CAM overflow: five entries far ahead of the dense row set ovf.
module tb_versagnn_pe;
  import versagnn_pkg::*;
  localparam int DW = 16, AW = 32, IW = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  pe_mode_e mode; ro_e ro;
  logic clear, shift;
  logic a_valid_i, a_valid_o, b_valid_i, b_valid_o, d_valid_i, d_valid_o, ovf_o;
  logic [IW-1:0] a_idx_i, a_idx_o;
  logic [DW-1:0] a_val_i, a_val_o;
  logic [AW-1:0] b_val_i, b_val_o, d_val_i, d_val_o, c_o;
  versagnn_pe #(.DW(DW), .AW(AW), .IW(IW)) dut (.*);

  int checks = 0, failures = 0;
  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic idle();
    a_valid_i = 0; b_valid_i = 0; d_valid_i = 0; clear = 0; shift = 0;
    a_idx_i = 0; a_val_i = 0; b_val_i = 0; d_val_i = 0;
  endtask
  task automatic do_clear(input pe_mode_e m, input ro_e r);
    @(negedge clk); idle(); mode = m; ro = r; clear = 1;
    @(negedge clk); clear = 0;
  endtask

  // one sparse-row-times-dense-column run; entries arrive one per cycle
  task automatic sparse_run(input pe_mode_e m, input ro_e r, input int n, input int cols [],
                            input int vals [], input int dcol [], input int rows);
    longint e;
    do_clear(m, r);
    e = (r == RO_MIN) ? 64'sh7fff_ffff : (r == RO_MAX) ? -64'sh8000_0000 : 0;
    for (int k = 0; k < n; k++) begin
      if (m == MODE_WGT_AGG) e += vals[k] * dcol[cols[k]];
      else if (r == RO_MIN) e = (dcol[cols[k]] < e) ? dcol[cols[k]] : e;
      else if (r == RO_MAX) e = (dcol[cols[k]] > e) ? dcol[cols[k]] : e;
      else e += dcol[cols[k]];
    end
    for (int t = 0; t < rows + 2; t++) begin
      a_valid_i = (t < n);
      a_idx_i   = (t < n) ? IW'(cols[t]) : '0;
      a_val_i   = (t < n) ? DW'(vals[t]) : '0;
      d_valid_i = (t < rows);
      d_val_i   = (t < rows) ? AW'(dcol[t]) : '0;
      @(negedge clk);
    end
    idle();
    check($signed(c_o) == e, $sformatf("mode %0d ro %0d c=%0d expected %0d", m, r, $signed(c_o), e));
    check(!ovf_o, "unexpected overflow");
  endtask

  initial begin
    int cols [], vals [], dcol [];
    longint e;
    idle(); mode = MODE_DENSE; ro = RO_ADD;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // ---- 1. worked example ----
    do_clear(MODE_WGT_AGG, RO_ADD);
    begin
      int dc [4] = '{1, 3, 4, 3};
      for (int t = 0; t < 6; t++) begin
        a_valid_i = (t < 2);
        a_idx_i   = (t == 0) ? 16'd2 : 16'd3;
        a_val_i   = (t == 0) ? 16'd1 : 16'd2;
        d_valid_i = (t < 4);
        d_val_i   = (t < 4) ? AW'(dc[t]) : '0;
        @(posedge clk); #1;
        if (t == 2) check(c_o == 0, $sformatf("example: c=%0d after cycle 2, expected 0", c_o));
        if (t == 3) check(c_o == 4, $sformatf("example: c=%0d after cycle 3, expected 4", c_o));
        if (t == 4) check(c_o == 10, $sformatf("example: c=%0d after cycle 4, expected 10", c_o));
        @(negedge clk);
      end
      idle();
    end

    // ---- 2. dense MAC ----
    for (int trial = 0; trial < 5; trial++) begin
      do_clear(MODE_DENSE, RO_ADD);
      e = 0;
      for (int t = 0; t < 20; t++) begin
        int av, bv;
        av = $urandom_range(0, 60000) - 30000;
        bv = $urandom_range(0, 60000) - 30000;
        a_valid_i = 1; a_val_i = DW'(av);
        b_valid_i = 1; b_val_i = AW'(bv);
        e += longint'(av) * bv;
        @(negedge clk);
        check(a_valid_o && a_val_o == DW'(av), "a not forwarded east");
        check(b_valid_o && b_val_o == AW'(bv), "b not forwarded south");
      end
      idle();
      @(negedge clk);
      check($signed(c_o) == 32'(e), $sformatf("dense c=%0d expected %0d", $signed(c_o), 32'(e)));
    end

    // ---- 3. aggregation ----
    for (int trial = 0; trial < 40; trial++) begin
      int n, rows;
      rows = 12;
      n = 0;
      cols = new[rows]; vals = new[rows]; dcol = new[rows];
      for (int c = 0; c < rows; c++) dcol[c] = $urandom_range(0, 2000) - 1000;
      // sorted entries; at most 3 pending at a time keeps the FIFO_CAM safe
      for (int c = 0; c < rows; c++)
        if ($urandom_range(0, 99) < 40 && (n == 0 || c - n < 3)) begin
          cols[n] = c; vals[n] = $urandom_range(0, 20) - 10; n++;
        end
      sparse_run(MODE_WGT_AGG, RO_ADD, n, cols, vals, dcol, rows);
      sparse_run(MODE_DRT_AGG, ro_e'(trial % 3), n, cols, vals, dcol, rows);
    end

    // ---- 4. shift ----
    do_clear(MODE_DENSE, RO_ADD);
    a_valid_i = 1; a_val_i = 16'd7; b_valid_i = 1; b_val_i = 32'd6;
    @(negedge clk); idle();
    @(negedge clk);
    check(c_o == 42, $sformatf("c=%0d before shift, expected 42", c_o));
    shift = 1; b_val_i = 32'd1234; #1;
    check(b_valid_o && b_val_o == 42, "shift: c not on the south bus");
    @(negedge clk); idle();
    check(c_o == 1234, "shift: c did not load the north value");

    // ---- 5. overflow ----
    do_clear(MODE_WGT_AGG, RO_ADD);
    for (int t = 0; t < 5; t++) begin
      a_valid_i = 1; a_idx_i = IW'(20 + t); a_val_i = 16'd1;
      @(negedge clk);
    end
    idle(); @(negedge clk);
    check(ovf_o, "five pending entries did not overflow the 4-entry FIFO_CAM");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
