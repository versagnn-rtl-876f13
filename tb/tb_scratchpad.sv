// tb_scratchpad: self-checking test of the banked scratchpad.
// Random writes and reads on all banks at once, compared with a model
// kept here; read data must arrive one cycle after the request, and a
// write to one bank must not disturb the others.
module tb_scratchpad;
  localparam int BANKS = 4, DEPTH = 64, WIDTH = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [BANKS-1:0] req, we;
  logic [BANKS-1:0][5:0] addr;
  logic [BANKS-1:0][WIDTH-1:0] wdata, rdata;
  scratchpad #(.BANKS(BANKS), .DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  int checks = 0, failures = 0;
  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic [WIDTH-1:0] model [BANKS][DEPTH];

  initial begin
    logic [BANKS-1:0] rd_pending;
    logic [WIDTH-1:0] rd_exp [BANKS];
    req = '0; we = '0; addr = '0; wdata = '0;
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      for (int b = 0; b < BANKS; b++) begin
        req[b] = 1; we[b] = 1; addr[b] = 6'(a);
        wdata[b] = {$urandom, $urandom};
        model[b][a] = wdata[b];
      end
    end
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      for (int b = 0; b < BANKS; b++) begin
        req[b] = $urandom_range(0, 3) != 0;
        we[b] = $urandom_range(0, 1);
        addr[b] = 6'($urandom_range(0, DEPTH-1));
        wdata[b] = {$urandom, $urandom};
        rd_pending[b] = req[b] && !we[b];
        rd_exp[b] = model[b][addr[b]];
        if (req[b] && we[b]) model[b][addr[b]] = wdata[b];
      end
      @(posedge clk); #1;
      for (int b = 0; b < BANKS; b++)
        if (rd_pending[b]) begin
          checks++;
          if (rdata[b] != rd_exp[b]) begin
            failures++; $display("FAIL bank %0d read %h expected %h", b, rdata[b], rd_exp[b]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
