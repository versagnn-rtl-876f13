// scratchpad: banked on-chip scratchpad memory of the accelerator.
//
// BANKS independent single-port banks; each has a row of WIDTH bits, one
// read or write per bank per cycle, and a read result one cycle after the
// request (synchronous SRAM behaviour).  Banks let the operand loader, the
// result write-back and the host port work in parallel on different
// banks.  The default, 4 banks of 1024 rows x 1024 bits (128 KiB each,
// 512 KiB in all), is the scratchpad size given for the design; the row
// width (one row of 32 results of 32 bits) is this design's choice.  The
// array is written as a plain memory so it maps to SRAM macros.
module scratchpad #(
  parameter int BANKS = 4,
  parameter int DEPTH = 1024,
  parameter int WIDTH = 1024
) (
  input  logic                                  clk,
  input  logic [BANKS-1:0]                      req,
  input  logic [BANKS-1:0]                      we,
  input  logic [BANKS-1:0][$clog2(DEPTH)-1:0]   addr,
  input  logic [BANKS-1:0][WIDTH-1:0]           wdata,
  output logic [BANKS-1:0][WIDTH-1:0]           rdata
);
  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic [WIDTH-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (req[b]) begin
        if (we[b]) mem[addr[b]] <= wdata[b];
        else       rdata[b]     <= mem[addr[b]];
      end
    end
  end
endmodule
