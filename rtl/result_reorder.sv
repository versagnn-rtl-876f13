// result_reorder: write-back address unit for packed sparse tiles.
//
// The offline greedy load balancer packs the rows of two sparse tiles into
// one tile and sorts rows by their number of entries, so a result row
// leaves the systolic array in an order that is not the order of the
// original graph nodes.  It records, for each row i of the packed tile and
// each source tile m (the "mask" bit of an entry), the original row in a
// reorder vector.  This unit holds the two reorder vectors and maps
// (packed row i, mask m) to the destination row
//     row = row_reordering[i][m]
// as in the write-back equation of the design.
//
// Interface: wr_en/wr_tag/wr_row/wr_dest fill the vectors (one entry per
// cycle); row_i/tag_i give dest_o combinationally.  Reset clears the
// vectors to the identity order, so an unpacked, unsorted tile needs no
// setup.  That reset value and the one-entry write port are this design's
// choice.
module result_reorder #(
  parameter int ROWS = 32,
  parameter int TAGS = 2,
  parameter int RW   = $clog2(ROWS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    wr_en,
  input  logic [$clog2(TAGS)-1:0] wr_tag,
  input  logic [$clog2(ROWS)-1:0] wr_row,
  input  logic [RW-1:0]           wr_dest,
  input  logic [$clog2(ROWS)-1:0] row_i,
  input  logic [$clog2(TAGS)-1:0] tag_i,
  output logic [RW-1:0]           dest_o
);
  logic [RW-1:0] vec [ROWS][TAGS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ROWS; i++)
        for (int m = 0; m < TAGS; m++) vec[i][m] <= RW'(i);
    end else if (wr_en) begin
      vec[wr_row][wr_tag] <= wr_dest;
    end
  end

  assign dest_o = vec[row_i][tag_i];
endmodule
