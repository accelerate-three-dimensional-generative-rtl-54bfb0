// f3dc_accumulator -- channel-wise tile accumulator of one FPA column.
//
// Each cycle with valid_i, the two 6x6x6 tiles from the column's two FPUs
// (two input channels, same output channel) are added to the running sum of
// the tile being built. first_i marks the first input-channel pair of a tile
// and restarts the sum from zero; last_i marks the last pair, after which the
// finished tile is offered to the output buffer with the tag (result address
// and flags) that came with the last pair. Because the input channel is the
// innermost loop, only one tile is ever open, so the running sum is a single
// register bank of 216 ACC_W-bit words.
// Timing: wr_o is high for one cycle, the cycle after the last pair entered;
// tile_o is the accumulator register and is valid while wr_o is high.
// Synchronous active-low reset clears wr_o.
module f3dc_accumulator
  import f3dc_pkg::*;
#(
  parameter int TAG_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             valid_i,
  input  logic             first_i,
  input  logic             last_i,
  input  logic [TAG_W-1:0] tag_i,
  input  res_tile_t        a_i,      // FPU of FPA row 0
  input  res_tile_t        b_i,      // FPU of FPA row 1
  output logic             wr_o,
  output logic [TAG_W-1:0] tag_o,
  output acc_tile_t        tile_o
);
  acc_tile_t acc, sum;

  always_comb begin
    for (int d = 0; d < OR; d++)
      for (int h = 0; h < OR; h++)
        for (int w = 0; w < OR; w++)
          sum[d][h][w] = (first_i ? ACC_W'(0) : acc[d][h][w])
                       + ACC_W'($signed(a_i[d][h][w]))
                       + ACC_W'($signed(b_i[d][h][w]));
  end

  always_ff @(posedge clk) begin
    if (valid_i) acc <= sum;
    if (!rst_n) wr_o <= 1'b0;
    else        wr_o <= valid_i && last_i;
    if (valid_i && last_i) tag_o <= tag_i;
  end

  assign tile_o = acc;
endmodule
