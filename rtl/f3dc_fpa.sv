// f3dc_fpa -- fast processing array: 2x2 FPUs and two accumulators.
//
// FPU(r,c) multiplies the tile of input channel r of the current pair with
// the kernel (input channel r, output channel c). The two FPUs of a row share
// one input tile; the two FPUs of a column feed one accumulator, which sums
// them with the earlier input-channel pairs of the same output tile. One
// input-channel pair is consumed per cycle, so the array does four
// T3(6^3,4^3) transforms per cycle.
// Interface: valid_i/first_i/last_i/tag_i travel with the tiles and kernels;
// the tag (result address and flags) is delayed through the FPU pipeline and
// returned with the finished tiles.
// Timing: wr_o rises FPU_LAT+1 = 4 cycles after the valid_i of the last
// input-channel pair of a tile. Synchronous active-low reset.
module f3dc_fpa
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
  input  in_pair_t         tiles_i,    // [row] input tiles of the channel pair
  input  kernel_quad_t     kernels_i,  // [row][col] kernels
  output logic             wr_o,
  output logic [TAG_W-1:0] tag_o,
  output acc_pair_t        tiles_o     // [col] finished output tiles
);
  res_tile_t fpu_out [FPA_ROWS][FPA_COLS];
  logic      fpu_v   [FPA_ROWS][FPA_COLS];

  // sideband that accompanies the tiles through the FPU pipeline
  typedef struct packed {
    logic             first;
    logic             last;
    logic [TAG_W-1:0] tag;
  } side_t;
  side_t side_q [FPU_LAT];

  always_ff @(posedge clk) begin
    side_q[0] <= '{first: first_i, last: last_i, tag: tag_i};
    for (int i = 1; i < FPU_LAT; i++) side_q[i] <= side_q[i-1];
  end

  logic [FPA_COLS-1:0] col_wr;
  logic [FPA_COLS-1:0][TAG_W-1:0] col_tag;

  for (genvar r = 0; r < FPA_ROWS; r++) begin : g_row
    for (genvar c = 0; c < FPA_COLS; c++) begin : g_col
      f3dc_fpu u_fpu (
        .clk, .rst_n, .valid_i,
        .tile_i(tiles_i[r]), .kernel_i(kernels_i[r][c]),
        .valid_o(fpu_v[r][c]), .tile_o(fpu_out[r][c])
      );
    end
  end

  for (genvar c = 0; c < FPA_COLS; c++) begin : g_acc
    f3dc_accumulator #(.TAG_W(TAG_W)) u_acc (
      .clk, .rst_n,
      .valid_i(fpu_v[0][c]),
      .first_i(side_q[FPU_LAT-1].first),
      .last_i (side_q[FPU_LAT-1].last),
      .tag_i  (side_q[FPU_LAT-1].tag),
      .a_i(fpu_out[0][c]), .b_i(fpu_out[1][c]),
      .wr_o(col_wr[c]), .tag_o(col_tag[c]), .tile_o(tiles_o[c])
    );
  end

  assign wr_o  = col_wr[0];
  assign tag_o = col_tag[0];

  // all four FPUs run in lock step, so both columns finish together
  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (fpu_v[0][0] == fpu_v[1][1] && fpu_v[0][1] == fpu_v[1][0] && fpu_v[0][0] == fpu_v[0][1])
        else $error("FPUs out of step");
      assert (col_wr[0] == col_wr[1]) else $error("accumulators out of step");
      if (col_wr[0]) assert (col_tag[0] == col_tag[1]) else $error("accumulator tags differ");
    end
  end
endmodule
