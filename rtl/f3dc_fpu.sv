// f3dc_fpu -- fast processing unit (FPU).
//
// One FPU computes a complete T3(6^3,4^3) transform per cycle: a 5x5x5 input
// tile of one input channel and the 4x4x4 kernel linking that input channel
// to one output channel go through the pre-process module (P^T and H
// transforms), the EWMM module (512 multipliers) and the post-process module
// (A^T transform) and give the 6x6x6 partial output tile of that channel
// pair. With deconvolution padding 1, output tile element (x,y,z) is
//   sum over i,j,l of d[i][j][l] * g[x+3-2i][y+3-2j][z+3-2l]
// (terms with a kernel index outside 0..3 are absent), where d is the input
// tile whose element 0 lies one input position before the tile's first
// output position / 2. Consecutive tiles overlap by two inputs.
// Timing: fully pipelined, one tile per cycle, latency FPU_LAT = 3 cycles
// (one register in each module). Synchronous active-low reset.
module f3dc_fpu
  import f3dc_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      valid_i,
  input  in_tile_t  tile_i,
  input  kernel_t   kernel_i,
  output logic      valid_o,
  output res_tile_t tile_o
);
  logic     pre_v, ew_v;
  dt_cube_t dt;
  gt_cube_t gt;
  pr_cube_t pr;

  f3dc_preprocess u_pre (
    .clk, .rst_n, .valid_i, .tile_i, .kernel_i,
    .valid_o(pre_v), .dt_o(dt), .gt_o(gt)
  );

  f3dc_ewmm u_ewmm (
    .clk, .rst_n, .valid_i(pre_v), .dt_i(dt), .gt_i(gt),
    .valid_o(ew_v), .prod_o(pr)
  );

  f3dc_postprocess u_post (
    .clk, .rst_n, .valid_i(ew_v), .prod_i(pr),
    .valid_o, .tile_o
  );
endmodule
