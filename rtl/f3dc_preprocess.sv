// f3dc_preprocess -- pre-process module of one FPU.
//
// Transforms one 5x5x5 input tile with P^T and one 4x4x4 kernel with H into
// two 8x8x8 cubes, ready for element-wise multiplication. Both transforms
// are fully parallel (f3dc_input_tf3d, f3dc_weight_tf3d), so a new tile and
// kernel can enter every cycle. The paper transforms the kernel inside the
// FPU too (the weight enters the pre-process module); as the input channel
// is the innermost loop, the kernel changes every cycle and is transformed
// every cycle.
// Timing: one register stage; cubes and valid_o appear one cycle after
// tile_i/kernel_i/valid_i. Synchronous active-low reset clears valid only.
module f3dc_preprocess
  import f3dc_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     valid_i,
  input  in_tile_t tile_i,
  input  kernel_t  kernel_i,
  output logic     valid_o,
  output dt_cube_t dt_o,       // P^T-transformed input, 19-bit elements
  output gt_cube_t gt_o        // H-transformed kernel * 8, 11-bit elements
);
  dt_cube_t dt_c;
  gt_cube_t gt_c;

  f3dc_input_tf3d  u_in (.tile_i(tile_i),     .cube_o(dt_c));
  f3dc_weight_tf3d u_wt (.kernel_i(kernel_i), .cube_o(gt_c));

  always_ff @(posedge clk) begin
    if (!rst_n) valid_o <= 1'b0;
    else        valid_o <= valid_i;
    if (valid_i) begin
      dt_o <= dt_c;
      gt_o <= gt_c;
    end
  end
endmodule
