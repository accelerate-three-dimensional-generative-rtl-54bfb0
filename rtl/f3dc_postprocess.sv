// f3dc_postprocess -- post-process module of one FPU.
//
// Transforms the 8x8x8 EWMM cube with A^T into a 6x6x6 output tile: the cube
// is cut into lines that pass through the 1-D output circuit f3dc_output_tf
// along width (64 lines), height (48 lines) and depth (36 lines). The
// re-slicing between passes (the paper's counter-clockwise rotation that
// undoes the pre-process rotation) is wiring only. The result is then
// shifted right by three bits, which removes the factor 8 introduced by the
// fixed-point halves of the weight transform; the shift is exact because the
// deconvolution result is an integer.
// Timing: one register stage. Synchronous active-low reset clears valid only.
module f3dc_postprocess
  import f3dc_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      valid_i,
  input  pr_cube_t  prod_i,
  output logic      valid_o,
  output res_tile_t tile_o     // [depth][height][width], 33-bit signed
);
  logic [ER-1:0][ER-1:0][OR-1:0][PR_W+1:0] s1;   // [d][h][w']
  logic [ER-1:0][OR-1:0][ER-1:0][PR_W+1:0] c2;   // [d][w'][h]
  logic [ER-1:0][OR-1:0][OR-1:0][PR_W+3:0] s2;   // [d][w'][h']
  logic [OR-1:0][OR-1:0][ER-1:0][PR_W+3:0] c3;   // [h'][w'][d]
  logic [OR-1:0][OR-1:0][OR-1:0][PR_W+5:0] s3;   // [h'][w'][d']
  res_tile_t tile_c;

  for (genvar d = 0; d < ER; d++) begin : g_w_d
    for (genvar h = 0; h < ER; h++) begin : g_w_h
      f3dc_output_tf #(.W(PR_W)) u_tf (.in_i(prod_i[d][h]), .out_o(s1[d][h]));
    end
  end

  for (genvar d = 0; d < ER; d++) begin : g_h_d
    for (genvar w = 0; w < OR; w++) begin : g_h_w
      for (genvar h = 0; h < ER; h++) begin : g_h_h
        assign c2[d][w][h] = s1[d][h][w];
      end
      f3dc_output_tf #(.W(PR_W+2)) u_tf (.in_i(c2[d][w]), .out_o(s2[d][w]));
    end
  end

  for (genvar h = 0; h < OR; h++) begin : g_d_h
    for (genvar w = 0; w < OR; w++) begin : g_d_w
      for (genvar d = 0; d < ER; d++) begin : g_d_d
        assign c3[h][w][d] = s2[d][w][h];
      end
      f3dc_output_tf #(.W(PR_W+4)) u_tf (.in_i(c3[h][w]), .out_o(s3[h][w]));
      for (genvar d = 0; d < OR; d++) begin : g_out
        // drop the three fraction bits of the kernel transform
        assign tile_c[d][h][w] = RES_W'($signed(s3[h][w][d]) >>> FRAC);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) valid_o <= 1'b0;
    else        valid_o <= valid_i;
    if (valid_i) tile_o <= tile_c;
  end
endmodule
