// f3dc_weight_tf3d -- 3-D kernel transform G = H (x) H (x) H * g.
//
// The 4x4x4 kernel is cut into lines that pass through the 1-D weight
// circuit f3dc_weight_tf along width (16 lines), height (32 lines) and depth
// (64 lines); the re-slicing between passes (the paper's rotation) is wiring
// only. Each 1-D pass doubles the value (one fraction bit), so the 8x8x8
// output holds 8*G: WT_W+3 bits signed with three fraction bits. The
// post-process removes the factor 8. Combinational, no state.
module f3dc_weight_tf3d
  import f3dc_pkg::*;
(
  input  kernel_t  kernel_i,
  output gt_cube_t cube_o
);
  logic [K-1:0][K-1:0][ER-1:0][WT_W:0]    s1;
  logic [K-1:0][ER-1:0][K-1:0][WT_W:0]    c2;
  logic [K-1:0][ER-1:0][ER-1:0][WT_W+1:0] s2;
  logic [ER-1:0][ER-1:0][K-1:0][WT_W+1:0] c3;
  logic [ER-1:0][ER-1:0][ER-1:0][WT_W+2:0] s3;

  for (genvar d = 0; d < K; d++) begin : g_w_d
    for (genvar h = 0; h < K; h++) begin : g_w_h
      f3dc_weight_tf #(.W(WT_W)) u_tf (.in_i(kernel_i[d][h]), .out_o(s1[d][h]));
    end
  end

  for (genvar d = 0; d < K; d++) begin : g_h_d
    for (genvar w = 0; w < ER; w++) begin : g_h_w
      for (genvar h = 0; h < K; h++) begin : g_h_h
        assign c2[d][w][h] = s1[d][h][w];
      end
      f3dc_weight_tf #(.W(WT_W+1)) u_tf (.in_i(c2[d][w]), .out_o(s2[d][w]));
    end
  end

  for (genvar h = 0; h < ER; h++) begin : g_d_h
    for (genvar w = 0; w < ER; w++) begin : g_d_w
      for (genvar d = 0; d < K; d++) begin : g_d_d
        assign c3[h][w][d] = s2[d][w][h];
      end
      f3dc_weight_tf #(.W(WT_W+2)) u_tf (.in_i(c3[h][w]), .out_o(s3[h][w]));
      for (genvar d = 0; d < ER; d++) begin : g_out
        assign cube_o[d][h][w] = s3[h][w][d];
      end
    end
  end
endmodule
