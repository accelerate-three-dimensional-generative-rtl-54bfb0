// f3dc_input_tf3d -- 3-D input tile transform D = P^T (x) P^T (x) P^T * d.
//
// The 5x5x5 input tile is cut into 1-D lines and each line goes through the
// 1-D input circuit f3dc_input_tf: first along width (25 lines), then, after
// re-slicing the cube by a quarter turn, along height (40 lines) and finally
// along depth (64 lines). The paper describes this as slicing, matrix
// multiplication and a 90-degree rotation; here the rotation is only wiring
// (index permutation), so the whole transform is one combinational block.
// Output cube is indexed [depth][height][width] like the input, each element
// IN_W+3 bits signed. No clock, no state.
module f3dc_input_tf3d
  import f3dc_pkg::*;
(
  input  in_tile_t tile_i,
  output dt_cube_t cube_o
);
  // s1[d][h][w'] after the width pass
  logic [IR-1:0][IR-1:0][ER-1:0][IN_W:0]   s1;
  // c2[d][w'][h] lines along height, s2[d][w'][h'] after the height pass
  logic [IR-1:0][ER-1:0][IR-1:0][IN_W:0]   c2;
  logic [IR-1:0][ER-1:0][ER-1:0][IN_W+1:0] s2;
  // c3[h'][w'][d] lines along depth, s3[h'][w'][d'] after the depth pass
  logic [ER-1:0][ER-1:0][IR-1:0][IN_W+1:0] c3;
  logic [ER-1:0][ER-1:0][ER-1:0][IN_W+2:0] s3;

  for (genvar d = 0; d < IR; d++) begin : g_w_d
    for (genvar h = 0; h < IR; h++) begin : g_w_h
      f3dc_input_tf #(.W(IN_W)) u_tf (.in_i(tile_i[d][h]), .out_o(s1[d][h]));
    end
  end

  for (genvar d = 0; d < IR; d++) begin : g_h_d
    for (genvar w = 0; w < ER; w++) begin : g_h_w
      for (genvar h = 0; h < IR; h++) begin : g_h_h
        assign c2[d][w][h] = s1[d][h][w];
      end
      f3dc_input_tf #(.W(IN_W+1)) u_tf (.in_i(c2[d][w]), .out_o(s2[d][w]));
    end
  end

  for (genvar h = 0; h < ER; h++) begin : g_d_h
    for (genvar w = 0; w < ER; w++) begin : g_d_w
      for (genvar d = 0; d < IR; d++) begin : g_d_d
        assign c3[h][w][d] = s2[d][w][h];
      end
      f3dc_input_tf #(.W(IN_W+2)) u_tf (.in_i(c3[h][w]), .out_o(s3[h][w]));
      for (genvar d = 0; d < ER; d++) begin : g_out
        assign cube_o[d][h][w] = s3[h][w][d];
      end
    end
  end
endmodule
