// f3dc_ewmm -- element-wise matrix multiplication (EWMM) module of one FPU.
//
// 512 (8x8x8) signed multipliers, one per cube position, multiply the
// transformed input (19 bits) by the transformed kernel (11 bits) into a
// 30-bit product. Each multiplier fits one FPGA DSP slice (25x18), matching
// the 512 DSPs per EWMM module of the evaluated design.
// Timing: one register stage; prod_o and valid_o follow the operands by one
// cycle. Synchronous active-low reset clears valid only.
module f3dc_ewmm
  import f3dc_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     valid_i,
  input  dt_cube_t dt_i,
  input  gt_cube_t gt_i,
  output logic     valid_o,
  output pr_cube_t prod_o
);
  pr_cube_t prod_c;

  always_comb begin
    for (int d = 0; d < ER; d++)
      for (int h = 0; h < ER; h++)
        for (int w = 0; w < ER; w++)
          prod_c[d][h][w] = PR_W'($signed(dt_i[d][h][w]) * $signed(gt_i[d][h][w]));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) valid_o <= 1'b0;
    else        valid_o <= valid_i;
    if (valid_i) prod_o <= prod_c;
  end
endmodule
