// tb_f3dc_ewmm -- checks the 512 element-wise multipliers.
// Random 19-bit and 11-bit cubes (plus an all-extreme pair) are multiplied
// and each product is compared with a 64-bit product; latency one cycle.
module tb_f3dc_ewmm;
  import f3dc_pkg::*;
  import f3dc_tb_pkg::*;
  logic clk = 0, rst_n = 0, valid_i = 0, valid_o;
  dt_cube_t dt;
  gt_cube_t gt;
  pr_cube_t pr;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  f3dc_ewmm dut (.clk, .rst_n, .valid_i, .dt_i(dt), .gt_i(gt), .valid_o, .prod_o(pr));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint a [ER*ER*ER], b [ER*ER*ER];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 50; n++) begin
      for (int e = 0; e < ER*ER*ER; e++) begin
        a[e] = (n == 0) ? -(longint'(1) << (DT_W-1)) : rnd_signed(DT_W);
        b[e] = (n == 0) ? -(longint'(1) << (GT_W-1)) : rnd_signed(GT_W);
        dt[e/64][(e/8)%8][e%8] = DT_W'(a[e]);
        gt[e/64][(e/8)%8][e%8] = GT_W'(b[e]);
      end
      valid_i = 1;
      @(negedge clk);
      valid_i = 0;
      checks++;
      if (valid_o !== 1'b1) begin failures++; $display("valid_o missing"); end
      for (int e = 0; e < ER*ER*ER; e++) begin
        checks++;
        if (sx(longint'(pr[e/64][(e/8)%8][e%8]), PR_W) != a[e] * b[e]) begin
          failures++;
          if (failures < 10) $display("prod %0d = %0d exp %0d", e, sx(longint'(pr[e/64][(e/8)%8][e%8]), PR_W), a[e]*b[e]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
