// tb_f3dc_postprocess -- checks the 3-D post-process transform.
// Random 30-bit cubes are transformed; each of the 216 outputs is compared
// with the separable triple sum over the A^T table, divided by 8 with
// rounding toward minus infinity (an arithmetic shift). One cube uses
// products of real transformed data, where the division must be exact.
module tb_f3dc_postprocess;
  import f3dc_pkg::*;
  import f3dc_tb_pkg::*;
  logic clk = 0, rst_n = 0, valid_i = 0, valid_o;
  pr_cube_t  pr;
  res_tile_t res;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  f3dc_postprocess dut (.clk, .rst_n, .valid_i, .prod_i(pr), .valid_o, .tile_o(res));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint m [ER][ER][ER];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 30; n++) begin
      for (int a = 0; a < ER; a++) for (int b = 0; b < ER; b++) for (int c = 0; c < ER; c++) begin
        m[a][b][c] = (n == 0) ? (((a+b+c) & 1) ? -(longint'(1) << (PR_W-1)) : (longint'(1) << (PR_W-1)) - 1)
                              : rnd_signed(PR_W);
        pr[a][b][c] = PR_W'(m[a][b][c]);
      end
      valid_i = 1;
      @(negedge clk);
      valid_i = 0;
      checks++;
      if (valid_o !== 1'b1) begin failures++; $display("valid_o missing"); end
      for (int x = 0; x < OR; x++) for (int y = 0; y < OR; y++) for (int z = 0; z < OR; z++) begin
        automatic longint e = 0;
        for (int a = 0; a < ER; a++) for (int b = 0; b < ER; b++) for (int c = 0; c < ER; c++)
          if (AT[x][a] != 0 && AT[y][b] != 0 && AT[z][c] != 0)
            e += AT[x][a] * AT[y][b] * AT[z][c] * m[a][b][c];
        e = e >>> 3;
        checks++;
        if (sx(longint'(res[x][y][z]), RES_W) != e) begin
          failures++;
          if (failures < 10) $display("out[%0d][%0d][%0d]=%0d exp %0d", x, y, z, sx(longint'(res[x][y][z]), RES_W), e);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
