// tb_f3dc_preprocess -- checks the 3-D pre-process transforms.
// Random 5x5x5 tiles and 4x4x4 kernels stream in one per cycle; each output
// cube is compared, element by element, with the separable triple sum over
// the P^T and 2H tables (8*G for the kernel). Also checks the one-cycle
// latency and that valid follows valid_i.
module tb_f3dc_preprocess;
  import f3dc_pkg::*;
  import f3dc_tb_pkg::*;
  logic clk = 0, rst_n = 0, valid_i = 0, valid_o;
  in_tile_t tile;
  kernel_t  kern;
  dt_cube_t dt;
  gt_cube_t gt;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  f3dc_preprocess dut (.clk, .rst_n, .valid_i, .tile_i(tile), .kernel_i(kern),
                       .valid_o, .dt_o(dt), .gt_o(gt));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_cubes(in_tile_t t, kernel_t k);
    for (int a = 0; a < ER; a++) for (int b = 0; b < ER; b++) for (int c = 0; c < ER; c++) begin
      longint ed = 0, eg = 0;
      for (int i = 0; i < IR; i++) for (int j = 0; j < IR; j++) for (int l = 0; l < IR; l++)
        if (PT[a][i] != 0 && PT[b][j] != 0 && PT[c][l] != 0)
          ed += PT[a][i] * PT[b][j] * PT[c][l] * longint'($signed(t[i][j][l]));
      for (int i = 0; i < K; i++) for (int j = 0; j < K; j++) for (int l = 0; l < K; l++)
        eg += H2[a][i] * H2[b][j] * H2[c][l] * longint'($signed(k[i][j][l]));
      checks += 2;
      if (sx(longint'(dt[a][b][c]), DT_W) != ed) begin
        failures++;
        if (failures < 10) $display("dt[%0d][%0d][%0d]=%0d exp %0d", a, b, c, sx(longint'(dt[a][b][c]), DT_W), ed);
      end
      if (sx(longint'(gt[a][b][c]), GT_W) != eg) begin
        failures++;
        if (failures < 10) $display("gt[%0d][%0d][%0d]=%0d exp %0d", a, b, c, sx(longint'(gt[a][b][c]), GT_W), eg);
      end
    end
  endtask

  initial begin
    in_tile_t t_q; kernel_t k_q;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      tile = rnd_tile(); kern = rnd_kernel();
      if (n == 0) begin  // all-extreme case: every element at its most negative value
        for (int i = 0; i < IR*IR*IR; i++) tile[i/25][(i/5)%5][i%5] = IN_W'(-(1 << (IN_W-1)));
        for (int i = 0; i < K*K*K; i++) kern[i/16][(i/4)%4][i%4] = WT_W'(-(1 << (WT_W-1)));
      end
      valid_i = 1; t_q = tile; k_q = kern;
      @(negedge clk);
      valid_i = 0;
      checks++;
      if (valid_o !== 1'b1) begin failures++; $display("valid_o missing after 1 cycle"); end
      check_cubes(t_q, k_q);
      @(negedge clk);
      checks++;
      if (valid_o !== 1'b0) begin failures++; $display("valid_o stuck"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
