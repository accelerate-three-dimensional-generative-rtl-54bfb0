// tb_f3dc_fpa -- checks the 2x2 fast processing array against direct
// deconvolution summed over input channels.
// Several output tiles are computed back to back, each over NICP input-
// channel pairs. Per cycle the array gets the tiles of two input channels and
// the four kernels; column c must return, for each tile, the sum over all
// input channels of the direct transposed convolution with the kernels of
// output channel c. Checks the tag, the write latency (FPU_LAT+1 cycles after
// the last pair) and that tiles follow each other with no idle cycle.
module tb_f3dc_fpa;
  import f3dc_pkg::*;
  import f3dc_tb_pkg::*;
  localparam int TAG_W = 8;
  localparam int NT = 3;     // output tiles
  localparam int NICP = 3;   // input-channel pairs per tile
  logic clk = 0, rst_n = 0, valid_i = 0, first_i = 0, last_i = 0, wr_o;
  logic [TAG_W-1:0] tag_i = '0, tag_o;
  in_pair_t     tiles;
  kernel_quad_t kernels;
  acc_pair_t    outs;
  in_pair_t     st [NT][NICP];
  kernel_quad_t sk [NT][NICP];
  int checks = 0, failures = 0, n_wr = 0, cyc = 0;
  int last_cyc [NT];
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  f3dc_fpa #(.TAG_W(TAG_W)) dut (.clk, .rst_n, .valid_i, .first_i, .last_i, .tag_i,
    .tiles_i(tiles), .kernels_i(kernels), .wr_o, .tag_o, .tiles_o(outs));

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && wr_o) begin
    checks += 2;
    if (n_wr >= NT) begin failures++; $display("extra write"); end
    else begin
      if (tag_o !== TAG_W'(8'hA0 + n_wr)) begin failures++; $display("tag %0h", tag_o); end
      if (cyc - last_cyc[n_wr] != FPU_LAT + 1) begin failures++; $display("write latency %0d", cyc - last_cyc[n_wr]); end
      for (int c = 0; c < FPA_COLS; c++)
        for (int x = 0; x < OR; x++) for (int y = 0; y < OR; y++) for (int z = 0; z < OR; z++) begin
          automatic longint e = 0;
          for (int p = 0; p < NICP; p++) for (int r = 0; r < FPA_ROWS; r++)
            e += ref_tile_elem(st[n_wr][p][r], sk[n_wr][p][r][c], x, y, z);
          checks++;
          if (sx(longint'(outs[c][x][y][z]), ACC_W) != e) begin
            failures++;
            if (failures < 10) $display("tile %0d col %0d [%0d][%0d][%0d]=%0d exp %0d", n_wr, c, x, y, z, sx(longint'(outs[c][x][y][z]), ACC_W), e);
          end
        end
    end
    n_wr++;
  end

  initial begin
    for (int t = 0; t < NT; t++) for (int p = 0; p < NICP; p++)
      for (int r = 0; r < FPA_ROWS; r++) begin
        st[t][p][r] = rnd_tile();
        for (int c = 0; c < FPA_COLS; c++) sk[t][p][r][c] = rnd_kernel();
      end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < NT; t++)
      for (int p = 0; p < NICP; p++) begin
        tiles = st[t][p]; kernels = sk[t][p];
        valid_i = 1; first_i = (p == 0); last_i = (p == NICP - 1); tag_i = TAG_W'(8'hA0 + t);
        if (p == NICP - 1) last_cyc[t] = cyc;
        @(negedge clk);
      end
    valid_i = 0; first_i = 0; last_i = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (n_wr != NT) begin failures++; $display("%0d writes, expected %0d", n_wr, NT); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
