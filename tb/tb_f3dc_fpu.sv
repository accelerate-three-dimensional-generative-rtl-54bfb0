// tb_f3dc_fpu -- end-to-end check of one FPU against direct deconvolution.
// Streams random input tiles and kernels back to back (one per cycle) and
// compares every 6x6x6 output tile with a direct stride-2, 4x4x4 transposed
// convolution of the tile. Checks the 3-cycle latency and the rate of one
// tile per cycle, and covers the most-negative extremes of both operands.
module tb_f3dc_fpu;
  import f3dc_pkg::*;
  import f3dc_tb_pkg::*;
  localparam int N = 24;
  logic clk = 0, rst_n = 0, valid_i = 0, valid_o;
  in_tile_t  tile;
  kernel_t   kern;
  res_tile_t res;
  in_tile_t  tiles [N];
  kernel_t   kerns [N];
  int checks = 0, failures = 0, n_out = 0, cyc = 0, first_in = -1, first_out = -1, last_out = -1;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  f3dc_fpu dut (.clk, .rst_n, .valid_i, .tile_i(tile), .kernel_i(kern), .valid_o, .tile_o(res));

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  always @(negedge clk) if (rst_n && valid_o) begin
    if (first_out < 0) first_out = cyc;
    last_out = cyc;
    for (int x = 0; x < OR; x++) for (int y = 0; y < OR; y++) for (int z = 0; z < OR; z++) begin
      automatic longint e = ref_tile_elem(tiles[n_out], kerns[n_out], x, y, z);
      checks++;
      if (sx(longint'(res[x][y][z]), RES_W) != e) begin
        failures++;
        if (failures < 10) $display("tile %0d out[%0d][%0d][%0d]=%0d exp %0d", n_out, x, y, z, sx(longint'(res[x][y][z]), RES_W), e);
      end
    end
    n_out++;
  end

  initial begin
    for (int n = 0; n < N; n++) begin
      tiles[n] = rnd_tile(); kerns[n] = rnd_kernel();
    end
    for (int i = 0; i < IR*IR*IR; i++) tiles[0][i/25][(i/5)%5][i%5] = IN_W'(-(1 << (IN_W-1)));
    for (int i = 0; i < K*K*K; i++)    kerns[0][i/16][(i/4)%4][i%4] = WT_W'(-(1 << (WT_W-1)));
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < N; n++) begin
      tile = tiles[n]; kern = kerns[n]; valid_i = 1;
      if (n == 0) first_in = cyc;
      @(negedge clk);
    end
    valid_i = 0;
    repeat (10) @(negedge clk);
    checks += 3;
    if (n_out != N) begin failures++; $display("got %0d tiles, expected %0d", n_out, N); end
    if (first_out - first_in != FPU_LAT) begin failures++; $display("latency %0d, expected %0d", first_out - first_in, FPU_LAT); end
    if (last_out - first_out != N - 1) begin failures++; $display("%0d tiles took %0d cycles", N, last_out - first_out + 1); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
