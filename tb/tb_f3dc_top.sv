// tb_f3dc_top -- end-to-end test of the F3DC accelerator on whole layers.
//
// The testbench plays the host: it makes a random stride-2, 4x4x4, padding-1
// 3-D deconvolution layer (16-bit activations, 8-bit weights), cuts the
// input maps into overlapping 5x5x5 tiles (tile t of an axis starts at input
// 3t-1, zero outside the map), packs tiles and kernels into buffer words,
// runs the accelerator and compares every word of the output buffer with a
// direct transposed convolution of the whole layer (output m of an axis
// takes input j through tap m+1-2j). Outputs past the map edge in the last
// tile are compared too (they are the deconvolution of the zero padding).
//
// Each layer is run twice, the second time with a start pulse during the
// run that must be ignored. Counted mechanisms: accumulator restarts (first
// input-channel pair), tile write-backs, output-channel-pair changes,
// partial edge tiles and ignored starts; each must occur. The cycle count
// from start to done must be N+7 for N issued channel-pair steps.
module tb_f3dc_top;
  import f3dc_pkg::*;
  import f3dc_tb_pkg::*;

  localparam int NLAYER = 3;
  // per layer: input channels, output channels, input depth/height/width
  localparam int L_IC [NLAYER] = '{4, 6, 2};
  localparam int L_OC [NLAYER] = '{4, 2, 6};
  localparam int L_D  [NLAYER] = '{4, 2, 3};
  localparam int L_H  [NLAYER] = '{4, 4, 1};
  localparam int L_W  [NLAYER] = '{4, 6, 5};
  localparam int CW = 12;
  localparam bit BOTH_RUNS = 1'b1;  // run each layer without and with an ignored start

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [CW-1:0] n_ocp, n_icp, n_td, n_th, n_tw;
  logic ib_wr_en = 0, kb_wr_en = 0, ob_rd_en = 0;
  logic [10:0] ib_wr_addr = '0;
  logic [11:0] kb_wr_addr = '0;
  logic [8:0]  ob_rd_addr = '0;
  in_pair_t     ib_wr_data;
  kernel_quad_t kb_wr_data;
  acc_pair_t    ob_rd_data;

  int checks = 0, failures = 0, cyc = 0;
  int n_first = 0, n_write = 0, n_ocp_change = 0, n_edge = 0, n_ignored = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  f3dc_top dut (
    .clk, .rst_n, .start_i(start), .n_ocp_i(n_ocp), .n_icp_i(n_icp), .n_td_i(n_td),
    .n_th_i(n_th), .n_tw_i(n_tw), .busy_o(busy), .done_o(done),
    .ib_wr_en_i(ib_wr_en), .ib_wr_addr_i(ib_wr_addr), .ib_wr_data_i(ib_wr_data),
    .kb_wr_en_i(kb_wr_en), .kb_wr_addr_i(kb_wr_addr), .kb_wr_data_i(kb_wr_data),
    .ob_rd_en_i(ob_rd_en), .ob_rd_addr_i(ob_rd_addr), .ob_rd_data_o(ob_rd_data));

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // observe internal mechanisms at the FPA
  always @(negedge clk) if (rst_n) begin
    if (dut.v_q && dut.first_q) n_first++;
    if (dut.fpa_wr) n_write++;
  end

  // layer data
  int x [];   // [ic][d][h][w]
  int g [];   // [oc][ic][a][b][c]
  int ID, IH, IW, IC, OC;
  function automatic int xv(int c, int d, int h, int w);
    if (d < 0 || d >= ID || h < 0 || h >= IH || w < 0 || w >= IW) return 0;
    return x[((c * ID + d) * IH + h) * IW + w];
  endfunction
  function automatic int gv(int o, int c, int a, int b, int e);
    return g[(((o * IC + c) * K + a) * K + b) * K + e];
  endfunction
  // direct transposed convolution, output position (m0,m1,m2) of channel o
  function automatic longint yref(int o, int m0, int m1, int m2);
    longint s = 0;
    for (int c = 0; c < IC; c++)
      for (int j0 = (m0 + 1 - 3 + 1) / 2 - 1; j0 <= (m0 + 1) / 2 + 1; j0++)
        for (int j1 = (m1 + 1 - 3 + 1) / 2 - 1; j1 <= (m1 + 1) / 2 + 1; j1++)
          for (int j2 = (m2 + 1 - 3 + 1) / 2 - 1; j2 <= (m2 + 1) / 2 + 1; j2++) begin
            int a = m0 + 1 - 2 * j0, b = m1 + 1 - 2 * j1, e = m2 + 1 - 2 * j2;
            if (a >= 0 && a < K && b >= 0 && b < K && e >= 0 && e < K)
              s += longint'(xv(c, j0, j1, j2)) * longint'(gv(o, c, a, b, e));
          end
    return s;
  endfunction

  task automatic do_layer(int li, bit extra_start);
    int ntd, nth, ntw, nt, nicp, nocp, total, t0, t1;
    IC = L_IC[li]; OC = L_OC[li]; ID = L_D[li]; IH = L_H[li]; IW = L_W[li];
    ntd = (2 * ID + OR - 1) / OR; nth = (2 * IH + OR - 1) / OR; ntw = (2 * IW + OR - 1) / OR;
    nt = ntd * nth * ntw; nicp = IC / 2; nocp = OC / 2;
    total = nocp * nt * nicp;
    if ((2 * ID) % OR != 0 || (2 * IH) % OR != 0 || (2 * IW) % OR != 0) n_edge++;
    if (nocp > 1) n_ocp_change += nocp - 1;
    x = new[IC * ID * IH * IW];
    g = new[OC * IC * K * K * K];
    foreach (x[i]) x[i] = rnd_signed(IN_W);
    foreach (g[i]) g[i] = rnd_signed(WT_W);
    // load the input buffer: word = tile * nicp + icp
    for (int t = 0; t < nt; t++) for (int p = 0; p < nicp; p++) begin
      int td = t / (nth * ntw), th = (t / ntw) % nth, tw = t % ntw;
      for (int r = 0; r < FPA_ROWS; r++)
        for (int i = 0; i < IR; i++) for (int j = 0; j < IR; j++) for (int l = 0; l < IR; l++)
          ib_wr_data[r][i][j][l] = IN_W'(xv(2 * p + r, 3 * td - 1 + i, 3 * th - 1 + j, 3 * tw - 1 + l));
      ib_wr_en = 1; ib_wr_addr = 11'(t * nicp + p);
      @(negedge clk);
    end
    ib_wr_en = 0;
    // load the kernel buffer: word = ocp * nicp + icp, [row = ic][col = oc]
    for (int o = 0; o < nocp; o++) for (int p = 0; p < nicp; p++) begin
      for (int r = 0; r < FPA_ROWS; r++) for (int c = 0; c < FPA_COLS; c++)
        for (int a = 0; a < K; a++) for (int b = 0; b < K; b++) for (int e = 0; e < K; e++)
          kb_wr_data[r][c][a][b][e] = WT_W'(gv(2 * o + c, 2 * p + r, a, b, e));
      kb_wr_en = 1; kb_wr_addr = 12'(o * nicp + p);
      @(negedge clk);
    end
    kb_wr_en = 0;
    // run
    n_ocp = CW'(nocp); n_icp = CW'(nicp); n_td = CW'(ntd); n_th = CW'(nth); n_tw = CW'(ntw);
    start = 1; t0 = cyc;
    @(negedge clk);
    start = 0;
    if (extra_start) begin
      @(negedge clk);
      start = 1;     // ignored: the accelerator is busy
      n_ignored++;
      @(negedge clk);
      start = 0;
    end
    while (!done) @(negedge clk);
    t1 = cyc;
    checks++;
    if (t1 - t0 != total + 7) begin failures++; $display("layer %0d: %0d cycles, expected %0d", li, t1 - t0, total + 7); end
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("busy after done"); end
    // read back and compare
    for (int o = 0; o < nocp; o++) for (int t = 0; t < nt; t++) begin
      int td = t / (nth * ntw), th = (t / ntw) % nth, tw = t % ntw;
      ob_rd_en = 1; ob_rd_addr = 9'(o * nt + t);
      @(negedge clk);
      ob_rd_en = 0;
      for (int c = 0; c < FPA_COLS; c++)
        for (int i = 0; i < OR; i++) for (int j = 0; j < OR; j++) for (int l = 0; l < OR; l++) begin
          automatic longint e = yref(2 * o + c, OR * td + i, OR * th + j, OR * tw + l);
          automatic longint v = sx(longint'(ob_rd_data[c][i][j][l]), ACC_W);
          checks++;
          if (v != e) begin
            failures++;
            if (failures < 10) $display("layer %0d oc %0d pos (%0d,%0d,%0d) = %0d exp %0d", li, 2*o+c,
                                        OR*td+i, OR*th+j, OR*tw+l, v, e);
          end
        end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int li = 0; li < NLAYER; li++) begin
      if (BOTH_RUNS) do_layer(li, 1'b0);
      do_layer(li, 1'b1);
    end
    $display("mechanisms: restarts=%0d writebacks=%0d ocp_changes=%0d edge_layers=%0d ignored_starts=%0d",
             n_first, n_write, n_ocp_change, n_edge, n_ignored);
    checks += 5;
    if (n_first == 0) failures++;
    if (n_write == 0) failures++;
    if (n_ocp_change == 0) failures++;
    if (n_edge == 0) failures++;
    if (n_ignored == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
