// tb_f3dc_mem_ctrl -- checks the address sequence of the memory controller.
// For several loop-count sets, the expected issue sequence is generated by a
// plain nested loop in the paper's order (output-channel pair, depth tile,
// height tile, width tile, input-channel pair) with the buffer layouts
// computed by multiplication, and compared issue by issue. Also checks that
// the first issue comes two cycles after start, that issues are contiguous,
// the total count, and that a start while busy is ignored.
module tb_f3dc_mem_ctrl;
  localparam int CW = 12, IN_AW = 11, WT_AW = 12, OUT_AW = 9;
  logic clk = 0, rst_n = 0, start = 0;
  logic [CW-1:0] n_ocp, n_icp, n_td, n_th, n_tw;
  logic busy, issue, first, last, fin;
  logic [IN_AW-1:0] in_addr;
  logic [WT_AW-1:0] wt_addr;
  logic [OUT_AW-1:0] res_addr;
  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  f3dc_mem_ctrl #(.CW(CW), .IN_AW(IN_AW), .WT_AW(WT_AW), .OUT_AW(OUT_AW)) dut (
    .clk, .rst_n, .start_i(start), .n_ocp_i(n_ocp), .n_icp_i(n_icp), .n_td_i(n_td),
    .n_th_i(n_th), .n_tw_i(n_tw), .busy_o(busy), .issue_o(issue), .in_addr_o(in_addr),
    .wt_addr_o(wt_addr), .res_addr_o(res_addr), .first_o(first), .last_o(last), .final_o(fin));

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int ocp_n, int td_n, int th_n, int tw_n, int icp_n);
    int total = ocp_n * td_n * th_n * tw_n * icp_n, k = 0, ntile = td_n * th_n * tw_n;
    int start_cyc;
    @(negedge clk);
    n_ocp = CW'(ocp_n); n_icp = CW'(icp_n); n_td = CW'(td_n); n_th = CW'(th_n); n_tw = CW'(tw_n);
    start = 1; start_cyc = cyc;
    @(negedge clk);
    start = 0;
    // a second start in the middle of the run must be ignored
    @(negedge clk);
    for (int o = 0; o < ocp_n; o++) for (int d = 0; d < td_n; d++) for (int h = 0; h < th_n; h++)
      for (int w = 0; w < tw_n; w++) for (int i = 0; i < icp_n; i++) begin
        automatic int t = (d * th_n + h) * tw_n + w;
        checks++;
        if (k == 0 && cyc - start_cyc != 2) begin failures++; $display("first issue after %0d cycles", cyc - start_cyc); end
        if (k == 1) start = 1;
        if (k == 2) start = 0;
        if (!issue || int'(in_addr) != t * icp_n + i || int'(wt_addr) != o * icp_n + i ||
            int'(res_addr) != o * ntile + t || first != (i == 0) || last != (i == icp_n - 1) ||
            fin != (k == total - 1)) begin
          failures++;
          if (failures < 10)
            $display("issue %0d: v=%0b in=%0d wt=%0d res=%0d f=%0b l=%0b fin=%0b; exp in=%0d wt=%0d res=%0d",
                     k, issue, in_addr, wt_addr, res_addr, first, last, fin, t * icp_n + i, o * icp_n + i, o * ntile + t);
        end
        k++;
        @(negedge clk);
      end
    checks++;
    if (issue) begin failures++; $display("issues beyond %0d", total); end
    repeat (3) @(negedge clk);
    checks++;
    if (issue || busy) begin failures++; $display("restarted by a start while busy"); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(1, 1, 1, 1, 1);
    run(2, 2, 3, 2, 3);
    run(3, 1, 2, 4, 1);
    run(1, 3, 3, 3, 4);
    run(4, 2, 2, 2, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
