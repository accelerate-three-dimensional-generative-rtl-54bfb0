// tb_f3dc_accumulator -- checks channel-wise accumulation of output tiles.
// Sends groups of random 33-bit tile pairs (group lengths 1..6, back to back
// and with idle gaps) framed by first/last; each finished tile must equal the
// 64-bit sum of all tiles of its group, appear exactly one cycle after the
// last pair, and carry that pair's tag.
module tb_f3dc_accumulator;
  import f3dc_pkg::*;
  import f3dc_tb_pkg::*;
  localparam int TAG_W = 10;
  logic clk = 0, rst_n = 0, valid_i = 0, first_i = 0, last_i = 0, wr_o;
  logic [TAG_W-1:0] tag_i = '0, tag_o;
  res_tile_t a, b;
  acc_tile_t acc;
  longint exp_sum [OR*OR*OR];
  int checks = 0, failures = 0, n_wr = 0, n_exp = 0;
  always #5 clk = ~clk;

  f3dc_accumulator #(.TAG_W(TAG_W)) dut (.clk, .rst_n, .valid_i, .first_i, .last_i, .tag_i,
    .a_i(a), .b_i(b), .wr_o, .tag_o, .tile_o(acc));

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && wr_o) n_wr++;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int g = 0; g < 40; g++) begin
      automatic int len = 1 + (g % 6);
      automatic logic [TAG_W-1:0] tag = TAG_W'($urandom);
      for (int e = 0; e < OR*OR*OR; e++) exp_sum[e] = 0;
      for (int p = 0; p < len; p++) begin
        for (int e = 0; e < OR*OR*OR; e++) begin
          automatic longint x = longint'(rnd_signed(RES_W - 3)) * 8 + $urandom_range(0, 7);  // full 33-bit range
          automatic longint y = longint'(rnd_signed(RES_W - 3)) * 8 + $urandom_range(0, 7);
          a[e/36][(e/6)%6][e%6] = RES_W'(x);
          b[e/36][(e/6)%6][e%6] = RES_W'(y);
          exp_sum[e] += x + y;
        end
        valid_i = 1; first_i = (p == 0); last_i = (p == len - 1); tag_i = tag;
        @(negedge clk);
        valid_i = 0; first_i = 0; last_i = 0; tag_i = '0;
        checks++;
        if (wr_o !== (p == len - 1)) begin failures++; $display("wr_o=%0b at pair %0d of %0d", wr_o, p, len); end
        if (p == len - 1) begin
          n_exp++;
          checks++;
          if (tag_o !== tag) begin failures++; $display("tag %0h exp %0h", tag_o, tag); end
          for (int e = 0; e < OR*OR*OR; e++) begin
            checks++;
            if (sx(longint'(acc[e/36][(e/6)%6][e%6]), ACC_W) != exp_sum[e]) begin
              failures++;
              if (failures < 10) $display("group %0d elem %0d = %0d exp %0d", g, e, sx(longint'(acc[e/36][(e/6)%6][e%6]), ACC_W), exp_sum[e]);
            end
          end
        end
        // idle gaps inside and between some groups
        if (g % 3 == 1) @(negedge clk);
      end
    end
    @(negedge clk);
    checks++;
    if (n_wr != n_exp) begin failures++; $display("%0d writes, expected %0d", n_wr, n_exp); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
