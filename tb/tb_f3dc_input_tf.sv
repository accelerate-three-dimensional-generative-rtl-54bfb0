// tb_f3dc_input_tf -- checks the 1-D input transform against OUT = P^T * IN.
// Random 16-bit lines plus all-extreme lines; every output of every line is
// compared with the matrix product computed from the P^T table.
module tb_f3dc_input_tf;
  import f3dc_tb_pkg::*;
  localparam int W = 16;
  logic [4:0][W-1:0] in;
  logic [7:0][W:0]   out;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  f3dc_input_tf #(.W(W)) dut (.in_i(in), .out_o(out));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int x [5];
    for (int n = 0; n < 3000; n++) begin
      for (int i = 0; i < 5; i++) begin
        x[i] = (n < 32) ? ((n >> i) & 1 ? -(1 << (W-1)) : (1 << (W-1)) - 1) : rnd_signed(W);
        in[i] = W'(x[i]);
      end
      @(posedge clk);
      for (int r = 0; r < 8; r++) begin
        automatic longint e = 0;
        for (int i = 0; i < 5; i++) e += PT[r][i] * x[i];
        checks++;
        if (sx(longint'(out[r]), W+1) != e) begin
          failures++;
          if (failures < 10) $display("mismatch line %0d OUT[%0d]=%0d exp %0d", n, r, sx(longint'(out[r]), W+1), e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
