// tb_f3dc_input_buffer -- checks the input buffer as a synchronous RAM.
// Writes random words to random addresses (including the first and last),
// reads them back against a model, checks the one-cycle read latency, that
// the output holds while rd_en is low, and read-old-data on a same-address
// write and read.
module tb_f3dc_input_buffer;
  import f3dc_pkg::*;
  localparam int DEPTH = 2048;
  localparam int AW = $clog2(DEPTH);
  typedef in_pair_t word_t;
  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  word_t wr_data, rd_data;
  word_t model [int];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  f3dc_input_buffer #(.DEPTH(DEPTH)) dut (.clk, .wr_en_i(wr_en), .wr_addr_i(wr_addr), .wr_data_i(wr_data),
    .rd_en_i(rd_en), .rd_addr_i(rd_addr), .rd_data_o(rd_data));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t rnd_word();
    logic [$bits(word_t)-1:0] f;
    for (int i = 0; i < $bits(word_t); i += 32) f[i +: 32] = $urandom;
    return word_t'(f);
  endfunction

  task automatic check_read(int a, string what);
    rd_en = 1; rd_addr = AW'(a);
    @(negedge clk);
    rd_en = 0;
    checks++;
    if (rd_data !== model[a]) begin failures++; $display("%s: read of %0d wrong", what, a); end
  endtask

  initial begin
    int addrs [64];
    for (int i = 0; i < 64; i++) addrs[i] = (i == 0) ? 0 : (i == 1) ? DEPTH - 1 : int'($urandom_range(0, DEPTH - 1));
    @(negedge clk);
    foreach (addrs[i]) begin
      wr_en = 1; wr_addr = AW'(addrs[i]); wr_data = rnd_word();
      model[addrs[i]] = wr_data;
      @(negedge clk);
    end
    wr_en = 0;
    foreach (addrs[i]) check_read(addrs[i], "readback");
    // output holds while rd_en is low
    @(negedge clk);
    checks++;
    if (rd_data !== model[addrs[63]]) begin failures++; $display("read data not held"); end
    // same-address write and read: old data out, new data stored
    rd_en = 1; rd_addr = AW'(addrs[5]); wr_en = 1; wr_addr = AW'(addrs[5]); wr_data = rnd_word();
    @(negedge clk);
    rd_en = 0; wr_en = 0;
    checks++;
    if (rd_data !== model[addrs[5]]) begin failures++; $display("collision did not return old data"); end
    model[addrs[5]] = wr_data;
    check_read(addrs[5], "after collision");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
