// f3dc_kernel_buffer -- on-chip kernel (weight) buffer.
//
// Holds 4x4x4 kernels of 8-bit weights. One word is the set of four kernels
// the 2x2 FPA needs in one cycle: [row = input channel of the pair][column =
// output channel of the pair], 4x64 weights. The memory controller reads one
// word per cycle (the input channel is the innermost loop, so the kernels
// change every cycle). Word layout and depth are this design's choices; the
// buffer is filled from external memory through the write port.
// Interface: one write port, one read port. Timing: synchronous read,
// rd_data_o is valid the cycle after rd_en_i; a same-address write and read
// in one cycle returns the old word.
module f3dc_kernel_buffer
  import f3dc_pkg::*;
#(
  parameter int DEPTH = 4096,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en_i,
  input  logic [AW-1:0] wr_addr_i,
  input  kernel_quad_t      wr_data_i,
  input  logic          rd_en_i,
  input  logic [AW-1:0] rd_addr_i,
  output kernel_quad_t      rd_data_o
);
  kernel_quad_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en_i) mem[wr_addr_i] <= wr_data_i;
    if (rd_en_i) rd_data_o <= mem[rd_addr_i];
  end

  always_ff @(posedge clk) begin
    if (wr_en_i) assert (int'(wr_addr_i) < DEPTH) else $error("kernel buffer write out of range");
    if (rd_en_i) assert (int'(rd_addr_i) < DEPTH) else $error("kernel buffer read out of range");
  end
endmodule
