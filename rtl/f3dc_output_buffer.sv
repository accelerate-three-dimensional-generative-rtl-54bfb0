// f3dc_output_buffer -- on-chip output buffer.
//
// Holds finished 6x6x6 output tiles of the two output channels the FPA
// produces together. The FPA accumulators write one word (2x216 ACC_W-bit
// sums) at the result address the memory controller issued for that tile;
// the external side reads words back to external memory. Results are kept
// at full accumulator precision; re-quantisation to 16 bits for the next
// layer is left to the reader side, since its scaling is not specified.
// Word layout and depth are this design's choices.
// Timing: synchronous write and read, rd_data_o valid the cycle after
// rd_en_i; a same-address write and read in one cycle returns the old word.
module f3dc_output_buffer
  import f3dc_pkg::*;
#(
  parameter int DEPTH = 512,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en_i,
  input  logic [AW-1:0] wr_addr_i,
  input  acc_pair_t     wr_data_i,
  input  logic          rd_en_i,
  input  logic [AW-1:0] rd_addr_i,
  output acc_pair_t     rd_data_o
);
  acc_pair_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en_i) mem[wr_addr_i] <= wr_data_i;
    if (rd_en_i) rd_data_o <= mem[rd_addr_i];
  end

  always_ff @(posedge clk) begin
    if (wr_en_i) assert (int'(wr_addr_i) < DEPTH) else $error("output buffer write out of range");
    if (rd_en_i) assert (int'(rd_addr_i) < DEPTH) else $error("output buffer read out of range");
  end
endmodule
