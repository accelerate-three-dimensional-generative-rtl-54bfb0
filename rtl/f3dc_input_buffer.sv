// f3dc_input_buffer -- on-chip input buffer.
//
// Holds the input feature maps as ready-made 5x5x5 tiles. One word is the
// pair of tiles (two input channels) that one FPA row pair reads per cycle,
// so the FPA gets 2x125 activations every cycle from a single read. The word
// layout, the tile-per-word organisation (neighbouring tiles overlap by two
// activations, which are stored twice) and the depth are this design's
// choices; the word is filled from external memory through the write port.
// Interface: one write port (external side), one read port (memory
// controller side). Timing: synchronous read, rd_data_o is valid the cycle
// after rd_en_i. Write and read of the same address in one cycle returns the
// old word.
module f3dc_input_buffer
  import f3dc_pkg::*;
#(
  parameter int DEPTH = 2048,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en_i,
  input  logic [AW-1:0] wr_addr_i,
  input  in_pair_t      wr_data_i,
  input  logic          rd_en_i,
  input  logic [AW-1:0] rd_addr_i,
  output in_pair_t      rd_data_o
);
  in_pair_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en_i) mem[wr_addr_i] <= wr_data_i;
    if (rd_en_i) rd_data_o <= mem[rd_addr_i];
  end

  always_ff @(posedge clk) begin
    if (wr_en_i) assert (int'(wr_addr_i) < DEPTH) else $error("input buffer write out of range");
    if (rd_en_i) assert (int'(rd_addr_i) < DEPTH) else $error("input buffer read out of range");
  end
endmodule
