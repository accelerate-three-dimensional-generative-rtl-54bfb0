// f3dc_top -- F3DC accelerator for stride-2, 4x4x4 3-D deconvolution layers.
//
// Three on-chip buffers (input, kernel, output), the memory controller and
// the fast processing array (2x2 FPUs, two accumulators). The external
// memory is off chip: its side of each buffer is brought out as a port
// (input and kernel buffer write ports, output buffer read port), so a host
// or DMA engine loads the tiles and kernels of a layer (or of a part of a
// layer), pulses start_i and reads the output tiles back after done_o.
//
// Data flow per cycle: the controller issues an input word (5x5x5 tiles of
// two input channels), a kernel word (four kernels) and the result address
// of the output tile in progress; the buffers answer one cycle later; the
// FPA transforms, multiplies and accumulates, and after the last
// input-channel pair of a tile writes the two finished 6x6x6 output tiles
// (two output channels) into the output buffer.
//
// Timing: after start_i a run of N = n_ocp*n_td*n_th*n_tw*n_icp issues takes
// N cycles of issue plus a fixed latency: start -> first issue 2 cycles,
// buffer read 1, FPU 3, accumulator 1, output-buffer write 1. done_o is a
// one-cycle pulse in the cycle after the last output word was written, i.e.
// N + 7 cycles after the start_i cycle; busy_o is high from the cycle after
// start_i until done_o. Loop counts are latched at start_i and must be >= 1.
// Buffer depths are this design's choices (the paper gives only the total
// block-RAM count); the FPA, FPU and transform sizes are the paper's.
module f3dc_top
  import f3dc_pkg::*;
#(
  parameter int IBUF_DEPTH = 2048,
  parameter int KBUF_DEPTH = 4096,
  parameter int OBUF_DEPTH = 512,
  parameter int CW         = 12,
  localparam int IAW = $clog2(IBUF_DEPTH),
  localparam int KAW = $clog2(KBUF_DEPTH),
  localparam int OAW = $clog2(OBUF_DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // run control
  input  logic          start_i,
  input  logic [CW-1:0] n_ocp_i,
  input  logic [CW-1:0] n_icp_i,
  input  logic [CW-1:0] n_td_i,
  input  logic [CW-1:0] n_th_i,
  input  logic [CW-1:0] n_tw_i,
  output logic          busy_o,
  output logic          done_o,
  // external memory -> input buffer
  input  logic          ib_wr_en_i,
  input  logic [IAW-1:0] ib_wr_addr_i,
  input  in_pair_t      ib_wr_data_i,
  // external memory -> kernel buffer
  input  logic          kb_wr_en_i,
  input  logic [KAW-1:0] kb_wr_addr_i,
  input  kernel_quad_t  kb_wr_data_i,
  // output buffer -> external memory
  input  logic          ob_rd_en_i,
  input  logic [OAW-1:0] ob_rd_addr_i,
  output acc_pair_t     ob_rd_data_o
);
  localparam int TAG_W = OAW + 1;   // {final, result address}

  // memory controller
  logic           issue, first, last, fin;
  logic [IAW-1:0] in_addr;
  logic [KAW-1:0] wt_addr;
  logic [OAW-1:0] res_addr;
  logic           ctrl_busy;

  f3dc_mem_ctrl #(.CW(CW), .IN_AW(IAW), .WT_AW(KAW), .OUT_AW(OAW)) u_ctrl (
    .clk, .rst_n, .start_i(start_i && !busy_o),
    .n_ocp_i, .n_icp_i, .n_td_i, .n_th_i, .n_tw_i,
    .busy_o(ctrl_busy), .issue_o(issue),
    .in_addr_o(in_addr), .wt_addr_o(wt_addr), .res_addr_o(res_addr),
    .first_o(first), .last_o(last), .final_o(fin)
  );

  // buffers
  in_pair_t     in_tiles;
  kernel_quad_t kernels;

  f3dc_input_buffer #(.DEPTH(IBUF_DEPTH)) u_ibuf (
    .clk, .wr_en_i(ib_wr_en_i), .wr_addr_i(ib_wr_addr_i), .wr_data_i(ib_wr_data_i),
    .rd_en_i(issue), .rd_addr_i(in_addr), .rd_data_o(in_tiles)
  );

  f3dc_kernel_buffer #(.DEPTH(KBUF_DEPTH)) u_kbuf (
    .clk, .wr_en_i(kb_wr_en_i), .wr_addr_i(kb_wr_addr_i), .wr_data_i(kb_wr_data_i),
    .rd_en_i(issue), .rd_addr_i(wt_addr), .rd_data_o(kernels)
  );

  // control travels one cycle behind the addresses, level with the buffer data
  logic             v_q, first_q, last_q;
  logic [TAG_W-1:0] tag_q;
  always_ff @(posedge clk) begin
    if (!rst_n) v_q <= 1'b0;
    else        v_q <= issue;
    first_q <= first;
    last_q  <= last;
    tag_q   <= {fin, res_addr};
  end

  // fast processing array
  logic             fpa_wr;
  logic [TAG_W-1:0] fpa_tag;
  acc_pair_t        fpa_tiles;

  f3dc_fpa #(.TAG_W(TAG_W)) u_fpa (
    .clk, .rst_n, .valid_i(v_q), .first_i(first_q), .last_i(last_q), .tag_i(tag_q),
    .tiles_i(in_tiles), .kernels_i(kernels),
    .wr_o(fpa_wr), .tag_o(fpa_tag), .tiles_o(fpa_tiles)
  );

  f3dc_output_buffer #(.DEPTH(OBUF_DEPTH)) u_obuf (
    .clk, .wr_en_i(fpa_wr), .wr_addr_i(fpa_tag[OAW-1:0]), .wr_data_i(fpa_tiles),
    .rd_en_i(ob_rd_en_i), .rd_addr_i(ob_rd_addr_i), .rd_data_o(ob_rd_data_o)
  );

  // run status: busy from start until the last output word is written
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy_o <= 1'b0;
      done_o <= 1'b0;
    end else begin
      done_o <= fpa_wr && fpa_tag[OAW];
      if (start_i && !busy_o)          busy_o <= 1'b1;
      else if (fpa_wr && fpa_tag[OAW]) busy_o <= 1'b0;
    end
  end

  // results are only written during a run, and the controller only runs
  // inside one
  always_ff @(posedge clk) begin
    if (rst_n && fpa_wr)    assert (busy_o) else $error("output write outside a run");
    if (rst_n && ctrl_busy) assert (busy_o) else $error("controller running outside a run");
  end
endmodule
