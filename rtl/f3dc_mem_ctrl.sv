// f3dc_mem_ctrl -- memory controller: address generation for the F3DC loop nest.
//
// Walks the weight-stationary loop order of the paper, outermost first:
//   output-channel pair > depth tile > height tile > width tile > input-channel pair
// and issues, every cycle while running, one input address (tile of an
// input-channel pair), one weight address (kernels of an input/output pair
// quartet) and the result address of the output tile being accumulated.
// Unrolling of two input and two output channels is taken care of by the
// buffer word layouts, so the loop counts are in channel pairs.
// Buffer layouts the addresses assume (this design's choice):
//   input  word  = tile_index * n_icp + icp,  tile_index = (td*n_th + th)*n_tw + tw
//   kernel word  = ocp * n_icp + icp
//   output word  = ocp * n_tiles + tile_index
// The addresses are produced by counters and adders only (no multipliers).
// first_o / last_o mark the first and last input-channel pair of a tile,
// final_o the very last issue of the run.
// Interface: start_i (one-cycle pulse, ignored while busy) latches the loop
// counts; all counts must be at least 1. Timing: the first issue is
// registered one cycle after start_i, then one issue per cycle with no gaps,
// n_ocp*n_td*n_th*n_tw*n_icp issues in all; busy_o is high while issuing.
module f3dc_mem_ctrl #(
  parameter int CW     = 12,   // width of the loop counts
  parameter int IN_AW  = 11,
  parameter int WT_AW  = 12,
  parameter int OUT_AW = 9
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start_i,
  input  logic [CW-1:0]     n_ocp_i,   // output-channel pairs
  input  logic [CW-1:0]     n_icp_i,   // input-channel pairs
  input  logic [CW-1:0]     n_td_i,    // tiles along depth
  input  logic [CW-1:0]     n_th_i,    // tiles along height
  input  logic [CW-1:0]     n_tw_i,    // tiles along width
  output logic              busy_o,
  output logic              issue_o,
  output logic [IN_AW-1:0]  in_addr_o,
  output logic [WT_AW-1:0]  wt_addr_o,
  output logic [OUT_AW-1:0] res_addr_o,
  output logic              first_o,
  output logic              last_o,
  output logic              final_o
);
  typedef struct packed {
    logic [CW-1:0] ocp, icp, td, th, tw;
  } loop_t;

  loop_t n_q, c_q;             // loop limits and counters
  logic [IN_AW-1:0]  in_q;     // input word of the current issue
  logic [WT_AW-1:0]  wbase_q;  // ocp * n_icp
  logic [OUT_AW-1:0] res_q;
  logic              run_q;

  logic last_icp, last_tw, last_th, last_td, last_ocp;
  always_comb begin
    last_icp = c_q.icp == n_q.icp - 1'b1;
    last_tw  = c_q.tw  == n_q.tw  - 1'b1;
    last_th  = c_q.th  == n_q.th  - 1'b1;
    last_td  = c_q.td  == n_q.td  - 1'b1;
    last_ocp = c_q.ocp == n_q.ocp - 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run_q   <= 1'b0;
      issue_o <= 1'b0;
    end else begin
      issue_o <= run_q;
      if (!run_q) begin
        if (start_i) begin
          run_q   <= 1'b1;
          n_q     <= '{ocp: n_ocp_i, icp: n_icp_i, td: n_td_i, th: n_th_i, tw: n_tw_i};
          c_q     <= '0;
          in_q    <= '0;
          wbase_q <= '0;
          res_q   <= '0;
        end
      end else begin
        // registered issue of the current loop point
        in_addr_o  <= in_q;
        wt_addr_o  <= wbase_q + WT_AW'(c_q.icp);
        res_addr_o <= res_q;
        first_o    <= c_q.icp == '0;
        last_o     <= last_icp;
        final_o    <= last_icp && last_tw && last_th && last_td && last_ocp;
        // advance the loop nest, innermost first
        in_q <= in_q + 1'b1;
        if (!last_icp) c_q.icp <= c_q.icp + 1'b1;
        else begin
          c_q.icp <= '0;
          res_q   <= res_q + 1'b1;
          if (!last_tw) c_q.tw <= c_q.tw + 1'b1;
          else begin
            c_q.tw <= '0;
            if (!last_th) c_q.th <= c_q.th + 1'b1;
            else begin
              c_q.th <= '0;
              if (!last_td) c_q.td <= c_q.td + 1'b1;
              else begin
                // next output-channel pair: same tiles, next kernels
                c_q.td  <= '0;
                in_q    <= '0;
                wbase_q <= wbase_q + WT_AW'(n_q.icp);
                if (!last_ocp) c_q.ocp <= c_q.ocp + 1'b1;
                else           run_q   <= 1'b0;
              end
            end
          end
        end
      end
    end
  end

  assign busy_o = run_q;

  always_ff @(posedge clk) begin
    if (rst_n && start_i && !run_q)
      assert (n_ocp_i != 0 && n_icp_i != 0 && n_td_i != 0 && n_th_i != 0 && n_tw_i != 0)
        else $error("loop counts must be non-zero");
  end
endmodule
