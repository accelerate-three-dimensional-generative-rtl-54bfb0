// f3dc_pkg -- constants and tile types shared by the F3DC accelerator.
//
// The accelerator runs the fast 3-D deconvolution transform T3(6^3,4^3):
// kernel size K=4, stride S=2, transform order R=3. From these follow the
// input tile edge IR = ceil((K+R*S-1)/S) = 5, the transformed (EWMM) cube
// edge ER = K+(R-1)*S = 8 and the output tile edge OR = S*R = 6. Inputs are
// 16-bit and weights 8-bit signed integers, as in the evaluated design.
//
// Word widths below the quantisation are this design's choice. Each 1-D pass
// of P^T adds one bit (at most two +-1 terms per row); each pass of A^T adds
// two bits (at most three terms). The H matrix holds +-1/2 entries: the
// weight circuit keeps the halved bit as a fraction, so a transformed kernel
// carries one fractional bit per dimension (three in all) and the post-process
// drops those three bits again, which is exact because the deconvolution
// result is an integer.
//
// Tiles are aligned for a deconvolution padding of 1 (output size twice the
// input size): input tile t of an axis starts at input 3t-1 and yields
// outputs 6t..6t+5. The host cuts the tiles; nothing in the RTL depends on it.
package f3dc_pkg;

  localparam int K  = 4;                        // kernel edge
  localparam int S  = 2;                        // stride
  localparam int R  = 3;                        // transform order
  localparam int IR = (K + R*S - 1 + S - 1)/S;  // 5, input tile edge
  localparam int ER = K + (R-1)*S;              // 8, EWMM cube edge
  localparam int OR = S*R;                      // 6, output tile edge

  localparam int IN_W  = 16;                    // input / activation width
  localparam int WT_W  = 8;                     // weight width
  localparam int DT_W  = IN_W + 3;              // transformed input, 19 bits
  localparam int GT_W  = WT_W + 3;              // transformed kernel, 11 bits (3 fraction bits)
  localparam int PR_W  = DT_W + GT_W;           // EWMM product, 30 bits
  localparam int PO_W  = PR_W + 6;              // after three A^T passes, 36 bits
  localparam int FRAC  = 3;                     // fraction bits dropped after post-process
  localparam int RES_W = PO_W - FRAC;           // FPU result, 33 bits
  localparam int ACC_W = 40;                    // accumulator / output buffer element

  localparam int FPA_ROWS = 2;                  // input channels in parallel
  localparam int FPA_COLS = 2;                  // output channels in parallel
  localparam int FPU_LAT  = 3;                  // FPU pipeline depth in cycles

  // Tiles are packed arrays indexed [depth][height][width].
  typedef logic [IR-1:0][IR-1:0][IR-1:0][IN_W-1:0]  in_tile_t;   // 5x5x5 input tile
  typedef logic [K-1:0][K-1:0][K-1:0][WT_W-1:0]     kernel_t;    // 4x4x4 kernel
  typedef logic [ER-1:0][ER-1:0][ER-1:0][DT_W-1:0]  dt_cube_t;   // transformed input
  typedef logic [ER-1:0][ER-1:0][ER-1:0][GT_W-1:0]  gt_cube_t;   // transformed kernel
  typedef logic [ER-1:0][ER-1:0][ER-1:0][PR_W-1:0]  pr_cube_t;   // EWMM products
  typedef logic [OR-1:0][OR-1:0][OR-1:0][RES_W-1:0] res_tile_t;  // FPU output tile
  typedef logic [OR-1:0][OR-1:0][OR-1:0][ACC_W-1:0] acc_tile_t;  // accumulated tile

  // Tiles of the two input channels a row pair of FPUs reads in one cycle.
  typedef in_tile_t [FPA_ROWS-1:0] in_pair_t;
  // Kernels of the 2x2 FPUs: [row = input channel][column = output channel].
  typedef kernel_t [FPA_ROWS-1:0][FPA_COLS-1:0] kernel_quad_t;
  // Accumulated tiles of the two output channels.
  typedef acc_tile_t [FPA_COLS-1:0] acc_pair_t;

endpackage
