// f3dc_tb_pkg -- reference models shared by the F3DC testbenches.
//
// The references are written from the mathematics, not from the circuits:
// the transform matrices P^T, 2H and A^T as integer tables (multiplied out
// row by row), and a direct stride-2 transposed convolution for the FPU,
// FPA and top-level checks. With padding 1, output position m of a line
// receives input j through kernel tap m + 1 - 2j; inside one tile, whose
// input 0 sits one position before the tile's first output / 2, that tap is
// x + 3 - 2i.
package f3dc_tb_pkg;
  import f3dc_pkg::*;

  // P^T (8x5), H scaled by 2 (8x4), A^T (6x8)
  localparam int PT [8][5] = '{
    '{ 1, 0,-1, 0, 0}, '{ 0, 1, 1, 0, 0}, '{ 0,-1, 1, 0, 0}, '{ 0,-1, 0, 1, 0},
    '{ 0, 1, 0,-1, 0}, '{ 0, 0, 1, 1, 0}, '{ 0, 0,-1, 1, 0}, '{ 0, 0,-1, 0, 1}};
  localparam int H2 [8][4] = '{
    '{ 0, 0, 0, 2}, '{ 0, 1, 0, 1}, '{ 0,-1, 0, 1}, '{ 0, 2, 0, 0},
    '{ 0, 0, 2, 0}, '{ 1, 0, 1, 0}, '{-1, 0, 1, 0}, '{ 2, 0, 0, 0}};
  localparam int AT [6][8] = '{
    '{1, 1, 1, 0, 0, 0, 0, 0}, '{0, 0, 0, 0, 1, 1, 1, 0},
    '{0, 1,-1, 0, 0, 0, 0, 0}, '{0, 0, 0, 0, 0, 1,-1, 0},
    '{0, 1, 1, 1, 0, 0, 0, 0}, '{0, 0, 0, 0, 0, 1, 1, 1}};

  // random signed values of a given width, with extremes mixed in
  function automatic int rnd_signed(int w);
    int v;
    int sel = int'($urandom_range(0, 9));
    if (sel == 0)      v = -(1 << (w-1));
    else if (sel == 1) v = (1 << (w-1)) - 1;
    else begin
      v = int'($urandom_range(0, (1 << w) - 1));
      if (v >= (1 << (w-1))) v -= (1 << w);
    end
    return v;
  endfunction

  function automatic in_tile_t rnd_tile();
    in_tile_t t;
    for (int d = 0; d < IR; d++) for (int h = 0; h < IR; h++) for (int w = 0; w < IR; w++)
      t[d][h][w] = IN_W'(rnd_signed(IN_W));
    return t;
  endfunction

  function automatic kernel_t rnd_kernel();
    kernel_t k;
    for (int d = 0; d < K; d++) for (int h = 0; h < K; h++) for (int w = 0; w < K; w++)
      k[d][h][w] = WT_W'(rnd_signed(WT_W));
    return k;
  endfunction

  // direct transposed convolution of one tile: output (x,y,z) of a 6x6x6 tile
  function automatic longint ref_tile_elem(in_tile_t d, kernel_t g, int x, int y, int z);
    longint s = 0;
    for (int i = 0; i < IR; i++) for (int j = 0; j < IR; j++) for (int l = 0; l < IR; l++) begin
      int a = x + 3 - 2*i, b = y + 3 - 2*j, c = z + 3 - 2*l;
      if (a >= 0 && a < K && b >= 0 && b < K && c >= 0 && c < K)
        s += longint'($signed(d[i][j][l])) * longint'($signed(g[a][b][c]));
    end
    return s;
  endfunction

  function automatic longint sx(longint v, int w);  // sign-extend a w-bit field
    return (v << (64 - w)) >>> (64 - w);
  endfunction
endpackage
