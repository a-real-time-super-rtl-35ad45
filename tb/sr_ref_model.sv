// Reference model of the super-resolution network for the testbenches.
//
// Computes, independently of the RTL, what the accelerator must produce for one strip of
// TILE_R rows: seven 3x3 convolutions with zero padding at the strip's top and bottom rows and
// at the image's left and right columns, bias (layers 1-6) or input-pixel residual (layer 7)
// added after a left shift, then a rounding right shift, ReLU and saturation to 8 bits.
// Weights, biases and pixels come from deterministic hash functions so that a testbench can
// regenerate any of them.
package sr_ref_model;
  import sr_pkg::*;

  localparam int unsigned MAXW = 640;   // widest image a testbench models

  // deterministic pseudo-random values
  function automatic int unsigned mix(input int unsigned a);
    int unsigned h;
    h = a * 32'h9E3779B1;
    h = h ^ (h >> 15);
    h = h * 32'h85EBCA77;
    h = h ^ (h >> 13);
    return h;
  endfunction

  function automatic int weight(input int seed, input int l, input int o, input int i,
                                input int dx, input int dy);
    if (i >= int'(layer_ich(l)) || o >= int'(layer_och(l))) return 0;
    return int'(mix(seed * 7919 + (((l * 32 + o) * 32 + i) * 4 + dx) * 4 + dy) % 11) - 5;
  endfunction

  function automatic int bias(input int seed, input int l, input int o);
    return int'(mix(seed * 104729 + l * 64 + o + 12345) % 61) - 30;
  endfunction

  function automatic int pixel(input int seed, input int y, input int x, input int c);
    return int'(mix(seed * 31337 + (y * 1024 + x) * 4 + c + 777) % 256);
  endfunction

  // shifts used by the testbenches
  function automatic int addend_shift(input int l);
    return (l == N_LAYERS) ? 7 : 4;
  endfunction
  function automatic int out_shift(input int l);
    return (l == 1) ? 6 : 7;
  endfunction

  function automatic int requant(input longint acc, input int sh);
    longint v;
    v = (sh == 0) ? acc : ((acc + (longint'(1) <<< (sh - 1))) >>> sh);
    if (v < 0) return 0;
    if (v > 255) return 255;
    return int'(v);
  endfunction

  // feature maps [ch][row][col]; res holds the last layer after run_strip
  int a   [MAX_CH][TILE_R][MAXW];
  int b   [MAX_CH][TILE_R][MAXW];
  int res [MAX_CH][TILE_R][MAXW];
  int n_sat, n_relu;   // values saturated high / cut by ReLU during the last run

  // run the whole network on strip s of an image of width w
  function automatic void run_strip(input int seed, input int s, input int w);
    n_sat = 0; n_relu = 0;
    for (int c = 0; c < int'(MAX_CH); c++)
      for (int y = 0; y < int'(TILE_R); y++)
        for (int x = 0; x < w; x++)
          a[c][y][x] = (c < int'(IN_CH)) ? pixel(seed, s * int'(TILE_R) + y, x, c) : 0;
    for (int l = 1; l <= int'(N_LAYERS); l++) begin
      int wl [MAX_CH][MAX_CH][K][K];
      for (int o = 0; o < int'(MAX_CH); o++)
        for (int i = 0; i < int'(MAX_CH); i++)
          for (int dx = 0; dx < 3; dx++)
            for (int dy = 0; dy < 3; dy++) wl[o][i][dx][dy] = weight(seed, l, o, i, dx, dy);
      for (int o = 0; o < int'(layer_och(l)); o++)
        for (int y = 0; y < int'(TILE_R); y++)
          for (int x = 0; x < w; x++) begin
            longint acc, add, v;
            acc = 0;
            for (int i = 0; i < int'(layer_ich(l)); i++)
              for (int dx = 0; dx < 3; dx++)
                for (int dy = 0; dy < 3; dy++) begin
                  int yy, xx;
                  yy = y + dy - 1; xx = x + dx - 1;
                  if (yy >= 0 && yy < int'(TILE_R) && xx >= 0 && xx < w)
                    acc += longint'(a[i][yy][xx]) * wl[o][i][dx][dy];
                end
            if (l == int'(N_LAYERS)) add = longint'(pixel(seed, s * int'(TILE_R) + y, x, o % int'(IN_CH)));
            else                     add = longint'(bias(seed, l, o));
            acc += add <<< addend_shift(l);
            v = (acc + (longint'(1) <<< (out_shift(l) - 1))) >>> out_shift(l);
            if (v > 255) n_sat++;
            if (v < 0)   n_relu++;
            b[o][y][x] = requant(acc, out_shift(l));
          end
      a = b;
    end
    res = a;
  endfunction

endpackage
