// Reference model used by the testbenches: color structure histogram and
// Manhattan distance computed directly from their definitions, independently
// of the RTL structure (no line buffers, no window registers).
//
// csd_of(): for every 8x8 element position lying fully inside a WIDTH x HEIGHT
// image (row-major array of color indices), the set of colors present is
// formed, and each present color's bin is incremented by one.
// l1_dist(): sum over the bins of |a - b|.
// make_frame(): synthetic frames. A "scene" is a set of rectangular color
// patches drawn from a seed; a small per-frame jitter changes a few pixels, so
// frames of one scene are close and frames of different scenes are far apart.
package csd_ref_pkg;

  function automatic void csd_of(input int unsigned width, input int unsigned height,
                                 input int unsigned n_colors, const ref int unsigned img[],
                                 output longint unsigned h[]);
    h = new[n_colors];
    foreach (h[k]) h[k] = 0;
    for (int unsigned r = 0; r + 8 <= height; r++) begin
      for (int unsigned c = 0; c + 8 <= width; c++) begin
        bit [63:0] mask = '0;
        for (int unsigned i = 0; i < 8; i++)
          for (int unsigned j = 0; j < 8; j++)
            mask[img[(r + i) * width + c + j]] = 1'b1;
        for (int unsigned k = 0; k < n_colors; k++)
          if (mask[k]) h[k]++;
      end
    end
  endfunction

  function automatic longint unsigned l1_dist(const ref longint unsigned a[],
                                              const ref longint unsigned b[]);
    longint unsigned d = 0;
    foreach (a[k]) d += (a[k] > b[k]) ? a[k] - b[k] : b[k] - a[k];
    return d;
  endfunction

  // Frame of scene 'scene' with jitter 'jit' (0 = no jitter).
  function automatic void make_frame(input int unsigned width, input int unsigned height,
                                     input int unsigned n_colors, input int unsigned scene,
                                     input int unsigned jit, ref int unsigned img[]);
    int unsigned s;
    img = new[width * height];
    s = scene * 32'h9E37_79B9 + 1;
    // background
    foreach (img[p]) img[p] = scene % n_colors;
    // 12 patches
    for (int n = 0; n < 12; n++) begin
      int unsigned r0, c0, hh, ww, col;
      s = s * 1103515245 + 12345; r0  = (s >> 8) % height;
      s = s * 1103515245 + 12345; c0  = (s >> 8) % width;
      s = s * 1103515245 + 12345; hh  = 1 + (s >> 8) % (height / 3 + 1);
      s = s * 1103515245 + 12345; ww  = 1 + (s >> 8) % (width / 3 + 1);
      s = s * 1103515245 + 12345; col = (s >> 8) % n_colors;
      for (int unsigned r = r0; r < r0 + hh && r < height; r++)
        for (int unsigned c = c0; c < c0 + ww && c < width; c++)
          img[r * width + c] = col;
    end
    // jitter: a few isolated pixels of random colors
    s = jit * 747796405 + 2891336453;
    if (jit != 0)
      for (int n = 0; n < 4; n++) begin
        s = s * 1103515245 + 12345;
        img[(s >> 4) % (width * height)] = (s >> 20) % n_colors;
      end
  endfunction

endpackage
