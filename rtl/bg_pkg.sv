// bg_pkg: sizes and fixed-point constants shared by the bilateral-grid pipeline.
//
// The grid sizes follow the paper's definitions for a w x h image, window radius r and
// filter parameters sigma_r, sigma_s:  gx = floor(h/r)+2, gy = floor(w/r)+2,
// gz = floor(255/(r*sigma_r/sigma_s))+2.  Image row index x runs over h, column index y over w.
// The grid index of a pixel is round(ix/r), round(iy/r), round(f*sigma_s/(r*sigma_r)); rounding
// of an exact half goes up (this design's choice).  Everything else here (fixed-point formats,
// field widths) is this design's choice and is documented next to each constant.
package bg_pkg;

  // ---------------------------------------------------------------- grid geometry
  function automatic int grid_gx(int h, int r);
    return h / r + 2;
  endfunction

  function automatic int grid_gy(int w, int r);
    return w / r + 2;
  endfunction

  // floor(255 / (r*sr/ss)) + 2, evaluated exactly in integers
  function automatic int grid_gz(int r, int sr, int ss);
    return (255 * ss) / (r * sr) + 2;
  endfunction

  // round(a / r) with halves rounded up, a >= 0
  function automatic int round_div(int a, int r);
    return (2 * a + r) / (2 * r);
  endfunction

  // highest grid index that receives pixels along an axis of n pixels
  function automatic int max_index(int n, int r);
    return round_div(n - 1, r);
  endfunction

  // bits needed to hold values 0..v
  function automatic int bits_for(longint v);
    int b;
    b = 1;
    while ((64'(1) << b) <= v) b++;
    return b;
  endfunction

  // ---------------------------------------------------------------- grid element
  // Each element is {count, sum} = {grid[0], grid[1]}; a cell of the r x r window gets at most
  // r*r pixels, so count needs bits_for(r*r) and sum bits_for(255*r*r).
  function automatic int cnt_width(int r);
    return bits_for(longint'(r) * r);
  endfunction

  function automatic int sum_width(int r);
    return bits_for(255 * longint'(r) * r);
  endfunction

  // ---------------------------------------------------------------- fixed point
  // Gaussian weights g_sigma_g(d) = exp(-d^2 / (2 sigma_g^2)), sigma_g = sigma_s / r, as
  // integers scaled by 2^GW_FRAC (the paper replaces floating point by power-of-two scaling).
  localparam int GW_FRAC = 10;
  // Blurred grid values grid_f are kept as unsigned Q8.GF_FRAC.
  localparam int GF_FRAC = 4;
  localparam int GF_W    = 8 + GF_FRAC;
  // Interpolation coefficients are unsigned Q0.CF_FRAC (value 0 .. 2^CF_FRAC inclusive).
  localparam int CF_FRAC = 8;

  // squared distance d2 in {0,1,2,3}
  function automatic int gauss_weight(int d2, int r, int ss);
    real e;
    e = $exp(-(real'(d2) * real'(r) * real'(r)) / (2.0 * real'(ss) * real'(ss)));
    return int'($floor(e * real'(1 << GW_FRAC) + 0.5));
  endfunction

endpackage
