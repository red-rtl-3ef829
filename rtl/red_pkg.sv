// red_pkg: shared constants and the index arithmetic of the pixel-wise mapping.
//
// A stride-S deconvolution equals a plain convolution over a zero-inserted
// ("padded") input whose real pixels sit at padded index OFF + S*x, with
// OFF = K - 1 - PAD. Output row oh sees kernel row i only when
// (oh + i - OFF) is a multiple of S. If output rows are grouped in tiles of S
// (oh = S*t + a), kernel row i therefore always serves the same in-tile
// offset a = mode_of(i) and always reads input row t + shift_of(i). These two
// functions are all the zero-skipping data flow needs; they are evaluated at
// elaboration time from the module parameters. The same formulas hold for
// columns with K_W.
package red_pkg;

  // In-tile output offset (computation-mode coordinate) served by kernel row i.
  function automatic int mode_of(input int i, input int k, input int s, input int pad);
    int off;
    off = k - 1 - pad;
    return (((off - i) % s) + s) % s;
  endfunction

  // Input-row displacement, relative to the tile index, read by kernel row i.
  function automatic int shift_of(input int i, input int k, input int s, input int pad);
    int off;
    off = k - 1 - pad;
    return (mode_of(i, k, s, pad) + i - off) / s;   // exact division
  endfunction

  function automatic int shift_min(input int k, input int s, input int pad);
    int r;
    r = shift_of(0, k, s, pad);
    for (int i = 1; i < k; i++) if (shift_of(i, k, s, pad) < r) r = shift_of(i, k, s, pad);
    return r;
  endfunction

  function automatic int shift_max(input int k, input int s, input int pad);
    int r;
    r = shift_of(0, k, s, pad);
    for (int i = 1; i < k; i++) if (shift_of(i, k, s, pad) > r) r = shift_of(i, k, s, pad);
    return r;
  endfunction

  // Number of distinct input rows (or columns) one tile reads.
  function automatic int shift_span(input int k, input int s, input int pad);
    return shift_max(k, s, pad) - shift_min(k, s, pad) + 1;
  endfunction

  // Output extent of the deconvolution: O = S*(I-1) + K - 2*PAD.
  function automatic int out_size(input int i, input int k, input int s, input int pad);
    return s * (i - 1) + k - 2 * pad;
  endfunction

  // Tiles of S output rows needed to cover O rows.
  function automatic int tiles_of(input int i, input int k, input int s, input int pad);
    return (out_size(i, k, s, pad) + s - 1) / s;
  endfunction

endpackage
