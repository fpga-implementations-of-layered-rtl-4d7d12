// rcq_pkg: constants, types and table-generating functions shared by the
// layered MinSum RCQ (L-msRCQ) LDPC decoder.
//
// Default sizes are those of the decoder the design is built around: a
// quasi-cyclic rate-1/2 code of length 16384 with circulant size L = 64
// (64 VN banks, 64 CN lanes), 4-bit CN messages (b^c = 4), 8-bit AP-LLRs
// (b^v = 8) and at most 16 iterations.
//
// The parity-check matrix of the original code is not reproduced here.
// code_entry() generates a stand-in QC code of the same dimensions with a
// dual-diagonal parity part (an IRA-like structure) and an irregular
// information part. Row r of the base matrix has, in read order,
//   entry 0             : parity block column KB+r (shared with row r+1),
//   entries 1..di(r)    : information block columns, one per section,
//   entry d-1 (r > 0)   : parity block column KB+r-1 (shared with row r-1).
// Rows are processed even rows first, then odd rows (layer_row), so that
// two consecutively processed layers share no parity column; an arranged
// read order of this kind is how the layer overlap avoids most
// read-after-write hazards.
// Information column of section t in row r:
//   t*S + (r(2t+1) + floor(r/S)(2t+5) + 3t) mod S,   S = KB/DI,
// so each column of a section meets one row in every run of S rows and the
// row sets of different sections differ; shift amount
//   (r(2t+7) + 13t^2 + (r^2 mod 29) + 11) mod L. Even rows have DI
// information connections, odd rows DI-1, so the layer degree varies.
//
// Default RCQ parameters (default_th / default_re) are a uniform quantizer
// whose step grows with the iteration: step(i) = S0 + S0*i/IMAX with
// S0 = DEF_STEP = 8, one unit of a channel LLR scaled by 8; th_k = k*step, re_k = (k-1)*step + step/2, clipped
// to 2^W - 1. Parameters designed for a real code are written at run time
// through the decoder's parameter port.
package rcq_pkg;

  // ---------------------------------------------------------------- sizes
  parameter int unsigned L_DEF    = 64;   // circulant size = VN banks = CN lanes
  parameter int unsigned NB_DEF   = 256;  // block columns (16384 / 64)
  parameter int unsigned MB_DEF   = 128;  // layers (8192 / 64)
  parameter int unsigned DI_DEF   = 4;    // information connections of even layers
  parameter int unsigned BC_DEF   = 4;    // b^c: CN message width (sign + magnitude index)
  parameter int unsigned BV_DEF   = 8;    // b^v: AP-LLR width
  parameter int unsigned IMAX_DEF = 16;   // maximum decoding iterations

  // ---------------------------------------------------------------- code
  // Layers are processed in the order of their position pos = 0..mb-1; the
  // row of the base matrix handled at position pos is layer_row(pos): all
  // even rows first, then all odd rows, so that consecutively processed
  // layers share no parity column.
  function automatic int unsigned layer_row(int unsigned pos, int unsigned mb);
    int unsigned h;
    h = (mb + 1) / 2;
    return (pos < h) ? 2 * pos : 2 * (pos - h) + 1;
  endfunction

  function automatic int unsigned info_deg(int unsigned pos, int unsigned mb, int unsigned di);
    return (layer_row(pos, mb) % 2 == 0) ? di : di - 1;
  endfunction

  function automatic int unsigned layer_deg(int unsigned pos, int unsigned mb, int unsigned di);
    return info_deg(pos, mb, di) + ((layer_row(pos, mb) == 0) ? 1 : 2);
  endfunction

  function automatic int unsigned num_edges(int unsigned mb, int unsigned di);
    int unsigned e;
    e = 0;
    for (int unsigned p = 0; p < mb; p++) e += layer_deg(p, mb, di);
    return e;
  endfunction

  function automatic int unsigned max_deg(int unsigned di);
    return di + 2;
  endfunction

  // Block column (col) and circulant shift (shift) of entry k of the layer
  // processed at position pos.
  function automatic void code_entry(input int unsigned pos, input int unsigned k,
                                     input int unsigned mb, input int unsigned kb,
                                     input int unsigned di, input int unsigned l,
                                     output int unsigned col, output int unsigned shift);
    int unsigned d, t, s, r;
    r = layer_row(pos, mb);
    d = layer_deg(pos, mb, di);
    s = kb / di;
    if (k == 0) begin
      col = kb + r; shift = 0;
    end else if (r > 0 && k == d - 1) begin
      col = kb + r - 1; shift = 0;
    end else begin
      t = k - 1;
      col   = t * s + (r * (2 * t + 1) + (r / s) * (2 * t + 5) + 3 * t) % s;
      shift = (r * (2 * t + 7) + 13 * t * t + (r * r) % 29 + 11) % l;
    end
  endfunction

  // ---------------------------------------------------------------- RCQ defaults
  parameter int unsigned DEF_STEP = 8;  // base step of the default quantizer

  function automatic int unsigned default_step(int unsigned iter, int unsigned imax);
    return DEF_STEP + (DEF_STEP * iter) / imax;
  endfunction

  // Threshold th_k, k = 1 .. 2^(bc-1)-1
  function automatic int unsigned default_th(int unsigned iter, int unsigned k, int unsigned imax,
                                             int unsigned w);
    int unsigned v;
    v = k * default_step(iter, imax);
    return (v > (1 << w) - 1) ? (1 << w) - 1 : v;
  endfunction

  // Reconstruction value re_k, k = 1 .. 2^(bc-1)
  function automatic int unsigned default_re(int unsigned iter, int unsigned k, int unsigned imax,
                                             int unsigned w);
    int unsigned v, st;
    st = default_step(iter, imax);
    v  = (k - 1) * st + st / 2;
    return (v > (1 << w) - 1) ? (1 << w) - 1 : v;
  endfunction

endpackage
