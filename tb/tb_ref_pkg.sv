// tb_ref_pkg: golden reference for the accelerator testbenches.
//
// A plain, loop-by-loop model of what one layer of the accelerator must
// compute, written from the definitions (convolution over HWC tensors,
// symmetric clipping, round-half-up shifts) rather than from the RTL's
// structure. It keeps its own weight array, column parameters and two SRAM
// banks, and runs layer programs on them with the same bank swapping as the
// hardware, so a testbench can compare every output byte.
package tb_ref_pkg;
  import aon_pkg::*;

  int         wmem [ROWS][COLS];      // signed weight codes
  chan_par_t  cpm  [COLS];
  int         bank [2][BANK_BYTES];
  int         adc_sh;

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  function automatic int sat(longint v, int m);
    if (v > m) return m;
    if (v < -m) return -m;
    return int'(v);
  endfunction

  function automatic longint rsr(longint v, int sh);
    if (sh == 0) return v;
    return (v + (longint'(1) << (sh - 1))) >>> sh;
  endfunction

  // one layer: read bank rb, write bank 1-rb
  function automatic void run_layer(layer_desc_t d, int rb);
    int wb, m, npix;
    longint pool [COLS];
    wb = 1 - rb;
    m  = qmax(d.mode);
    npix = 0;
    for (int f = 0; f < COLS; f++) pool[f] = 0;
    for (int oy = 0; oy < int'(d.out_h); oy++)
      for (int ox = 0; ox < int'(d.out_w); ox++) begin
        for (int f = 0; f < int'(d.cols); f++) begin
          longint acc;
          longint v;
          int col;
          col = int'(d.col0) + f;
          acc = 0;
          for (int kh = 0; kh < int'(d.k_h); kh++)
            for (int kw = 0; kw < int'(d.k_w); kw++)
              for (int c = 0; c < int'(d.in_c); c++) begin
                int y, x, a, row;
                y = oy * int'(d.stride) + kh - int'(d.pad_t);
                x = ox * int'(d.stride) + kw - int'(d.pad_l);
                row = int'(d.row0) + (kh * int'(d.k_w) + kw) * int'(d.in_c) + c;
                if (y < 0 || x < 0 || y >= int'(d.in_h) || x >= int'(d.in_w)) a = 0;
                else a = bank[rb][(int'(d.in_base) + (y * int'(d.in_w) + x) * int'(d.in_c) + c) % BANK_BYTES];
                acc += longint'(sat(a, m)) * longint'(wmem[row][col]);
              end
          // ADC
          v = sat(rsr(acc, adc_sh), m);
          // activation processing
          v = v * longint'(d.s_layer.mant) * longint'(cpm[col].s_ch.mant);
          v = rsr(v, int'(d.s_layer.shift) + int'(cpm[col].s_ch.shift)) + longint'(cpm[col].bias);
          if (d.residual)
            v += longint'(bank[wb][(int'(d.res_base) + npix * int'(d.cols) + f) % BANK_BYTES]);
          if (d.relu && v < 0) v = 0;
          v = sat(v, m);
          if (d.pool) pool[f] += v;
          else bank[wb][(int'(d.out_base) + npix * int'(d.cols) + f) % BANK_BYTES] = int'(v);
        end
        npix++;
      end
    if (d.pool)
      for (int f = 0; f < int'(d.cols); f++)
        bank[wb][(int'(d.out_base) + f) % BANK_BYTES] =
          sat(rsr(pool[f] * longint'(d.s_pool.mant), int'(d.s_pool.shift)), m);
  endfunction

  // descriptor for a convolution; fills the derived fields
  function automatic layer_desc_t conv(act_mode_e mode, int in_base, int out_base,
                                       int h, int w, int c, int kh, int kw, int s,
                                       int pt, int pl, int oh, int ow,
                                       int row0, int col0, int f, bit relu);
    layer_desc_t d;
    d = '0;
    d.ltype = LT_CIM; d.mode = mode;
    d.in_base = 16'(in_base); d.out_base = 16'(out_base);
    d.in_h = 8'(h); d.in_w = 8'(w); d.in_c = 10'(c);
    d.k_h = 4'(kh); d.k_w = 4'(kw); d.stride = 2'(s);
    d.pad_t = 3'(pt); d.pad_l = 3'(pl);
    d.out_h = 8'(oh); d.out_w = 8'(ow);
    d.row0 = 10'(row0); d.rows = 11'(kh * kw * c);
    d.col0 = 10'(col0); d.cols = 10'(f);
    d.relu = relu;
    d.s_layer.mant = 16'sd1; d.s_layer.shift = 5'd0;
    d.s_pool.mant = 16'sd1;  d.s_pool.shift = 5'd0;
    return d;
  endfunction

  // random weights for one layer's block of the array
  function automatic void rand_weights(layer_desc_t d, int wmax);
    for (int r = int'(d.row0); r < int'(d.row0) + int'(d.rows); r++)
      for (int c = int'(d.col0); c < int'(d.col0) + int'(d.cols); c++)
        wmem[r][c] = rnd(-wmax, wmax);
  endfunction

endpackage
