// tb_rbe_pkg: reference model and data packing for RBE testbenches.
//
// A layer is described by its geometry and precisions. gen() draws random
// activations, weights and normalization factors; pack() writes them into a
// word-addressed memory image (byte address -> 32-bit word) in the RBE
// layouts: activations (H, W, K/32, I, 32), weights (Kout, Kin/32, W, 9, 32)
// or (Kout, Kin/32, W, 32), one (scale, bias) word pair per output channel.
// expected() computes an output directly from the integer values with a
// plain convolution, independent of the bit-serial decomposition, and
// unpack_y() reads an output back from the bit-plane layout.
package tb_rbe_pkg;

  int unsigned mode;      // 0: 3x3, 1: 1x1
  int unsigned wb, ib, ob, sh, relu;
  int unsigned nkout, nkin, nh, nw;
  int unsigned hin, win, hout, wout, kin, kout;
  int unsigned x_base, w_base, nq_base, y_base;

  int unsigned xv [int];   // (h * win + w) * kin + k
  int unsigned wv [int];   // (ko * kin + ki) * 9 + f
  int          scale [int];
  int          bias  [int];
  logic [31:0] mem  [int]; // byte address -> word

  function automatic void setup(int unsigned m, int unsigned w_, int unsigned i_, int unsigned o_,
                                int unsigned s_, int unsigned r_, int unsigned nko, int unsigned nki,
                                int unsigned nh_, int unsigned nw_, int unsigned base);
    mode = m; wb = w_; ib = i_; ob = o_; sh = s_; relu = r_;
    nkout = nko; nkin = nki; nh = nh_; nw = nw_;
    hout = 3 * nh; wout = 3 * nw;
    hin = hout + (mode == 0 ? 2 : 0);
    win = wout + (mode == 0 ? 2 : 0);
    kin = 32 * nkin; kout = 32 * nkout;
    x_base  = base;
    w_base  = x_base + hin * win * nkin * ib * 4;
    nq_base = w_base + kout * nkin * wb * 9 * 4;
    y_base  = nq_base + kout * 8;
    xv.delete(); wv.delete(); scale.delete(); bias.delete(); mem.delete();
  endfunction

  function automatic int unsigned x_pix_stride(); return nkin * ib * 4; endfunction
  function automatic int unsigned x_row_stride(); return win * nkin * ib * 4; endfunction
  function automatic int unsigned y_pix_stride(); return nkout * ob * 4; endfunction
  function automatic int unsigned y_row_stride(); return wout * nkout * ob * 4; endfunction
  function automatic int unsigned end_addr(); return y_base + hout * wout * nkout * ob * 4; endfunction

  function automatic void gen();
    for (int unsigned p = 0; p < hin * win * kin; p++) xv[p] = $urandom % (1 << ib);
    for (int unsigned p = 0; p < kout * kin * 9; p++) wv[p] = $urandom % (1 << wb);
    for (int unsigned k = 0; k < kout; k++) begin
      scale[k] = int'($urandom % 7) + 1;
      bias[k]  = int'($urandom % 2001) - 1000;
    end
  endfunction

  function automatic void pack();
    for (int unsigned h = 0; h < hin; h++)
      for (int unsigned w = 0; w < win; w++)
        for (int unsigned kt = 0; kt < nkin; kt++)
          for (int unsigned b = 0; b < ib; b++) begin
            logic [31:0] word;
            for (int unsigned c = 0; c < 32; c++)
              word[c] = xv[(h * win + w) * kin + kt * 32 + c][b];
            mem[x_base + ((h * win + w) * nkin * ib + kt * ib + b) * 4] = word;
          end
    for (int unsigned ko = 0; ko < kout; ko++)
      for (int unsigned kt = 0; kt < nkin; kt++)
        for (int unsigned bw = 0; bw < wb; bw++)
          for (int unsigned f = 0; f < (mode == 0 ? 9 : 1); f++) begin
            logic [31:0] word;
            for (int unsigned c = 0; c < 32; c++)
              word[c] = wv[(ko * kin + kt * 32 + c) * 9 + f][bw];
            if (mode == 0) mem[w_base + (((ko * nkin + kt) * wb + bw) * 9 + f) * 4] = word;
            else           mem[w_base + ((ko * nkin + kt) * wb + bw) * 4] = word;
          end
    for (int unsigned ko = 0; ko < kout; ko++) begin
      mem[nq_base + ko * 8]     = scale[ko];
      mem[nq_base + ko * 8 + 4] = bias[ko];
    end
  endfunction

  function automatic longint acc_ref(int unsigned ho, int unsigned wo, int unsigned ko);
    longint a = 0;
    for (int unsigned ki = 0; ki < kin; ki++) begin
      if (mode == 0) begin
        for (int unsigned f = 0; f < 9; f++)
          a += longint'(xv[((ho + f / 3) * win + wo + f % 3) * kin + ki]) * longint'(wv[(ko * kin + ki) * 9 + f]);
      end else begin
        a += longint'(xv[(ho * win + wo) * kin + ki]) * longint'(wv[(ko * kin + ki) * 9]);
      end
    end
    return a;
  endfunction

  function automatic int unsigned expected(int unsigned ho, int unsigned wo, int unsigned ko);
    longint v = (longint'(scale[ko]) * acc_ref(ho, wo, ko) + longint'(bias[ko])) >>> sh;
    longint lo = relu ? 0 : -(longint'(1) << (ob - 1));
    longint hi = relu ? (longint'(1) << ob) - 1 : (longint'(1) << (ob - 1)) - 1;
    if (v < lo) v = lo;
    if (v > hi) v = hi;
    return int'(v) & ((1 << ob) - 1);
  endfunction

  function automatic int unsigned unpack_y(int unsigned ho, int unsigned wo, int unsigned ko);
    int unsigned v = 0;
    for (int unsigned b = 0; b < ob; b++) begin
      int unsigned a = y_base + ((ho * wout + wo) * nkout * ob + (ko / 32) * ob + b) * 4;
      logic [31:0] word = mem.exists(a) ? mem[a] : 32'd0;
      v |= int'(word[ko % 32]) << b;
    end
    return v;
  endfunction

  function automatic logic [31:0] cfg_word();
    return {7'd0, 1'(relu), 3'd0, 5'(sh), 4'(ob), 4'(ib), 4'(wb), 3'd0, 1'(mode)};
  endfunction

  function automatic logic [31:0] tiles_word();
    return {8'(nkout), 8'(nkin), 8'(nh), 8'(nw)};
  endfunction

endpackage
