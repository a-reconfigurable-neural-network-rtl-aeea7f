// ae_ref_pkg: integer reference model of the autoencoder front-end, used by
// the testbenches to compute expected values independently of the RTL.
//
// Everything is plain integer arithmetic on int/longint arrays: the
// normalization is an integer division, the layers are loops over the
// mathematical definitions (with explicit boundary tests for the zero
// padding) and the activations use division by powers of two rather than
// shifts. Parameter values are kept as ints in -32..31 and are packed into the
// 13,728-bit parameter vector / 1,716 bytes by pack_params.
package ae_ref_pkg;

  localparam int NTC = 48, NF = 8, NFLAT = 128, NO = 16;
  localparam int NCW = 216, NDW = 2048;
  localparam int PBITS = 13728;

  typedef int    tc_arr_t  [NTC];
  typedef int    cw_arr_t  [NCW];
  typedef int    cb_arr_t  [NF];
  typedef int    act_arr_t [NFLAT];
  typedef int    dw_arr_t  [NDW];
  typedef int    out_arr_t [NO];

  // fraction of the module sum, 8 fraction bits, floor, limited to 255
  function automatic int ref_norm(int tc, longint sum);
    longint q;
    if (sum == 0) return 0;
    q = (longint'(tc) * 256) / sum;
    return (q > 255) ? 255 : int'(q);
  endfunction

  // Conv2D 'same' padding + ReLU; x is in 1/256, params in 1/32, act in 1/32
  function automatic act_arr_t ref_conv(tc_arr_t x, cw_arr_t w, cb_arr_t b);
    act_arr_t a;
    for (int f = 0; f < NF; f++)
      for (int r = 0; r < 4; r++)
        for (int c = 0; c < 4; c++) begin
          longint acc = longint'(b[f]) * 256;
          for (int ch = 0; ch < 3; ch++)
            for (int dr = -1; dr <= 1; dr++)
              for (int dc = -1; dc <= 1; dc++) begin
                int rr = r + dr, cc = c + dc;
                if (rr >= 0 && rr < 4 && cc >= 0 && cc < 4)
                  acc += longint'(x[ch*16 + rr*4 + cc]) * w[f*27 + ch*9 + (dr+1)*3 + (dc+1)];
              end
          if (acc < 0) acc = 0;
          acc = acc / 256;                 // 13 -> 5 fraction bits
          a[f*16 + r*4 + c] = (acc > 63) ? 63 : int'(acc);
        end
    return a;
  endfunction

  // Dense + ReLU; act in 1/32, params in 1/32, output in 1/32
  function automatic out_arr_t ref_dense(act_arr_t a, dw_arr_t w, int b[NO]);
    out_arr_t y;
    for (int o = 0; o < NO; o++) begin
      longint acc = longint'(b[o]) * 32;
      for (int i = 0; i < NFLAT; i++) acc += longint'(a[i]) * w[i*16 + o];
      if (acc < 0) acc = 0;
      acc = acc / 32;                      // 10 -> 5 fraction bits
      y[o] = (acc > 511) ? 511 : int'(acc);
    end
    return y;
  endfunction

  // keep the top wd[o] bits of each 9-bit output, pack LSB first
  function automatic void ref_pack(out_arr_t y, int wd[NO], output bit [143:0] p, output int n);
    p = '0;
    n = 0;
    for (int o = 0; o < NO; o++) begin
      int w = (wd[o] > 9) ? 9 : wd[o];
      int v = y[o] / (1 << (9 - w));
      for (int k = 0; k < w; k++) p[n + k] = v[k];
      n += w;
    end
  endfunction

  // parameter vector: conv W, conv b, dense W, dense b, 6 bits each
  function automatic bit [PBITS-1:0] pack_params(cw_arr_t cw, cb_arr_t cb, dw_arr_t dw, int db[NO]);
    bit [PBITS-1:0] v;
    int pos = 0;
    v = '0;
    for (int i = 0; i < NCW; i++) begin for (int k = 0; k < 6; k++) v[pos+k] = cw[i][k]; pos += 6; end
    for (int i = 0; i < NF;  i++) begin for (int k = 0; k < 6; k++) v[pos+k] = cb[i][k]; pos += 6; end
    for (int i = 0; i < NDW; i++) begin for (int k = 0; k < 6; k++) v[pos+k] = dw[i][k]; pos += 6; end
    for (int i = 0; i < NO;  i++) begin for (int k = 0; k < 6; k++) v[pos+k] = db[i][k]; pos += 6; end
    return v;
  endfunction

  function automatic int rand_param();
    return int'($urandom_range(63)) - 32;
  endfunction

endpackage
