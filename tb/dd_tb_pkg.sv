// dd_tb_pkg: reference models shared by the testbenches.
//
// Plain integer models of the accelerator's arithmetic, written from the
// layer definitions rather than from the RTL: requantization, KxK depthwise
// and normal convolution with zero padding, pointwise convolution, global
// average pooling and the residual addition. Tensors are queues of ints in
// channel-fastest raster order (index = (y*w + x)*c + ch). Weights of a
// normal convolution are indexed ((m*n + c)*k + ky)*k + kx, of a depthwise
// one (c*k + ky)*k + kx, of a pointwise one m*n + c. Also: packing of
// elements into 64-bit memory words and a small random-number helper.
package dd_tb_pkg;
  typedef int iq_t[$];
  typedef struct {
    int bias;
    int mult;
    int shift;
    int zp;
  } rqp_t;
  typedef rqp_t rqq_t[$];

  function automatic int rq(longint acc, rqp_t p, bit rnd, int bw);
    longint v;
    longint top;
    v = (acc + p.bias) * p.mult;
    if (rnd && p.shift > 0) v = v + (longint'(1) << (p.shift - 1));
    // floor division by 2^shift
    if (v >= 0) v = v / (longint'(1) << p.shift);
    else        v = -((-v + (longint'(1) << p.shift) - 1) / (longint'(1) << p.shift));
    v = v + p.zp;
    top = (longint'(1) << bw) - 1;
    if (v < 0) return 0;
    if (v > top) return int'(top);
    return int'(v);
  endfunction

  function automatic int conv_out(int h, int s, int k);
    return (h + 2*(k/2) - k) / s + 1;
  endfunction

  function automatic iq_t ref_conv(iq_t x, int h, int n, int m, int s, int k, bit dw,
                                   iq_t w, rqq_t qp, bit rnd, int bw);
    iq_t o;
    int oh, p;
    oh = conv_out(h, s, k);
    p  = k / 2;
    for (int oy = 0; oy < oh; oy++)
      for (int ox = 0; ox < oh; ox++)
        for (int mo = 0; mo < (dw ? n : m); mo++) begin
          longint acc = 0;
          for (int c = 0; c < n; c++) begin
            if (dw && c != mo) continue;
            for (int ky = 0; ky < k; ky++)
              for (int kx = 0; kx < k; kx++) begin
                int iy, ix, wi;
                iy = oy*s - p + ky;
                ix = ox*s - p + kx;
                if (iy < 0 || ix < 0 || iy >= h || ix >= h) continue;
                wi = dw ? ((c*k + ky)*k + kx) : (((mo*n + c)*k + ky)*k + kx);
                acc += longint'(x[(iy*h + ix)*n + c]) * w[wi];
              end
          end
          o.push_back(rq(acc, qp[mo], rnd, bw));
        end
    return o;
  endfunction

  function automatic iq_t ref_pw(iq_t x, int pix, int n, int m, iq_t w, rqq_t qp, bit rnd, int bw);
    iq_t o;
    for (int px = 0; px < pix; px++)
      for (int mo = 0; mo < m; mo++) begin
        longint acc = 0;
        for (int c = 0; c < n; c++) acc += longint'(x[px*n + c]) * w[mo*n + c];
        o.push_back(rq(acc, qp[mo], rnd, bw));
      end
    return o;
  endfunction

  function automatic iq_t ref_avg(iq_t x, int pix, int c, rqp_t qp, bit rnd, int bw);
    iq_t o;
    for (int ch = 0; ch < c; ch++) begin
      longint acc = 0;
      for (int px = 0; px < pix; px++) acc += x[px*c + ch];
      o.push_back(rq(acc, qp, rnd, bw));
    end
    return o;
  endfunction

  function automatic iq_t ref_res(iq_t a, iq_t b, rqp_t qp, bit rnd, int bw);
    iq_t o;
    foreach (a[i]) o.push_back(rq(longint'(a[i]) + b[i], qp, rnd, bw));
    return o;
  endfunction

  // Random values: unsigned activations of bw bits, signed weights of bw bits.
  function automatic iq_t rand_act(int cnt, int bw);
    iq_t o;
    for (int i = 0; i < cnt; i++) o.push_back(int'($urandom_range((1 << bw) - 1, 0)));
    return o;
  endfunction
  function automatic iq_t rand_wt(int cnt, int bw);
    iq_t o;
    for (int i = 0; i < cnt; i++) o.push_back(int'($urandom_range((1 << bw) - 1, 0)) - (1 << (bw - 1)));
    return o;
  endfunction
  // Records that keep the outputs spread over the code range.
  function automatic rqq_t rand_qp(int cnt, int shift);
    rqq_t o;
    for (int i = 0; i < cnt; i++) begin
      rqp_t r;
      r.bias  = int'($urandom_range(40, 0)) - 20;
      r.mult  = int'($urandom_range(200, 20));
      r.shift = shift;
      r.zp    = int'($urandom_range(4, 0));
      o.push_back(r);
    end
    return o;
  endfunction
  function automatic logic [63:0] qp_word(rqp_t r);
    return {32'(r.bias), 16'(r.mult), 8'(r.shift), 8'(r.zp)};
  endfunction

  // Pack elements of 2^lg bits into 64-bit words.
  function automatic void pack(iq_t v, int lg, ref logic [63:0] words[$]);
    int epw;
    logic [63:0] wd;
    epw = 64 >> lg;
    words = {};
    wd = '0;
    for (int i = 0; i < v.size(); i++) begin
      wd |= (64'(v[i]) & ((lg >= 6) ? '1 : ((64'd1 << (1 << lg)) - 1))) << ((i % epw) << lg);
      if ((i % epw) == epw - 1 || i == v.size() - 1) begin
        words.push_back(wd);
        wd = '0;
      end
    end
  endfunction
endpackage
