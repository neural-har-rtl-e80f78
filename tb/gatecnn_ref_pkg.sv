// gatecnn_ref_pkg: bit-exact software model of the GateCNN network used by
// the testbenches as the expected result.
//
// Tensors are dynamic arrays of longint holding Q16.16 values, laid out
// plainly as [(c*H + h)*W + w] (no channels-last, no strides), so the model
// shares no indexing with the hardware. Only the constant weight pattern
// (gatecnn_pkg::weight_value / bias_value) is taken from the design; the
// weight layout idx = ((ci*COUT + co)*KH + kh)*KW + kw is the documented
// convention of that pattern.
package gatecnn_ref_pkg;
  import gatecnn_pkg::weight_value;
  import gatecnn_pkg::bias_value;

  typedef longint vec_t[];

  function automatic longint sat32(input longint v);
    if (v > 64'sd2147483647) return 64'sd2147483647;
    if (v < -64'sd2147483648) return -64'sd2147483648;
    return v;
  endfunction

  // floor division by 2^16 of a signed value
  function automatic longint fx_floor(input longint v);
    return v >>> 16;
  endfunction

  function automatic vec_t conv(input int layer, input int cin, input int cout,
                                input int h, input int w, input int kh, input int kw,
                                input bit relu, input vec_t x);
    vec_t y = new[cout*h*w];
    for (int co = 0; co < cout; co++)
      for (int oh = 0; oh < h; oh++)
        for (int ow = 0; ow < w; ow++) begin
          longint acc = longint'(bias_value(layer, co)) * 65536;
          for (int ci = 0; ci < cin; ci++)
            for (int i = 0; i < kh; i++)
              for (int j = 0; j < kw; j++) begin
                int ih = oh + i - kh/2;
                int iw = ow + j - kw/2;
                if (ih >= 0 && ih < h && iw >= 0 && iw < w)
                  acc += longint'(weight_value(layer, ((ci*cout + co)*kh + i)*kw + j))
                         * x[(ci*h + ih)*w + iw];
              end
          acc = sat32(fx_floor(acc));
          if (relu && acc < 0) acc = 0;
          y[(co*h + oh)*w + ow] = acc;
        end
    return y;
  endfunction

  function automatic vec_t maxpool2(input int h, input int w, input vec_t x);
    vec_t y = new[(h/2)*(w/2)];
    for (int i = 0; i < h/2; i++)
      for (int j = 0; j < w/2; j++) begin
        longint m = x[(2*i)*w + 2*j];
        if (x[(2*i)*w + 2*j+1]   > m) m = x[(2*i)*w + 2*j+1];
        if (x[(2*i+1)*w + 2*j]   > m) m = x[(2*i+1)*w + 2*j];
        if (x[(2*i+1)*w + 2*j+1] > m) m = x[(2*i+1)*w + 2*j+1];
        y[i*(w/2) + j] = m;
      end
    return y;
  endfunction

  // Y = X5 * relu(Z) + X1, element by element
  function automatic vec_t gate(input vec_t x5, input vec_t z, input vec_t x1);
    vec_t y = new[x5.size()];
    for (int i = 0; i < x5.size(); i++) begin
      longint zr = (z[i] < 0) ? 0 : z[i];
      y[i] = sat32(sat32(fx_floor(x5[i] * zr)) + x1[i]);
    end
    return y;
  endfunction

  // Every intermediate tensor of one inference
  typedef struct {
    vec_t x1;     // Conv2D c0 output      [1][30][28]
    vec_t xds;    // pooled                [15][14]
    vec_t xc1;    // Doppler embedding     [12][14]
    vec_t z;      // relu(gate conv)       [12][14]
    vec_t xc2;    // content conv          [12][14]
    vec_t xc3;    // [12][12][14]
    vec_t xc4;    // [12][12][14]
    vec_t xc5;    // [12][14]
    vec_t y;      // gated + residual      [12][14]
    vec_t v;      // averaged              [14]
    vec_t logits; // [6]
  } trace_t;

  function automatic trace_t model(input vec_t x);
    trace_t t;
    t.x1     = conv(0, 1, 1, 30, 28, 3, 3, 0, x);
    t.xds    = maxpool2(30, 28, t.x1);
    t.xc1    = conv(1, 15, 12, 1, 14, 1, 1, 0, t.xds);
    t.z      = conv(2, 12, 12, 1, 14, 1, 3, 1, t.xc1);
    t.xc2    = conv(3, 12, 12, 1, 14, 1, 3, 0, t.xc1);
    t.xc3    = conv(4, 1, 12, 12, 14, 3, 3, 1, t.xc2);
    t.xc4    = conv(5, 12, 12, 12, 14, 3, 3, 1, t.xc3);
    t.xc5    = conv(6, 12, 1, 12, 14, 3, 3, 0, t.xc4);
    t.y      = gate(t.xc5, t.z, t.xc1);
    t.v      = conv(7, 12, 1, 1, 14, 1, 1, 0, t.y);
    t.logits = conv(8, 14, 6, 1, 1, 1, 1, 0, t.v);
    return t;
  endfunction

  // Random input frame, values in [0, 1) as a normalised spectrogram
  function automatic vec_t random_frame(input int n);
    vec_t x = new[n];
    foreach (x[i]) x[i] = longint'($urandom_range(0, 65535));
    return x;
  endfunction
endpackage
