// ref_pkg: golden reference model used by the testbenches.
//
// Plain integer arithmetic on tensors stored as dynamic arrays of int in
// depth-first order, index (y*W + x)*C + c. Weights and biases come from the
// same generator functions that fill the design's parameter memories
// (resnet_pkg::param_weight / param_bias); every other step (padding,
// strides, rounding, clipping, residual addition, pooling) is computed here
// independently of the RTL, directly from the layer definitions.
package ref_pkg;
  import resnet_pkg::param_weight;
  import resnet_pkg::param_bias;

  typedef int tensor_t[];

  function automatic int rq(longint a, int sh, bit relu);
    longint r;
    r = a;
    if (sh > 0) r = (r + (longint'(1) << (sh - 1))) >>> sh;
    if (relu && r < 0) r = 0;
    if (r > 127) r = 127;
    if (r < -128) r = -128;
    return int'(r);
  endfunction

  // 3x3 (or FHxFW) convolution, zero padding P, stride S, optional skip
  // tensor (same shape as the output) added at scale << skipsh.
  function automatic tensor_t conv(tensor_t x, int ich, int ih, int iw, int och,
                                   int fh, int fw, int s, int p, int seed,
                                   int shift, bit relu, tensor_t skip, int skipsh);
    tensor_t y;
    int oh, ow;
    oh = (ih + 2*p - fh) / s + 1;
    ow = (iw + 2*p - fw) / s + 1;
    y = new[oh*ow*och];
    for (int oy = 0; oy < oh; oy++)
      for (int ox = 0; ox < ow; ox++)
        for (int o = 0; o < och; o++) begin
          longint acc;
          acc = param_bias(seed, o);
          for (int i = 0; i < ich; i++)
            for (int qh = 0; qh < fh; qh++)
              for (int qw = 0; qw < fw; qw++) begin
                int yy, xx;
                yy = oy*s - p + qh;
                xx = ox*s - p + qw;
                if (yy >= 0 && yy < ih && xx >= 0 && xx < iw)
                  acc += longint'(x[(yy*iw + xx)*ich + i]) *
                         longint'(param_weight(seed, ((o*ich + i)*fh + qh)*fw + qw));
              end
          if (skip.size() != 0) acc += longint'(skip[(oy*ow + ox)*och + o]) << skipsh;
          y[(oy*ow + ox)*och + o] = rq(acc, shift, relu);
        end
    return y;
  endfunction

  // Pointwise stride-2 downsample (weights/biases of seed+1), no ReLU.
  function automatic tensor_t downsample(tensor_t x, int ich, int ih, int iw, int och,
                                         int seed, int shift);
    tensor_t y;
    int oh, ow;
    oh = ih / 2; ow = iw / 2;
    y = new[oh*ow*och];
    for (int oy = 0; oy < oh; oy++)
      for (int ox = 0; ox < ow; ox++)
        for (int o = 0; o < och; o++) begin
          longint acc;
          acc = param_bias(seed + 1, o);
          for (int i = 0; i < ich; i++)
            acc += longint'(x[((2*oy)*iw + 2*ox)*ich + i]) * longint'(param_weight(seed + 1, o*ich + i));
          y[(oy*ow + ox)*och + o] = rq(acc, shift, 1'b0);
        end
    return y;
  endfunction

  function automatic tensor_t avgpool(tensor_t x, int ch, int h, int w, int shift);
    tensor_t y;
    y = new[ch];
    for (int c = 0; c < ch; c++) begin
      longint acc;
      acc = 0;
      for (int i = 0; i < h*w; i++) acc += x[i*ch + c];
      y[c] = rq(acc, shift, 1'b0);
    end
    return y;
  endfunction

  // Pseudo-random test image / tensor with values in [lo, hi].
  function automatic tensor_t rand_tensor(int n, int lo, int hi);
    tensor_t t;
    t = new[n];
    foreach (t[i]) t[i] = lo + int'($urandom % (hi - lo + 1));
    return t;
  endfunction

  // Full ResNet8 as built by resnet8_top (same seeds and shifts).
  function automatic tensor_t resnet8(tensor_t img);
    tensor_t none, a0, b1, c1, b2, d2, c2, b3, d3, c3, p;
    a0 = conv(img, 3, 32, 32, 16, 3, 3, 1, 1, 1, 9, 1, none, 0);
    b1 = conv(a0, 16, 32, 32, 16, 3, 3, 1, 1, 2, 10, 1, none, 0);
    c1 = conv(b1, 16, 32, 32, 16, 3, 3, 1, 1, 3, 9, 1, a0, 3);
    b2 = conv(c1, 16, 32, 32, 32, 3, 3, 2, 1, 4, 10, 1, none, 0);
    d2 = downsample(c1, 16, 32, 32, 32, 4, 9);
    c2 = conv(b2, 32, 16, 16, 32, 3, 3, 1, 1, 6, 10, 1, d2, 3);
    b3 = conv(c2, 32, 16, 16, 64, 3, 3, 2, 1, 7, 10, 1, none, 0);
    d3 = downsample(c2, 32, 16, 16, 64, 7, 9);
    c3 = conv(b3, 64, 8, 8, 64, 3, 3, 1, 1, 9, 10, 1, d3, 3);
    p  = avgpool(c3, 64, 8, 8, 6);
    return conv(p, 64, 1, 1, 10, 1, 1, 1, 0, 10, 6, 0, none, 0);
  endfunction
endpackage
