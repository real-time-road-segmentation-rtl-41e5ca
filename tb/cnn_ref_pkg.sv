// cnn_ref_pkg: reference model of the road-segmentation network for the
// testbenches, written directly from the layer definition (5x5 cross-
// correlation, stride 1, zero padding 2, Q8.8 rescale with saturation, ReLU)
// with no knowledge of the hardware's scan order, buffers or pipelines.
//
// Maps are flat int arrays indexed (ch*H + r)*W + c. Weights use the weight
// port's layout: flat index ((entry*NCH + ch)*NW + f*25 + ky*5 + kx) with
// entry = layer*(NCH/2) + o/2, f = o%2, for output map o and input channel ch.
package cnn_ref_pkg;
  localparam int K = 5, PAD = 2, NW = 50;

  int n_relu_clamped;  // outputs that ReLU set to zero
  int n_saturated;     // outputs clipped to the 16-bit range

  function automatic int requant(longint s, bit relu);
    longint q;
    q = s >>> 8;
    if (q > 32767)  begin q = 32767;  n_saturated++; end
    if (q < -32768) begin q = -32768; n_saturated++; end
    if (relu && q < 0) begin q = 0; n_relu_clamped++; end
    return int'(q);
  endfunction

  // One layer: nin input maps -> nout output maps.
  task automatic conv_layer(input int W, input int H, input int NCH, input int layer,
                            input int nin, input int nout, input bit relu,
                            ref int in_m [], ref int wts [], ref int out_m []);
    longint acc [];
    acc = new [W*H];
    out_m = new [nout*W*H];
    for (int o = 0; o < nout; o++) begin
      for (int p = 0; p < W*H; p++) acc[p] = 0;
      for (int i = 0; i < nin; i++)
        for (int ky = 0; ky < K; ky++)
          for (int kx = 0; kx < K; kx++) begin
            longint w;
            int dy, dx, r0, r1, c0, c1;
            w = longint'(wts[(((layer*(NCH/2) + o/2)*NCH + i)*NW) + (o%2)*25 + ky*K + kx]);
            if (w == 0) continue;
            dy = ky - PAD; dx = kx - PAD;
            r0 = (dy < 0) ? -dy : 0; r1 = (dy > 0) ? H - dy : H;
            c0 = (dx < 0) ? -dx : 0; c1 = (dx > 0) ? W - dx : W;
            for (int r = r0; r < r1; r++) begin
              int ib, ob;
              ib = (i*H + r + dy)*W + dx;
              ob = r*W;
              for (int c = c0; c < c1; c++) acc[ob + c] += w * longint'(in_m[ib + c]);
            end
          end
      for (int p = 0; p < W*H; p++) out_m[o*W*H + p] = requant(acc[p], relu);
    end
  endtask

  // The whole network.
  task automatic network(input int W, input int H, input int NCH, input int IN_CH,
                         input int OUT_CH, input int NLAYERS,
                         ref int in_m [], ref int wts [], ref int score []);
    int a [], b [];
    a = in_m;
    for (int l = 0; l < NLAYERS; l++) begin
      int nin, nout;
      nin  = (l == 0) ? IN_CH : NCH;
      nout = (l == NLAYERS-1) ? OUT_CH : NCH;
      conv_layer(W, H, NCH, l, nin, nout, l != NLAYERS-1, a, wts, b);
      a = b;
    end
    score = a;
  endtask
endpackage
