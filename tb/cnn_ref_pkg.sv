// cnn_ref_pkg: behavioural reference of the quantised network, for the
// testbenches. It works on plain integer arrays and shares nothing with the
// RTL except the layer table of cnn_pkg, so the RTL's loop order, buffering
// and packing are checked against a direct evaluation of the formulas:
//   conv:  y[co][p] = bias[co] + sum_ci sum_k w[co][ci][k] * x[ci][p+k-pad]
//   max:   m[co][j] = max(y[co][2j], y[co][2j+1])
//   GAP:   g[co]    = sum_p (y[co][p] >>> 6)
//   requant: r = (v*M + 2^31) >>> 32, ReLU layers clamp r to [0,255]
package cnn_ref_pkg;
  import cnn_pkg::*;

  function automatic int requant(int v, int m, bit relu);
    longint p, r;
    p = longint'(v) * longint'(m);
    r = (p + (64'sd1 <<< 31)) >>> 32;
    if (!relu) return int'(r);
    if (r < 0)   return 0;
    if (r > 255) return 255;
    return int'(r);
  endfunction

  // in: layer input bytes [ci*w_in + p]; wts: whole weight memory bytes;
  // bias: whole bias table. out: bytes [co*w_out + j] or logits [co].
  function automatic void ref_layer(input layer_cfg_t c, input byte unsigned in[],
                                    input byte wts[], input int bias[], input int m,
                                    output byte unsigned out[], output int logit[]);
    int y[];
    int cin, cout, k, pad, win, wout, acc, q, x, wv, mx, g, bb, wb;
    bit sg;
    cin = int'(c.cin); cout = int'(c.cout); k = int'(c.k); pad = int'(c.pad);
    win = int'(c.w_in); wout = int'(c.w_out);
    bb = int'(c.b_base); wb = int'(c.w_base); sg = c.in_signed;
    out   = new[cout * wout];
    logit = new[cout];
    y     = new[win];
    for (int co = 0; co < cout; co++) begin
      for (int p = 0; p < win; p++) begin
        acc = bias[bb + co];
        for (int ci = 0; ci < cin; ci++)
          for (int kk = 0; kk < k; kk++) begin
            q = p + kk - pad;
            if (q < 0 || q >= win) continue;
            x  = sg ? int'(signed'(in[ci*win + q])) : int'(in[ci*win + q]);
            wv = int'(wts[wb + (co*cin + ci)*k + kk]);
            acc += x * wv;
          end
        y[p] = acc;
      end
      unique case (c.pool)
        POOL_MAX: for (int j = 0; j < wout; j++) begin
          mx = (y[2*j] > y[2*j+1]) ? y[2*j] : y[2*j+1];
          out[co*wout + j] = 8'(requant(mx, m, 1'b1));
        end
        POOL_GAP: begin
          g = 0;
          for (int p = 0; p < win; p++) g += (y[p] >>> GAP_SHIFT);
          out[co] = 8'(requant(g, m, 1'b1));
        end
        default: logit[co] = requant(y[0], m, c.relu);
      endcase
    end
  endfunction

  function automatic int scale_of(int id);
    case (id)
      0: return SCALE_L0;
      1: return SCALE_L1;
      2: return SCALE_L2;
      3: return SCALE_L3;
      default: return SCALE_L4;
    endcase
  endfunction
endpackage
