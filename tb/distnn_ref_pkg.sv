// distnn_ref_pkg -- plain integer reference model of the node's arithmetic,
// used by the testbenches to work out expected values independently of the
// RTL.
//
// mac_ref: sign-magnitude weight (bit 9 sign, bits 8..0 magnitude in 1/256)
// times an unsigned 8-bit feature, magnitude rounded down, sign applied.
// layer_ref: stride-2 convolution with k/2 zero padding, per-window exact sum,
// input channels added in order with clipping to the signed 16-bit range,
// 2x2 max pooling, then ReLU and clipping to 0..255.
package distnn_ref_pkg;

  function automatic int mac_ref(int w10, int in8);
    int mag, r;
    mag = w10 % 512;
    r   = (mag * in8) / 256;
    return (w10 >= 512) ? -r : r;
  endfunction

  function automatic int sat16(int v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  function automatic int act8(int v);
    if (v < 0)   return 0;
    if (v > 255) return 255;
    return v;
  endfunction

  // in:  (c*in_dim + y)*in_dim + x, c < n_c
  // w:   ((f*n_c + c)*k + ky)*k + kx, starting at w_off
  // out: (f*p + y)*p + x with p = in_dim/4
  // stats[0]: saturating channel additions, [1]: outputs clipped to 0,
  // [2]: outputs clipped to 255
  task automatic layer_ref(input int in_dim, input int n_c, input int k,
                           input int nf, input int w_off,
                           ref int fin[], ref int wts[], ref int fout[],
                           ref int stats[3]);
    int od, p, pad, acc, win, best, iy, ix, v;
    od  = in_dim / 2;
    p   = od / 2;
    pad = k / 2;
    fout = new[nf * p * p];
    for (int f = 0; f < nf; f++)
      for (int py = 0; py < p; py++)
        for (int px = 0; px < p; px++) begin
          best = 0;
          for (int q = 0; q < 4; q++) begin
            int oy, ox;
            oy  = 2 * py + q / 2;
            ox  = 2 * px + q % 2;
            acc = 0;
            for (int c = 0; c < n_c; c++) begin
              win = 0;
              for (int ky = 0; ky < k; ky++)
                for (int kx = 0; kx < k; kx++) begin
                  iy = 2 * oy + ky - pad;
                  ix = 2 * ox + kx - pad;
                  if (iy >= 0 && iy < in_dim && ix >= 0 && ix < in_dim)
                    win += mac_ref(wts[w_off + ((f * n_c + c) * k + ky) * k + kx],
                                   fin[(c * in_dim + iy) * in_dim + ix]);
                end
              if (c > 0 && sat16(acc + win) != acc + win) stats[0]++;
              acc = sat16(acc + win);
            end
            if (q == 0 || acc > best) best = acc;
          end
          v = act8(best);
          if (best < 0)   stats[1]++;
          if (best > 255) stats[2]++;
          fout[(f * p + py) * p + px] = v;
        end
  endtask

endpackage
