// cenn_ref_pkg: reference model used by the testbenches.
//
// Computes one forward-Euler CeNN iteration on whole images with plain
// integer arithmetic, independently of the RTL:
//   x' = x + floor( (sum A*y + sum B*u + I - x) / 2^dt_shift )
// where the products are exact (coefficient 2^p, data in Q5.12, everything
// scaled by 2^5 so that p = -5 is still an integer), then x' is floored back
// to Q5.12, saturated to 18 bits, and y' = clamp(x', -1, +1). Cells outside
// the image count as zero.
package cenn_ref_pkg;
  import cenn_pkg::*;

  function automatic longint coef_val(qcoef_t c);
    longint v;
    v = c.nz ? (longint'(1) << c.e) : 0;
    return c.sgn ? -v : v;
  endfunction

  // sum_k c_k * d_k of a window, in units of 2^-(FRAC-QK)
  function automatic longint conv9(qcoef_t [NTAP-1:0] c, longint d [NTAP]);
    longint s = 0;
    for (int i = 0; i < NTAP; i++) s += coef_val(c[i]) * d[i];
    return s;
  endfunction

  function automatic data_t clamp_y(longint x);
    if (x > 4096) return 18'sd4096;
    if (x < -4096) return -18'sd4096;
    return data_t'(x);
  endfunction

  function automatic void euler_step(input tpl_t t, input int w, input int h,
                                     ref data_t u[], ref data_t x[], ref data_t y[],
                                     ref data_t xo[], ref data_t yo[]);
    longint dy [NTAP], du [NTAP];
    longint d, xw, xf;
    for (int i = 0; i < h; i++)
      for (int j = 0; j < w; j++) begin
        for (int k = -1; k <= 1; k++)
          for (int l = -1; l <= 1; l++) begin
            int idx = 3 * (k + 1) + (l + 1);
            if (i + k < 0 || i + k >= h || j + l < 0 || j + l >= w) begin
              dy[idx] = 0;
              du[idx] = 0;
            end else begin
              dy[idx] = longint'(y[(i + k) * w + j + l]);
              du[idx] = longint'(u[(i + k) * w + j + l]);
            end
          end
        d  = conv9(t.a, dy) + conv9(t.b, du) + (longint'(t.bias) * 32) - (longint'(x[i * w + j]) * 32);
        d  = d >>> t.dt_shift;
        xw = longint'(x[i * w + j]) * 32 + d;
        xf = xw >>> 5;
        if (xf > 131071) xf = 131071;
        if (xf < -131072) xf = -131072;
        xo[i * w + j] = data_t'(xf);
        yo[i * w + j] = clamp_y(xf);
      end
  endfunction

  function automatic qcoef_t rand_coef(int zero_pct);
    qcoef_t c;
    c.nz  = ($urandom_range(99) >= zero_pct);
    c.sgn = 1'($urandom_range(1));
    c.e   = QEW'($urandom_range(QM - QK));
    if (!c.nz) c = '0;
    return c;
  endfunction

  // coefficient +-2^p
  function automatic qcoef_t mk_coef(int sgn, int p);
    qcoef_t c;
    c.nz  = 1'b1;
    c.sgn = sgn[0];
    c.e   = QEW'(p - QK);
    return c;
  endfunction

endpackage
