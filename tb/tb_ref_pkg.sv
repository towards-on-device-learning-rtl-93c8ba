// tb_ref_pkg: reference arithmetic for the testbenches, written with the
// simulator's own double-precision `real` type, independent of the RTL
// floating-point units.
package tb_ref_pkg;
  // piecewise-linear sigmoid (PLAN segments), the activation of the RTL
  function automatic real sig_ref(input real x);
    real ax, y;
    ax = (x < 0.0) ? -x : x;
    if (ax >= 5.0)        y = 1.0;
    else if (ax < 1.0)    y = 0.25 * ax + 0.5;
    else if (ax < 2.375)  y = 0.125 * ax + 0.625;
    else                  y = 0.03125 * ax + 0.84375;
    if (x < 0.0) y = 1.0 - y;
    return y;
  endfunction

  // random double in [-span, span)
  function automatic real rnd_real(input real span);
    return (real'($urandom) / 4294967296.0 * 2.0 - 1.0) * span;
  endfunction

  // Software model of the OS-ELM arithmetic in the order the RTL uses it.
  // Matrices are flat, row-major with the run-time sizes: w[j*ni+k],
  // p[i*nh+j], eta[j*no+k].
  class oselm_ref;
    int  ni, nh, no;
    real w[], b[], p[], eta[], x[], y[], h[], yhat[];

    function new(int ni_, int nh_, int no_);
      ni = ni_; nh = nh_; no = no_;
      w = new[ni*nh]; b = new[nh]; p = new[nh*nh]; eta = new[nh*no];
      x = new[ni]; y = new[no]; h = new[nh]; yhat = new[no];
    endfunction

    function void hidden();
      real acc;
      for (int j = 0; j < nh; j++) begin
        acc = b[j];
        for (int k = 0; k < ni; k++) acc = acc + w[j*ni+k] * x[k];
        h[j] = sig_ref(acc);
      end
    endfunction

    // one training sample (x, y): P and eta updates
    function void train();
      real c[], d[], ca[], e[], ye[];
      real acc, acc2, a;
      c = new[nh]; d = new[nh]; ca = new[nh]; e = new[nh]; ye = new[no];
      hidden();
      for (int i = 0; i < nh; i++) begin
        acc = 0.0; acc2 = 0.0;
        for (int j = 0; j < nh; j++) begin
          acc  = acc  + p[i*nh+j] * h[j];
          acc2 = acc2 + h[j] * p[j*nh+i];
        end
        c[i] = acc; d[i] = acc2;
      end
      acc = 0.0;
      for (int i = 0; i < nh; i++) acc = acc + h[i] * c[i];
      a = 1.0 / (1.0 + acc);
      for (int i = 0; i < nh; i++) ca[i] = c[i] * a;
      for (int i = 0; i < nh; i++)
        for (int j = 0; j < nh; j++) p[i*nh+j] = p[i*nh+j] - ca[i] * d[j];
      for (int k = 0; k < no; k++) begin
        acc = 0.0;
        for (int j = 0; j < nh; j++) acc = acc + h[j] * eta[j*no+k];
        ye[k] = y[k] - acc;
      end
      for (int i = 0; i < nh; i++) begin
        acc = 0.0;
        for (int j = 0; j < nh; j++) acc = acc + p[i*nh+j] * h[j];
        e[i] = acc;
      end
      for (int k = 0; k < no; k++)
        for (int j = 0; j < nh; j++) eta[j*no+k] = eta[j*no+k] + e[j] * ye[k];
    endfunction

    function void infer();
      real acc;
      hidden();
      for (int k = 0; k < no; k++) begin
        acc = 0.0;
        for (int j = 0; j < nh; j++) acc = acc + h[j] * eta[j*no+k];
        yhat[k] = acc;
      end
    endfunction
  endclass
endpackage
