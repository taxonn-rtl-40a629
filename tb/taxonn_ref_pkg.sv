// taxonn_ref_pkg: reference model used by the testbenches.
// Plain integer arithmetic, written independently of the RTL, that predicts
// what the accelerator computes: truncating, saturating fixed-point multiply,
// the piecewise-linear sigmoid with its derivative identities, format
// conversion, and a whole network (forward pass, loss, back-propagation of G
// and the -alpha G X weight update) in the same order of operations.
package taxonn_ref_pkg;

  function automatic longint sat(longint v, int w);
    longint mx = (longint'(1) <<< (w - 1)) - 1;
    longint mn = -(longint'(1) <<< (w - 1));
    return (v > mx) ? mx : (v < mn) ? mn : v;
  endfunction

  // two's complement wrap to w bits
  function automatic longint wrap(longint v, int w);
    longint m = (longint'(1) <<< w);
    longint r = v & (m - 1);
    return (r >= (m >>> 1)) ? r - m : r;
  endfunction

  function automatic longint sext(longint v, int w);
    return wrap(v, w);
  endfunction

  function automatic longint mulq(longint a, longint b, int f, int w);
    return sat((a * b) >>> f, w);
  endfunction

  function automatic longint resize(longint a, int fi, int fo, int wo);
    longint t = (fo >= fi) ? (a <<< (fo - fi)) : (a >>> (fi - fo));
    return sat(t, wo);
  endfunction

  // sigmoid, piecewise linear, on a value with f fraction bits
  function automatic longint plan(longint v, int f);
    longint one = longint'(1) <<< f;
    longint m = (v < 0) ? -v : v;
    longint s;
    if (m >= 5 * one)                     s = one;
    else if (m * 8 >= 19 * one)           s = (m >>> 5) + ((27 * one) >>> 5);
    else if (m >= one)                    s = (m >>> 3) + ((5 * one) >>> 3);
    else                                  s = (m >>> 2) + (one >>> 1);
    return (v < 0) ? one - s : s;
  endfunction

  // act: 0 relu, 1 sigmoid, 2 tanh
  function automatic void act(longint x, int sel, int f, int w, output longint y, output longint dy);
    longint one = longint'(1) <<< f;
    longint s;
    case (sel)
      0: begin y = (x < 0) ? 0 : x; dy = (x > 0) ? one : 0; end
      1: begin s = plan(x, f); y = s; dy = mulq(s, one - s, f, w); end
      default: begin
        s = plan(2 * x, f);
        y = 2 * s - one;
        dy = wrap(mulq(s, one - s, f, w) <<< 2, w);
      end
    endcase
  endfunction

  localparam int GUARD = 8;

  // Whole-network model. Layer l: n[l] inputs, n[l+1] neurons, format
  // (ib[l], fb[l]) with one sign bit.
  class ref_net;
    int nl;
    int n[];
    int ib[], fb[], sel[];
    longint alpha[];
    longint w[][][];      // w[l][j][k]
    longint x[][];        // layer inputs, x[l][k]
    longint y[][];        // layer outputs
    longint fp[][];       // F'
    longint g[][];        // G per layer
    longint e[];          // loss error

    function new(int nl_, int n_[], int ib_[], int fb_[], int sel_[]);
      nl = nl_; n = n_; ib = ib_; fb = fb_; sel = sel_;
      alpha = new[nl];
      w = new[nl]; x = new[nl]; y = new[nl]; fp = new[nl]; g = new[nl];
      for (int l = 0; l < nl; l++) begin
        w[l] = new[n[l+1]];
        foreach (w[l][j]) w[l][j] = new[n[l]];
        x[l] = new[n[l]]; y[l] = new[n[l+1]]; fp[l] = new[n[l+1]]; g[l] = new[n[l+1]];
      end
      e = new[n[nl]];
    endfunction

    function int wd(int l); return 1 + ib[l] + fb[l]; endfunction

    function void forward(longint in[]);
      for (int k = 0; k < n[0]; k++) x[0][k] = in[k];
      for (int l = 0; l < nl; l++) begin
        int wl = wd(l);
        for (int j = 0; j < n[l+1]; j++) begin
          longint acc = 0;
          for (int k = 0; k < n[l]; k++)
            acc = wrap(acc + mulq(x[l][k], w[l][j][k], fb[l], wl), wl + GUARD);
          act(sat(acc, wl), sel[l], fb[l], wl, y[l][j], fp[l][j]);
        end
        if (l < nl - 1)
          for (int j = 0; j < n[l+1]; j++) x[l+1][j] = resize(y[l][j], fb[l], fb[l+1], wd(l+1));
      end
    endfunction

    function void backward(longint t[]);
      longint wold[][][];
      wold = new[nl];
      for (int l = 0; l < nl; l++) begin
        wold[l] = new[n[l+1]];
        foreach (wold[l][j]) wold[l][j] = w[l][j];
      end
      for (int m = 0; m < n[nl]; m++) e[m] = sat(y[nl-1][m] - t[m], wd(nl-1));
      for (int l = nl - 1; l >= 0; l--) begin
        int wl = wd(l);
        for (int j = 0; j < n[l+1]; j++) begin
          longint r1 = 0;
          if (l == nl - 1) r1 = mulq(e[j], longint'(1) <<< fb[l], fb[l], wl);
          else
            for (int m = 0; m < n[l+2]; m++)
              r1 = wrap(r1 + mulq(resize(g[l+1][m], fb[l+1], fb[l], wl),
                                  resize(wold[l+1][m][j], fb[l+1], fb[l], wl), fb[l], wl), wl + GUARD);
          g[l][j] = mulq(sat(r1, wl), fp[l][j], fb[l], wl);
          for (int k = 0; k < n[l]; k++) begin
            longint gx = mulq(x[l][k], g[l][j], fb[l], wl);
            longint d  = mulq(alpha[l], gx, fb[l], wl);
            w[l][j][k] = sat(w[l][j][k] + d, wl);
          end
        end
      end
    endfunction
  endclass

endpackage
