// protea_ref_pkg: golden model of one run of the encoder accelerator, for the
// testbenches. It reads the same memory image as the hardware (X and the
// per-layer parameter blocks, laid out as in protea_pkg) and computes every
// stage with plain integer arithmetic following the fixed-point rules the
// design documents: requantisation by >>> FRAC with saturation, scores
// (Q.K)/d_model saturated to 16 bits, the table-based softmax with 7-bit
// probabilities, S x V >>> 7, ReLU after the second linear layer, and layer
// normalisation with a truncating mean, a floor square root (found here by
// search, not by the hardware's digit recurrence) and truncating division.
// Arrays are flat: element (i, c) of an sl x n matrix is at i*n + c.
package protea_ref_pkg;

  function automatic int sat(int v, int lo, int hi);
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  function automatic int rq(longint a);
    return sat(int'(a >>> 4), -128, 127);
  endfunction

  function automatic int sb(logic [7:0] b);
    return int'($signed(b));
  endfunction

  // y = x * W^T, W stored [out][in] at byte address wa
  function automatic void linear(ref logic [7:0] mem [], input int wa, ref int x [], input int sl,
                                 input int nin, input int nout, input bit relu, ref int y []);
    y = new[sl * nout];
    for (int i = 0; i < sl; i++)
      for (int o = 0; o < nout; o++) begin
        longint s = 0;
        for (int j = 0; j < nin; j++) s += longint'(x[i*nin + j] * sb(mem[wa + o*nin + j]));
        y[i*nout + o] = rq(s);
        if (relu && y[i*nout + o] < 0) y[i*nout + o] = 0;
      end
  endfunction

  function automatic int isqrt(longint v);
    int r = 0;
    while (longint'(r + 1) * longint'(r + 1) <= v) r++;
    return r;
  endfunction

  function automatic void lnorm(ref logic [7:0] mem [], input int ga, ref int x [], ref int r [],
                                input int sl, input int d, ref int y []);
    y = new[sl * d];
    for (int i = 0; i < sl; i++) begin
      int sum = 0, mean, sd;
      longint sq = 0;
      for (int c = 0; c < d; c++) sum += x[i*d + c] + r[i*d + c];
      mean = sum / d;
      for (int c = 0; c < d; c++) begin
        int dv = x[i*d + c] + r[i*d + c] - mean;
        sq += longint'(dv * dv);
      end
      sd = isqrt(sq / d);
      if (sd == 0) sd = 1;
      for (int c = 0; c < d; c++) begin
        int dv = x[i*d + c] + r[i*d + c] - mean;
        int nrm = (dv * 16) / sd;
        int sc = (nrm * sb(mem[ga + c])) >>> 4;
        y[i*d + c] = sat(sc + sb(mem[ga + d + c]), -128, 127);
      end
    end
  endfunction

  function automatic int pow2f(int f);
    int t [16] = '{65535, 62757, 60097, 57549, 55109, 52773, 50535, 48393,
                   46341, 44376, 42495, 40693, 38968, 37316, 35734, 34219};
    return t[f];
  endfunction

  // One full run: returns the last layer's output (sl x d) in y.
  function automatic void encoder(ref logic [7:0] mem [], input int xa, input int wa0,
                                  input int sl, input int d, input int h, input int nl, ref int y []);
    int x [], q [], k [], v [], a [], f1 [], l1 [], f2 [], f3 [];
    int dk = d / h;
    int lb = 3*d*d + 3*d + d*d + 2*d + 8*d*d + 2*d;
    x = new[sl * d];
    for (int i = 0; i < sl*d; i++) x[i] = sb(mem[xa + i]);
    for (int l = 0; l < nl; l++) begin
      int wa = wa0 + l * lb;
      int ob = wa + 3*d*d;
      q = new[sl*d]; k = new[sl*d]; v = new[sl*d]; a = new[sl*d];
      for (int i = 0; i < sl; i++)
        for (int c = 0; c < d; c++) begin
          longint s0 = 0, s1 = 0, s2 = 0;
          for (int j = 0; j < d; j++) begin
            s0 += longint'(x[i*d + j] * sb(mem[wa + 0*d*d + c*d + j]));
            s1 += longint'(x[i*d + j] * sb(mem[wa + 1*d*d + c*d + j]));
            s2 += longint'(x[i*d + j] * sb(mem[wa + 2*d*d + c*d + j]));
          end
          q[i*d + c] = rq(s0 + 16 * sb(mem[ob + 0*d + c]));
          k[i*d + c] = rq(s1 + 16 * sb(mem[ob + 1*d + c]));
          v[i*d + c] = rq(s2 + 16 * sb(mem[ob + 2*d + c]));
        end
      for (int hh = 0; hh < h; hh++)
        for (int i = 0; i < sl; i++) begin
          int s [] = new[sl];
          int e [] = new[sl];
          int p [] = new[sl];
          int mx = -32768, sum = 0;
          for (int j = 0; j < sl; j++) begin
            int dot = 0;
            for (int kk = 0; kk < dk; kk++) dot += q[i*d + hh*dk + kk] * k[j*d + hh*dk + kk];
            s[j] = sat(dot / d, -32768, 32767);
            if (s[j] > mx) mx = s[j];
          end
          for (int j = 0; j < sl; j++) begin
            int t = (mx - s[j]) * 369;
            e[j] = ((t >> 16) >= 16) ? 0 : (pow2f((t >> 12) & 15) >> (t >> 16));
            sum += e[j];
          end
          for (int j = 0; j < sl; j++) p[j] = sat((e[j] * 128) / sum, 0, 127);
          for (int jj = 0; jj < dk; jj++) begin
            int acc = 0;
            for (int kk = 0; kk < sl; kk++) acc += p[kk] * v[kk*d + hh*dk + jj];
            a[i*d + hh*dk + jj] = sat(acc >>> 7, -128, 127);
          end
        end
      linear(mem, wa + 3*d*d + 3*d, a, sl, d, d, 1'b0, f1);
      lnorm(mem, wa + 4*d*d + 3*d, f1, x, sl, d, l1);
      linear(mem, wa + 4*d*d + 5*d, l1, sl, d, 4*d, 1'b1, f2);
      linear(mem, wa + 8*d*d + 5*d, f2, sl, 4*d, d, 1'b0, f3);
      lnorm(mem, wa + 12*d*d + 5*d, f3, l1, sl, d, x);
    end
    y = x;
  endfunction
endpackage
