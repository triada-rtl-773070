// triada_ref_pkg: reference model of the 3D transform for the testbenches.
//
// Computes, in plain nested loops and independently of the RTL, the three
// stages of
//   Y[k1][k2][k3] = Y0[k1][k2][k3]
//                 + sum_{n1,n2,n3} X[n1][n2][n3] C1[n1][k1] C2[n2][k2] C3[n3][k3]
// in the device's number format: every product is (a*b) >>> FRAC and every
// value is kept to 32 bits two's complement. Stage results are rounded
// where the device rounds them (after each product), so the model matches
// the device bit for bit; sums modulo 2^32 do not depend on their order.
// mac_count gives the number of multiply-adds a device that skips every
// zero operand and zero coefficient performs for the same problem.
package triada_ref_pkg;

  localparam int MAXP = 16;

  typedef longint ten_t [MAXP][MAXP][MAXP];
  typedef longint mat_t [MAXP][MAXP];

  function automatic longint wrap32(longint v);
    return longint'(int'(v[31:0]));
  endfunction

  function automatic longint mulf(longint a, longint b, int frac);
    return wrap32((a * b) >>> frac);
  endfunction

  // Y <= Y0 + transform(X) for an n1 x n2 x n3 problem.
  function automatic void transform(ref ten_t x, ref mat_t c1, ref mat_t c2,
                                    ref mat_t c3, ref ten_t y0, ref ten_t y,
                                    input int n1, input int n2, input int n3,
                                    input int frac);
    ten_t t1, t2;
    // Stage I: sum over n3.
    for (int a = 0; a < n1; a++)
      for (int b = 0; b < n2; b++)
        for (int k = 0; k < n3; k++) begin
          t1[a][b][k] = 0;
          for (int s = 0; s < n3; s++)
            t1[a][b][k] = wrap32(t1[a][b][k] + mulf(x[a][b][s], c3[s][k], frac));
        end
    // Stage II: sum over n1.
    for (int k = 0; k < n1; k++)
      for (int b = 0; b < n2; b++)
        for (int c = 0; c < n3; c++) begin
          t2[k][b][c] = 0;
          for (int s = 0; s < n1; s++)
            t2[k][b][c] = wrap32(t2[k][b][c] + mulf(c1[s][k], t1[s][b][c], frac));
        end
    // Stage III: sum over n2.
    for (int a = 0; a < n1; a++)
      for (int k = 0; k < n2; k++)
        for (int c = 0; c < n3; c++) begin
          y[a][k][c] = y0[a][k][c];
          for (int s = 0; s < n2; s++)
            y[a][k][c] = wrap32(y[a][k][c] + mulf(t2[a][s][c], c2[s][k], frac));
        end
  endfunction

  // Number of multiply-adds a transform needs when every product with a zero
  // operand or a zero coefficient is skipped: the pairs (operand != 0,
  // coefficient != 0) summed over the three stages.
  function automatic longint mac_count(ref ten_t x, ref mat_t c1, ref mat_t c2,
                                       ref mat_t c3, input int n1, input int n2,
                                       input int n3, input int frac);
    ten_t t1, t2;
    longint n = 0;
    for (int a = 0; a < n1; a++)
      for (int b = 0; b < n2; b++)
        for (int k = 0; k < n3; k++) begin
          t1[a][b][k] = 0;
          for (int s = 0; s < n3; s++) begin
            t1[a][b][k] = wrap32(t1[a][b][k] + mulf(x[a][b][s], c3[s][k], frac));
            if (x[a][b][s] != 0 && c3[s][k] != 0) n++;
          end
        end
    for (int k = 0; k < n1; k++)
      for (int b = 0; b < n2; b++)
        for (int c = 0; c < n3; c++) begin
          t2[k][b][c] = 0;
          for (int s = 0; s < n1; s++) begin
            t2[k][b][c] = wrap32(t2[k][b][c] + mulf(c1[s][k], t1[s][b][c], frac));
            if (t1[s][b][c] != 0 && c1[s][k] != 0) n++;
          end
        end
    for (int a = 0; a < n1; a++)
      for (int k = 0; k < n2; k++)
        for (int c = 0; c < n3; c++)
          for (int s = 0; s < n2; s++)
            if (t2[a][s][c] != 0 && c2[s][k] != 0) n++;
    return n;
  endfunction

endpackage
