// rinngs_model_pkg: reference model of the RiNNgs arithmetic for the testbenches.
//
// Written from the number formats alone (inputs 10 fraction bits, weights 6,
// biases 8; floor rounding; ReLU; saturation to 18 bits), with integer
// division instead of shifts, so that it does not share code with the RTL.
package rinngs_model_pkg;

  typedef longint vec_t  [64];
  typedef int     wmat_t [64][64];
  typedef int     bvec_t [64];

  function automatic longint floor_div(longint a, longint d);
    if (a >= 0) return a / d;
    return -((-a + d - 1) / d);
  endfunction

  function automatic longint activate(longint acc, int b, bit relu);
    longint t;
    t = floor_div(acc + longint'(b) * 256, 64);
    if (relu && t < 0) t = 0;
    if (t > 131071) t = 131071;
    if (t < -131072) t = -131072;
    return t;
  endfunction

  function automatic void dense(input vec_t x, input wmat_t w, input bvec_t b, input int nin,
                                input int nout, input bit relu, output vec_t y);
    for (int j = 0; j < 64; j++) y[j] = 0;
    for (int j = 0; j < nout; j++) begin
      longint acc;
      acc = 0;
      for (int i = 0; i < nin; i++) acc += x[i] * longint'(w[j][i]);
      y[j] = activate(acc, b[j], relu);
    end
  endfunction

  function automatic int argmax(vec_t s, int n);
    int best;
    best = 0;
    for (int i = 1; i < n; i++) if (s[i] > s[best]) best = i;
    return best;
  endfunction

  function automatic longint norm(int ch, bit valid);
    if (!valid) return 0;
    return (longint'(ch) * 1024) / 1952;
  endfunction

endpackage
