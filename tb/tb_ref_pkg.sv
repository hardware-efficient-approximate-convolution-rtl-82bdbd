// tb_ref_pkg: reference model of the MSB-pruned 3x3 convolution, used by the testbenches.
//
// Written independently of the RTL, in plain integer arithmetic: the MSB of a value is
// found by shifting its 64-bit magnitude right until it is zero, and a window output is
// the sum of the kept products in 64-bit arithmetic. A term is kept when both operands
// are non-zero and
//   MSB(x)+MSB(w)+T >= max   (skip_on_equal = 0)   or   > max   (skip_on_equal = 1),
// where max is taken over the terms with non-zero operands.
package tb_ref_pkg;

  function automatic int ref_msb(input logic [31:0] v);
    longint m;
    int     k;
    m = longint'($signed(v));
    if (m < 0) m = -m;
    k = 0;
    while (m > 1) begin
      m = m >> 1;
      k++;
    end
    return k;
  endfunction

  // One output window: 9 activations and 9 weights.
  function automatic void ref_window(input logic [8:0][31:0] x, input logic [8:0][31:0] w,
                                     input int thr, input bit skip_on_equal,
                                     output longint y, output logic [8:0] keep);
    int s[9];
    int mx;
    bit live[9];
    mx = 0;
    for (int t = 0; t < 9; t++) begin
      live[t] = (x[t] != 0) && (w[t] != 0);
      s[t]    = ref_msb(x[t]) + ref_msb(w[t]);
      if (live[t] && s[t] > mx) mx = s[t];
    end
    y = 0;
    for (int t = 0; t < 9; t++) begin
      keep[t] = live[t] && (skip_on_equal ? (s[t] + thr > mx) : (s[t] + thr >= mx));
      if (keep[t]) y += longint'($signed(x[t])) * longint'($signed(w[t]));
    end
  endfunction

  // Full 4x4 by 3x3 operation; y[2*i+j] has its top-left input at (i, j).
  function automatic void ref_conv(input logic [15:0][31:0] x, input logic [8:0][31:0] w,
                                   input int thr, input bit skip_on_equal,
                                   output longint y[4], output int n_mult);
    logic [8:0][31:0] wx;
    logic [8:0]       keep;
    n_mult = 0;
    for (int i = 0; i < 2; i++)
      for (int j = 0; j < 2; j++) begin
        for (int r = 0; r < 3; r++)
          for (int c = 0; c < 3; c++) wx[r*3+c] = x[(i+r)*4 + j + c];
        ref_window(wx, w, thr, skip_on_equal, y[i*2+j], keep);
        n_mult += $countones(keep);
      end
  endfunction

  // Random operand with a spread of magnitudes: zero, small, large, negative.
  function automatic logic [31:0] rand_operand(input int zero_pct);
    int unsigned sh;
    logic [31:0] v;
    if (($urandom % 100) < zero_pct) return '0;
    sh = $urandom % 16;
    v  = ($urandom % 32'hFFFF) >> sh;
    if (v == 0) v = 1;
    if ($urandom % 3 == 0) v = -v;
    return v;
  endfunction

endpackage
