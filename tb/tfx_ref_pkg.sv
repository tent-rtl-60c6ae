// tfx_ref_pkg: bit-serial reference model of the TFX(n, IS, SC) format,
// written from the format definition and independent of the RTL.
//
// ref_decode walks the word bit by bit: the inverted sign opens the
// integer run, the run continues while bits equal it and stops at IS
// bits or at a terminating bit, which is skipped; the rest is the
// fraction. Values are returned scaled by 2^(n-1). ref_encode finds the
// nearest word by trying all 2^n words (ties go to the word with a zero
// LSB), which also clips values beyond the range. ref_mac works out an
// exact dot product of decoded words with the weight scaled by 2^SC.
package tfx_ref_pkg;

  // value * 2^(n-1)
  function automatic longint ref_decode(int n, int is_v, logic [15:0] code);
    logic s, i;
    int   m, pos, fs;
    longint ival, f;
    s   = code[n-1];
    i   = ~s;
    m   = 1;
    pos = n - 2;
    while (pos >= 0 && m < is_v && code[pos] == i) begin
      m++;
      pos--;
    end
    if (m < is_v && pos >= 0) pos--;   // terminating bit
    fs = pos + 1;
    f  = 0;
    for (int b = pos; b >= 0; b--) f = (f << 1) | longint'(code[b]);
    ival = i ? longint'(m - 1) : -longint'(m);
    return (ival <<< (n - 1)) + (f <<< (n - 1 - fs));
  endfunction

  // nearest word to num / 2^sh
  function automatic logic [15:0] ref_encode(int n, int is_v, longint num, int sh);
    logic [15:0] best;
    longint best_d, d, v;
    best   = '0;
    best_d = -1;
    for (int c = 0; c < (1 << n); c++) begin
      v = ref_decode(n, is_v, 16'(c));
      // compare num / 2^sh with v / 2^(n-1)
      d = (num <<< (n - 1)) - (v <<< sh);
      if (d < 0) d = -d;
      if (best_d < 0 || d < best_d || (d == best_d && c[0] == 1'b0)) begin
        best   = 16'(c);
        best_d = d;
      end
    end
    return best;
  endfunction

  // sum of a[i] * w[i] * 2^sc, scaled by 2^(2(n-1)+4)
  function automatic longint ref_scaled_product(int n, int is_a, int is_w, int sc,
                                                logic [15:0] a, logic [15:0] w);
    longint av, wv;
    av = ref_decode(n, is_a, a);
    wv = ref_decode(n, is_w, w);
    return (av * wv) <<< (4 + sc);
  endfunction

  // TFX result of an exact sum held scaled by 2^(2(n-1)+4), with ReLU
  function automatic logic [15:0] ref_result(int n, int is_o, longint sum, bit relu);
    logic [15:0] r;
    r = ref_encode(n, is_o, sum, 2 * (n - 1) + 4);
    if (relu && r[n-1]) r = '0;
    return r;
  endfunction

endpackage
