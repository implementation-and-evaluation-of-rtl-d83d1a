// tb_ref_pkg: reference models of the lane's integer instructions, written
// from their definitions with plain integer arithmetic.
package tb_ref_pkg;
  import imax_pkg::*;

  function automatic int el(word_t w, int l, int k);   // int8 element k of lane l
    return int'($signed(w[32*l + 16*k +: 8]));
  endfunction

  function automatic int wrap24(longint s);
    return int'(((s + 64'sd8388608) % 64'sd16777216 + 64'sd16777216) % 64'sd16777216 - 64'sd8388608);
  endfunction

  function automatic word_t sml8_ref(word_t a, word_t b);
    word_t y;
    for (int l = 0; l < 2; l++)
      y[32*l +: 32] = 32'(el(a, l, 0) * el(b, l, 0) + el(a, l, 1) * el(b, l, 1));
    return y;
  endfunction

  function automatic word_t ad24_ref(word_t a, word_t b);
    word_t y;
    for (int l = 0; l < 2; l++)
      y[32*l +: 32] = 32'(wrap24(longint'($signed(a[32*l +: 24])) + longint'($signed(b[32*l +: 24]))));
    return y;
  endfunction

  function automatic word_t cvt53_ref(word_t a, word_t b);
    word_t y;
    for (int l = 0; l < 2; l++) begin
      int q0, q1, s;
      q0 = int'($signed(b[32*l +: 3]));
      q1 = int'($signed(b[32*l + 16 +: 3]));
      s  = int'($signed(b[32*l + 8 +: 5]));
      y[32*l +: 32] = 32'(wrap24(longint'(s * (el(a, l, 0) * q0 + el(a, l, 1) * q1))));
    end
    return y;
  endfunction
endpackage
