// pimfused_ref_pkg: reference arithmetic for the PIMfused testbenches.
//
// Element-level models of the channel's operations, written directly from
// their definitions (saturating 16-bit signed fixed point) and independent
// of the RTL: dot product, folded batch normalisation, ReLU, residual
// Add & ReLU and the max / pre-scaled average pooling step. Also a
// random-word generator with a bounded magnitude.
package pimfused_ref_pkg;
  import pimfused_pkg::*;

  function automatic longint r_sat(input longint v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  function automatic longint r_dot(input word_t a, input word_t b);
    longint s = 0;
    for (int i = 0; i < LANES; i++) s += longint'(a[i]) * longint'(b[i]);
    return s;
  endfunction

  function automatic longint r_bn(input longint acc, input longint scale, input longint bias,
                                  input int shift);
    return r_sat(((acc * scale) >>> shift) + bias);
  endfunction

  function automatic longint r_relu(input longint x);
    return (x < 0) ? 0 : x;
  endfunction

  function automatic longint r_add_relu(input longint a, input longint b);
    return r_relu(r_sat(a + b));
  endfunction

  function automatic longint r_pool(input longint old, input longint x, input bit init,
                                    input bit avg, input int shift);
    longint xs = x >>> shift;
    if (avg) return init ? xs : r_sat(old + xs);
    return (init || x > old) ? x : old;
  endfunction

  // Random word; every element in [-mag, mag].
  function automatic word_t rand_word(input int mag);
    word_t w;
    for (int i = 0; i < LANES; i++) w[i] = elem_t'(int'($urandom_range(2*mag, 0)) - mag);
    return w;
  endfunction
endpackage
