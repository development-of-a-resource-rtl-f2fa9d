// tb_ref_pkg: bit-exact reference arithmetic for the network testbenches.
//
// Written from the number format alone, independently of the RTL:
// words are 16-bit Q5.10; a neuron partial sum is
//   sat16( (bias * 2^10 + sum_k x_k * w_k) >> 10 )      (arithmetic shift)
// the three partial sums of a neuron are added pairwise with 16-bit
// saturation, (pA + pB) + pC, and hidden layers apply ReLU.
// sat_count counts how often a saturation actually clipped a value.
package tb_ref_pkg;

  int sat_count = 0;

  function automatic shortint sat(input longint v);
    if (v > 32767)  begin sat_count++; return 16'sh7fff; end
    if (v < -32768) begin sat_count++; return 16'sh8000; end
    return shortint'(v);
  endfunction

  function automatic shortint add_s(input shortint a, input shortint b);
    return sat(longint'(a) + longint'(b));
  endfunction

  function automatic shortint relu_r(input shortint a);
    return (a < 0) ? shortint'(0) : a;
  endfunction

  // partial sum of one PE: n elements of x against w, with bias
  function automatic shortint partial(input shortint x[], input shortint w[],
                                      input shortint bias);
    longint acc = longint'(bias) * 1024;
    foreach (x[i]) acc += longint'(x[i]) * longint'(w[i]);
    return sat(acc >>> 10);
  endfunction

endpackage
