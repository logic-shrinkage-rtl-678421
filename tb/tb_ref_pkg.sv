// tb_ref_pkg -- reference model of a logic-shrunk LUT, written independently
// of the RTL for the testbenches.
//
// The trained (pre-shrinkage) mask parameters, the wiring and the thresholds
// are taken from ls_pkg, since they stand for training results. Everything
// the method derives from them is recomputed here in its textbook form:
// salience as a sum of |differences| over the 2^(K-1) pairs that differ in
// one input, and the output of the shrunk LUT for an input vector as the sign
// of the mean of all mask entries that agree with that vector on the inputs
// still connected (the value the product of the U_i matrices puts there).
package tb_ref_pkg;

  // Mask parameter of entry e; entry index bit i = input i+1 (1 = +1).
  function automatic int ref_param(input int unsigned seed, input int unsigned ch,
                                   input int unsigned n, input int unsigned e);
    return ls_pkg::mask_param(seed, ch, n, e);
  endfunction

  function automatic int unsigned ref_salience(input int unsigned seed, input int unsigned ch,
                                               input int unsigned n, input int unsigned k,
                                               input int unsigned i);
    int unsigned s;
    int a, b;
    s = 0;
    for (int unsigned e = 0; e < (1 << k); e++) begin
      if (e[i] == 1'b1) begin
        a = ref_param(seed, ch, n, e);
        b = ref_param(seed, ch, n, e - (1 << i));
        s += (a > b) ? int'(a - b) : int'(b - a);
      end
    end
    return s;
  endfunction

  // Severed-input mask (bit i = input i+1 severed).
  function automatic int unsigned ref_prune(input int unsigned seed, input int unsigned ch,
                                            input int unsigned n, input int unsigned k,
                                            input int unsigned thr);
    int unsigned p;
    p = 0;
    for (int unsigned i = 0; i < k; i++)
      if (ref_salience(seed, ch, n, k, i) < thr) p |= (1 << i);
    return p;
  endfunction

  // Output (1 = +1) of the shrunk LUT for input index x.
  function automatic bit ref_lut(input int unsigned seed, input int unsigned ch,
                                 input int unsigned n, input int unsigned k,
                                 input int unsigned thr, input int unsigned x);
    int unsigned p;
    longint sum;
    p = ref_prune(seed, ch, n, k, thr);
    sum = 0;
    for (int unsigned f = 0; f < (1 << k); f++) begin
      if ((f & ~p) == (x & ~p)) begin
        sum += longint'(ref_param(seed, ch, n, f));
      end
    end
    // mean >= 0  <=>  sum >= 0
    return (sum >= 0);
  endfunction

endpackage
