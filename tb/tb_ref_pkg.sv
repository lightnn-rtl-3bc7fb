// tb_ref_pkg: reference arithmetic for the LightNN testbenches.
//
// Computes LightNN products, neuron sums and activations with ordinary
// integer multiplication and division, independently of the shift-based
// RTL. All values are integers in units of the activation LSB; products and
// sums carry 7 more fraction bits (a factor 128).
package tb_ref_pkg;

  // Weight code -> its value times 128: sign * (2^(7-m1) + ... + 2^(7-mK)).
  function automatic longint wval(int code, int k);
    longint mag = 0;
    for (int i = 0; i < k; i++) mag += longint'(1) << (7 - ((code >> (3 * i)) & 7));
    return ((code >> (3 * k)) & 1) ? -mag : mag;
  endfunction

  // Activation of an accumulator (times 128) as the RTL defines it:
  // mode 0 identity, 1 ReLU, 2 sign; floor division by 128, saturation.
  function automatic longint act_ref(longint acc, int mode, int data_w, int frac_w,
                                     output bit sat);
    longint a, r, maxv, minv;
    a = (acc >= 0) ? acc / 128 : -((-acc + 127) / 128);
    if (mode == 1)      r = (a < 0) ? 0 : a;
    else if (mode == 2) r = (a < 0) ? -(longint'(1) << frac_w) : (longint'(1) << frac_w);
    else                r = a;
    maxv = (longint'(1) << (data_w - 1)) - 1;
    minv = -(longint'(1) << (data_w - 1));
    sat = 0;
    if (r > maxv) begin r = maxv; sat = 1; end
    if (r < minv) begin r = minv; sat = 1; end
    return r;
  endfunction

  // Random weight code for a K-ones unit (unused high bits zero).
  function automatic int rand_code(int k);
    return int'($urandom_range(0, (1 << (3 * k + 1)) - 1));
  endfunction

endpackage
