// tb_model_pkg: reference models used by the testbenches.
//
// cordic_mac() is signed-digit linear CORDIC on integers: the Z residual starts
// at b/2^(P-1) and each step k adds or subtracts X/2^k (X = a*2^(P-1)). The
// result is bit-exact with what the hardware should compute. neuron() builds a
// whole neuron on it: bias scaled by the output shift, MACs taken from input
// position J-1 down to 0, right shift and saturation to P bits.
package tb_model_pkg;

  function automatic longint cordic_mac(longint av, longint bv, longint acc, int p, int n);
    longint x, y, z, one;
    x = av * (longint'(1) <<< (p - 1));
    one = longint'(1) <<< 15;
    z = bv * (longint'(1) <<< (16 - p));
    y = acc;
    for (int k = 0; k < n; k++) begin
      if (z >= 0) begin y = y + (x >>> k); z = z - (one >>> k); end
      else        begin y = y - (x >>> k); z = z + (one >>> k); end
    end
    return y;
  endfunction

  function automatic longint sext(longint v, int p);
    longint m;
    m = v & ((longint'(1) <<< p) - 1);
    if (m >= (longint'(1) <<< (p - 1))) m = m - (longint'(1) <<< p);
    return m;
  endfunction

  function automatic longint sat(longint v, int p);
    longint hi, lo;
    hi = (longint'(1) <<< (p - 1)) - 1;
    lo = -(longint'(1) <<< (p - 1));
    if (v > hi) return hi;
    if (v < lo) return lo;
    return v;
  endfunction

  // w[j], x[j] for j = 0..J-1 are the words stored at position j.
  function automatic longint neuron(longint w[], longint x[], longint bias, int j_n,
                                    int p, int n, int shift);
    longint acc;
    acc = sext(bias, p) * (longint'(1) <<< shift);
    for (int t = 0; t < j_n; t++) begin
      acc = cordic_mac(sext(w[j_n - 1 - t], p), sext(x[j_n - 1 - t], p), acc, p, n);
    end
    return sat(acc >>> shift, p);
  endfunction

  function automatic int prec_bits(int code);
    return (code == 0) ? 4 : (code == 1) ? 8 : 16;
  endfunction

endpackage
