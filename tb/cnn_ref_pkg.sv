// cnn_ref_pkg: reference arithmetic for the testbenches of the convolution core.
//
// It recomputes, with real-valued arithmetic and in the plain loop order of
// the pruned convolution algorithm, what the hardware should produce: which
// weights survive pruning, the bucket-midpoint code of each kept weight, and
// the ReLU/bucket activation code. Pruning is tested on the quantized value. Only the raw weight and bias values are
// taken from cnn_pkg (they play the role of the trained model); every rule
// applied to them is written again here.
package cnn_ref_pkg;

  function automatic int ref_absmax(input int unsigned n_in, input int unsigned n_out,
                                    input int unsigned kernel, input int unsigned seed);
    real m;
    m = 0.0;
    for (int unsigned o = 0; o < n_out; o++)
      for (int unsigned i = 0; i < n_in; i++)
        for (int unsigned k = 0; k < kernel; k++) begin
          real a;
          a = real'(cnn_pkg::weight_milli(i, o, k, n_in, kernel, seed));
          if (a < 0.0) a = -a;
          if (a > m) m = a;
        end
    return int'(m);
  endfunction

  // Quantized weight as a multiple of M / 2^wbits (0 if pruned).
  function automatic int ref_weight(input int unsigned i, input int unsigned o, input int unsigned k,
                                    input int unsigned n_in, input int unsigned kernel,
                                    input int unsigned wbits, input int unsigned prune_milli,
                                    input int m, input int unsigned seed);
    real w, n, step, mid;
    int  bucket;
    w = real'(cnn_pkg::weight_milli(i, o, k, n_in, kernel, seed)) / 1000.0;
    n = 2.0 ** wbits;
    step = 2.0 * (real'(m) / 1000.0) / n;
    bucket = int'($floor((w + real'(m) / 1000.0) / step + 1.0e-9));
    if (bucket > int'(n) - 1) bucket = int'(n) - 1;
    mid = -real'(m) / 1000.0 + (real'(bucket) + 0.5) * step;
    // pruning acts on the quantized value
    if ((mid < 0.0 ? -mid : mid) + 1.0e-9 < real'(prune_milli) / 1000.0) return 0;
    // express the midpoint in units of M / 2^wbits
    return int'(mid / (real'(m) / 1000.0 / n));
  endfunction

  function automatic int ref_code(input longint acc, input int unsigned abits,
                                  input int unsigned shift);
    longint v, top;
    top = (longint'(1) << abits) - 1;
    v = (acc < 0) ? 0 : acc / (longint'(1) << shift);
    return int'((v > top) ? top : v);
  endfunction

endpackage
