// cnn_pkg: constants and elaboration-time functions shared by the pruned,
// quantized 1D convolution core.
//
// The core hard-codes its weights into logic. In the original flow a script
// exports the trained weights into a header that the synthesis tool reads; the
// trained weights themselves are not published, so this package stands in for
// that header. It generates a reproducible set of weights whose spread matches
// a typical trained first convolution (roughly Gaussian around zero, standard
// deviation about 0.03, range about +/-0.1), and it holds the two compression
// rules applied to them before they become hardware:
//
//   * quantization: the range [-M, M], M = max |w| over the layer, is cut into
//     2^WBITS equal buckets and each weight is replaced by the midpoint of its
//     bucket. The midpoint (2k+1-2^WBITS) * M / 2^WBITS is carried in hardware
//     as the odd integer code 2k+1-2^WBITS (WBITS+1 bits, two's complement);
//     the common factor M / 2^WBITS is left to the scaling of the output.
//   * pruning: a quantized weight is kept only if its value's magnitude is at
//     least the threshold, |code| * M / 2^WBITS >= threshold. A coarse
//     quantization therefore prunes whole buckets at once.
//
// Weights are expressed in thousandths (milli-units): 35 milli = 0.035.
// Every function here runs only at elaboration and produces constants.
package cnn_pkg;

  // Default geometry: the layer measured on the FPGA (input 64 x 35 feature
  // maps, kernel 2, output 63 x 16 feature maps), 5-bit precision and a
  // pruning threshold of 0.035.
  localparam int unsigned IN_LEN_DEF      = 64;
  localparam int unsigned IN_FM_DEF       = 35;
  localparam int unsigned KERNEL_DEF      = 2;
  localparam int unsigned OUT_FM_DEF      = 16;
  localparam int unsigned WBITS_DEF       = 5;
  localparam int unsigned DBITS_DEF       = 5;
  localparam int unsigned ABITS_DEF       = 5;
  localparam int unsigned PRUNE_MILLI_DEF = 35;
  localparam int unsigned ACT_SHIFT_DEF   = 5;
  localparam int unsigned SEED_DEF        = 32'h1D_C0DE;

  // 32-bit integer hash (xorshift-multiply finaliser).
  function automatic logic [31:0] mix32(input logic [31:0] x);
    logic [31:0] h;
    h = x;
    h = h ^ (h >> 16);
    h = h * 32'h7feb352d;
    h = h ^ (h >> 15);
    h = h * 32'h846ca68b;
    h = h ^ (h >> 16);
    return h;
  endfunction

  // Trained weight w[inFM][outFM][kerS] in milli-units, in [-104, 104]:
  // the sum of four uniform values in [-26, 26] (standard deviation ~30).
  function automatic int weight_milli(input int unsigned in_fm, input int unsigned out_fm,
                                      input int unsigned ker, input int unsigned n_in_fm,
                                      input int unsigned kernel, input int unsigned seed);
    logic [31:0] h;
    int          s;
    h = mix32(32'((out_fm * n_in_fm + in_fm) * kernel + ker) ^ mix32(32'(seed)));
    s = 0;
    for (int b = 0; b < 4; b++) s += int'((h >> (8 * b)) & 32'hff) % 53 - 26;
    return s;
  endfunction

  // Bias of an output feature map, already scaled to accumulator units
  // (the export step would do this scaling): an integer in [-128, 128].
  function automatic int bias_acc(input int unsigned out_fm, input int unsigned seed);
    logic [31:0] h;
    h = mix32(32'(out_fm) ^ mix32(32'(seed) ^ 32'hB1A5_B1A5));
    return int'(h % 257) - 128;
  endfunction

  // M = max |w| over the whole layer (the quantization range is [-M, M]).
  function automatic int weight_absmax(input int unsigned n_in_fm, input int unsigned n_out_fm,
                                       input int unsigned kernel, input int unsigned seed);
    int m, w;
    m = 1;
    for (int unsigned o = 0; o < n_out_fm; o++)
      for (int unsigned i = 0; i < n_in_fm; i++)
        for (int unsigned k = 0; k < kernel; k++) begin
          w = weight_milli(i, o, k, n_in_fm, kernel, seed);
          if (w < 0) w = -w;
          if (w > m) m = w;
        end
    return m;
  endfunction

  // Pruning rule of the layer, on a quantized weight: keep it only if
  // |code| * m / 2^wbits >= threshold (all in milli-units).
  function automatic bit weight_kept(input int code, input int m, input int unsigned wbits,
                                     input int unsigned prune_milli);
    longint a;
    a = (code < 0) ? -longint'(code) : longint'(code);
    return a * longint'(m) >= longint'(prune_milli) * (longint'(1) << wbits);
  endfunction

  // Bucket-midpoint quantization over [-m, m] into 2^wbits buckets; returns the
  // odd integer code 2k+1-2^wbits of the bucket that holds w.
  function automatic int weight_code(input int w_milli, input int m, input int unsigned wbits);
    longint n, k;
    n = longint'(1) << wbits;
    k = ((longint'(w_milli) + longint'(m)) * n) / (2 * longint'(m));
    if (k > n - 1) k = n - 1;
    if (k < 0) k = 0;
    return int'(2 * k + 1 - n);
  endfunction

  // Number of multiply-accumulates the layer still performs per output
  // position after pruning (the "calculations ratio" numerator).
  function automatic int unsigned kept_macs(input int unsigned n_in_fm, input int unsigned n_out_fm,
                                            input int unsigned kernel, input int unsigned wbits,
                                            input int unsigned prune_milli, input int unsigned seed);
    int unsigned c;
    int          m;
    c = 0;
    m = weight_absmax(n_in_fm, n_out_fm, kernel, seed);
    for (int unsigned o = 0; o < n_out_fm; o++)
      for (int unsigned i = 0; i < n_in_fm; i++)
        for (int unsigned k = 0; k < kernel; k++)
          if (weight_kept(weight_code(weight_milli(i, o, k, n_in_fm, kernel, seed), m, wbits),
                          m, wbits, prune_milli)) c++;
    return c;
  endfunction

  // Accumulator width: product of a (WBITS+1)-bit weight code and a DBITS-bit
  // input, summed over IN_FM*KERNEL terms, plus the bias.
  function automatic int unsigned acc_width(input int unsigned wbits, input int unsigned dbits,
                                            input int unsigned n_in_fm, input int unsigned kernel);
    int unsigned w;
    w = wbits + 1 + dbits + $clog2(n_in_fm * kernel);
    if (w < 9) w = 9;  // room for the bias, |bias| <= 128
    return w + 1;
  endfunction

endpackage
