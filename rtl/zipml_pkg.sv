// zipml_pkg: constants and small helper functions shared by the quantized
// SGD pipeline.
//
// The pipeline reads 64-byte cache lines. Each feature of a sample is stored
// as two independent stochastic quantizations Q'(a) and Q''(a) of QBITS bits
// each, so a line carries 256/QBITS features (K = 128, 64, 32 for QBITS = 2,
// 4, 8). With QBITS = 1 a line carries 256 features and is split into two
// halves of K = 128 features. These lane counts are the ones printed in the
// pipeline figures of the design; the packing of the two samples into one
// 2*QBITS-bit field per feature is this design's own choice.
//
// A QBITS-bit code c stands for the quantization level (2c - s)/s on [-1, 1],
// with s = 2^QBITS - 1, i.e. the s+1 evenly spaced separators -1 = l_0 < ...
// < l_s = 1. The hardware works on the odd integer 2c - s; the common factor
// 1/s (and any data scale) is folded into the step size by the host.
package zipml_pkg;

  localparam int LINE_BITS       = 512;  // one 64B cache line
  localparam int LABEL_BITS      = 32;   // one label b, signed fixed point
  localparam int LABELS_PER_LINE = LINE_BITS / LABEL_BITS;  // 16
  localparam int SHIFT_W         = 6;    // width of the step-size shift

  // Features handled per pipeline pass (lanes of the datapath).
  function automatic int lanes_for(input int qbits);
    return (qbits == 1) ? 128 : 256 / qbits;
  endfunction

  // Pipeline passes ("groups") per 64B feature line.
  function automatic int groups_per_line(input int qbits);
    return (qbits == 1) ? 2 : 1;
  endfunction

  // Decode a QBITS-bit code into the signed odd integer 2c - (2^QBITS - 1).
  // The result fits in QBITS+1 bits; it is returned sign-extended to 10 bits.
  function automatic logic signed [9:0] decode_level(input logic [7:0] code,
                                                     input int qbits);
    int c;
    int s;
    c = int'(code);
    s = (1 << qbits) - 1;
    return 10'(2 * c - s);
  endfunction

endpackage
