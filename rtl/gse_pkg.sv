// gse_pkg -- types and constants shared by the GSE-INT engine.
//
// The engine works on two number formats. BF16 (1 sign, 8 exponent and
// 7 mantissa bits, exponent bias 127) is the high-precision format at the
// edges of every matrix multiplication. GSE-INT ("group-shared exponent
// integer") is the low-precision format inside: a group of GROUP values
// shares one EXP_W-bit exponent code, and each value is a sign bit plus an
// unsigned MAN_W-bit integer mantissa with no hidden leading one. The GSE
// widths are module parameters, since packages cannot be parameterised;
// only the fixed BF16 layout and helpers live here.
package gse_pkg;

  typedef struct packed {
    logic       sign;
    logic [7:0] exp;
    logic [6:0] man;
  } bf16_t;

  localparam int unsigned BF16_BIAS = 127;
  localparam int unsigned BF16_MAN_W = 7;

  // Largest finite BF16 magnitude (exponent 254, mantissa all ones).
  localparam bf16_t BF16_MAX_POS = '{sign: 1'b0, exp: 8'hFE, man: 7'h7F};

  // Signed width of a GSE group dot product: GROUP products of two
  // MAN_W-bit magnitudes plus a sign bit.
  function automatic int unsigned dot_width(int unsigned group, int unsigned man_w);
    return 2 * man_w + $clog2(group) + 1;
  endfunction

endpackage
