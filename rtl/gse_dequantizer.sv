// gse_dequantizer -- converts an integer MatMul result back to BF16.
//
// The last step of the quantize-compute-dequantize flow: the INT32 result
// of a PE, acc * 2^exp, becomes a BF16 number. The magnitude is
// normalised with a leading-one search, the seven bits after the leading
// one form the BF16 mantissa, and the bits below are rounded to nearest,
// ties to even. These details, and the range handling, are this design's
// choice: results above the BF16 range become the largest finite BF16
// value of the same sign, results below the normal range become zero.
//
// Interface: combinational. 'exp' is the unbiased power of two of the
// integer's LSB, a signed 12-bit value; the caller forms it from the PE's
// exponent code and the two operand tensors' exponent biases.
module gse_dequantizer
  import gse_pkg::*;
#(
  parameter int unsigned ACC_W = 32
) (
  input  logic signed [ACC_W-1:0] acc,
  input  logic signed [11:0]      exp,
  output bf16_t                   y
);

  always_comb begin
    logic [ACC_W-1:0] mag, norm;
    logic [6:0]       man;
    logic [7:0]       man_r;
    logic             guard, sticky, lsb;
    int               lead, be;

    mag  = acc[ACC_W-1] ? ACC_W'(-acc) : ACC_W'(acc);
    lead = 0;
    for (int i = 0; i < ACC_W; i++) begin
      if (mag[i]) lead = i;
    end
    norm   = mag << (ACC_W - 1 - lead);
    man    = norm[ACC_W-2 -: 7];
    guard  = norm[ACC_W-9];
    sticky = |norm[ACC_W-10:0];
    lsb    = man[0];
    man_r  = {1'b0, man} + 8'(guard && (sticky || lsb));
    be     = lead + int'(exp) + int'(BF16_BIAS) + int'(man_r[7]);

    y.sign = acc[ACC_W-1];
    y.man  = man_r[6:0];
    y.exp  = 8'(be);
    if (mag == '0 || be <= 0) begin
      y = '0;
    end else if (be >= 255) begin
      y = BF16_MAX_POS;
      y.sign = acc[ACC_W-1];
    end
  end

endmodule
