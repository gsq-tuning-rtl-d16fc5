// gse_quantizer -- converts one group of BF16 values into GSE-INT.
//
// Follows the FP-to-GSE transform of the GSQ-Tuning method: find the
// largest exponent in the group, make it the group's shared exponent, and
// right-shift every element's significand (hidden one restored) by its
// exponent distance to that maximum, keeping MAN_W integer bits. The
// element with the largest exponent keeps its leading one in bit MAN_W-1.
//
// Choices of this design, where the method leaves the detail open:
//  * Shifting rounds to nearest, ties away from zero on the magnitude; a
//    rounding carry out of MAN_W bits saturates to 2^MAN_W-1 (flagged on
//    'sat').
//  * The exponent bias is a tensor-level input: code e stands for BF16
//    exponent exp_base+e, so the LSB of a mantissa weighs
//    2^(exp_base + e - 127 - (MAN_W-1)). A group whose largest exponent is
//    above exp_base+2^EXP_W-1 is clamped to the top code and its mantissas
//    saturate ('sat'); one below exp_base is clamped to code 0 and loses
//    low bits, possibly to zero ('uflow').
//  * BF16 subnormals (exponent field 0) have no hidden one: they enter as
//    0.m with exponent 1, so the implicit bit is added only where it
//    exists. Inf and NaN get no special treatment.
//  * Negative zero is not produced: a zero mantissa always has sign 0.
//
// Interface: purely combinational, GROUP values in, one shared exponent
// code plus GROUP sign/mantissa pairs out. MAN_W may be 2..8 (GSE-INT3 to
// GSE-INT9); the defaults are the GSE-INT6 configuration with 32-value
// groups and a 5-bit shared exponent.
module gse_quantizer
  import gse_pkg::*;
#(
  parameter int unsigned GROUP = 32,
  parameter int unsigned MAN_W = 5,
  parameter int unsigned EXP_W = 5
) (
  input  bf16_t [GROUP-1:0]             x,
  input  logic  [7:0]                   exp_base,
  output logic  [EXP_W-1:0]             q_exp,
  output logic  [GROUP-1:0]             q_sign,
  output logic  [GROUP-1:0][MAN_W-1:0]  q_man,
  output logic                          sat,
  output logic                          uflow
);

  localparam int MAN_MAX = (1 << MAN_W) - 1;
  localparam int EXP_SPAN = (1 << EXP_W) - 1;

  logic [7:0] emax;
  int         eeff;

  // Exponent an element is aligned by: subnormals count as exponent 1,
  // zeros as 0 so that they never set the group's exponent.
  function automatic logic [7:0] elem_exp(bf16_t v);
    if (v.exp != 8'd0)      return v.exp;
    else if (v.man != '0)   return 8'd1;
    else                    return 8'd0;
  endfunction

  // Largest exponent in the group.
  always_comb begin
    emax = '0;
    for (int i = 0; i < GROUP; i++) begin
      if (elem_exp(x[i]) > emax) emax = elem_exp(x[i]);
    end
  end

  // Clamp it into the range the EXP_W-bit code can express.
  always_comb begin
    eeff  = int'(emax);
    uflow = 1'b0;
    if (eeff < int'(exp_base)) begin
      eeff  = int'(exp_base);
      uflow = (emax != 8'd0);
    end else if (eeff > int'(exp_base) + EXP_SPAN) begin
      eeff = int'(exp_base) + EXP_SPAN;
    end
    q_exp = EXP_W'(eeff - int'(exp_base));
  end

  // Align and round every element to the shared exponent.
  always_comb begin
    int   sh;
    int   sig;
    int   m;
    sat = 1'b0;
    for (int i = 0; i < GROUP; i++) begin
      sig = int'({x[i].exp != 8'd0, x[i].man});
      // Right shift that puts the LSB at weight 2^(eeff-127-(MAN_W-1)).
      sh  = eeff - int'(elem_exp(x[i])) + (BF16_MAN_W + 1) - int'(MAN_W);
      if (sig == 0) begin
        m = 0;
      end else if (sh < 0) begin
        m = MAN_MAX + 1;              // larger than the code can hold
      end else if (sh == 0) begin
        m = sig;
      end else if (sh > BF16_MAN_W + 2) begin
        m = 0;                        // below half an LSB
      end else begin
        m = (sig + (1 << (sh - 1))) >> sh;
      end
      if (m > MAN_MAX) begin
        m   = MAN_MAX;
        sat = 1'b1;
      end
      q_man[i]  = MAN_W'(m);
      q_sign[i] = x[i].sign && (m != 0);
    end
  end

  initial begin
    assert (MAN_W >= 2 && MAN_W <= 8)
      else $error("gse_quantizer: MAN_W must be 2..8");
  end

endmodule
