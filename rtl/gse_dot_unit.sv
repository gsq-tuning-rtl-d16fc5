// gse_dot_unit -- dot product of two GSE-INT groups.
//
// Implements the GSE dot product y = 2^(eA+eB) * sum_i (-1)^(sA_i xor sB_i)
// * mA_i * mB_i. The sum is a plain integer multiply-accumulate over the
// GROUP element pairs; the shared exponents of the two groups are simply
// added, since all elements of a group carry the same exponent. No
// alignment between elements is needed, which is what makes the GSE
// datapath cheaper than a floating-point one.
//
// Interface: combinational. 'sum' is a signed integer of
// 2*MAN_W+clog2(GROUP)+1 bits, wide enough for GROUP full-scale products;
// 'exp' is the (EXP_W+1)-bit code sum eA+eB. The caller adds the two
// tensors' exponent biases when it converts back to BF16. Pipelining is
// left to the caller (gse_pe registers the outputs).
module gse_dot_unit
  import gse_pkg::*;
#(
  parameter int unsigned GROUP = 32,
  parameter int unsigned MAN_W = 5,
  parameter int unsigned EXP_W = 5,
  localparam int unsigned SUM_W = dot_width(GROUP, MAN_W)
) (
  input  logic [EXP_W-1:0]            a_exp,
  input  logic [GROUP-1:0]            a_sign,
  input  logic [GROUP-1:0][MAN_W-1:0] a_man,
  input  logic [EXP_W-1:0]            b_exp,
  input  logic [GROUP-1:0]            b_sign,
  input  logic [GROUP-1:0][MAN_W-1:0] b_man,
  output logic signed [SUM_W-1:0]     sum,
  output logic [EXP_W:0]              exp
);

  always_comb begin
    logic signed [SUM_W-1:0] prod;
    sum = '0;
    for (int i = 0; i < GROUP; i++) begin
      prod = (SUM_W'(a_man[i])) * (SUM_W'(b_man[i]));
      if (a_sign[i] ^ b_sign[i]) sum = sum - prod;
      else                       sum = sum + prod;
    end
  end

  assign exp = {1'b0, a_exp} + {1'b0, b_exp};

endmodule
