// gse_pe -- one processing element: GSE group dot product plus an INT32
// accumulator along the reduction dimension.
//
// A matrix product in GSE splits the reduction dimension into groups of
// GROUP elements, each with its own shared exponent. The PE takes one
// row-operand group and one column-operand group per cycle, forms their
// dot product (gse_dot_unit) and adds it into a signed ACC_W-bit
// accumulator that carries an exponent code of its own, so the result is
// an integer and a power of two, as the INT32 MatMul output of the method.
//
// How two partial sums with different exponents meet in one integer
// register is this design's choice, not the method's: the operand with the
// smaller exponent is arithmetically shifted right (truncated) by the
// exponent difference and the larger exponent is kept. A zero partial sum
// leaves the accumulator untouched and a zero accumulator takes the new
// exponent, so zeros never cost precision. Additions saturate at the
// ACC_W-bit limits.
//
// Timing: stage 1 registers the dot product, stage 2 accumulates. The
// group flagged in_last completes a reduction; its result appears on
// res_acc/res_exp two clock edges after the group was presented, with a
// one-cycle res_valid pulse, and is held until the next reduction ends.
// The group flagged in_first restarts the accumulator, so reductions run
// back to back with no idle cycle. All registers advance only while 'en'
// is high (a global stall).
module gse_pe
  import gse_pkg::*;
#(
  parameter int unsigned GROUP = 32,
  parameter int unsigned MAN_W = 5,
  parameter int unsigned EXP_W = 5,
  parameter int unsigned ACC_W = 32
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        en,
  input  logic                        in_valid,
  input  logic                        in_first,
  input  logic                        in_last,
  input  logic [EXP_W-1:0]            a_exp,
  input  logic [GROUP-1:0]            a_sign,
  input  logic [GROUP-1:0][MAN_W-1:0] a_man,
  input  logic [EXP_W-1:0]            b_exp,
  input  logic [GROUP-1:0]            b_sign,
  input  logic [GROUP-1:0][MAN_W-1:0] b_man,
  output logic                        res_valid,
  output logic signed [ACC_W-1:0]     res_acc,
  output logic [EXP_W:0]              res_exp
);

  localparam int unsigned SUM_W = dot_width(GROUP, MAN_W);

  logic signed [SUM_W-1:0] dot_sum;
  logic [EXP_W:0]          dot_exp;

  gse_dot_unit #(.GROUP(GROUP), .MAN_W(MAN_W), .EXP_W(EXP_W)) u_dot (
    .a_exp, .a_sign, .a_man, .b_exp, .b_sign, .b_man,
    .sum(dot_sum), .exp(dot_exp)
  );

  // Stage 1: registered dot product.
  logic                    v1, first1, last1;
  logic signed [SUM_W-1:0] sum1;
  logic [EXP_W:0]          exp1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0;
      sum1 <= '0; exp1 <= '0;
    end else if (en) begin
      v1     <= in_valid;
      first1 <= in_first;
      last1  <= in_last;
      sum1   <= dot_sum;
      exp1   <= dot_exp;
    end
  end

  // Stage 2: exponent-aligned accumulation.
  logic signed [ACC_W-1:0] acc;
  logic [EXP_W:0]          acc_exp;
  logic signed [ACC_W-1:0] nxt_acc;
  logic [EXP_W:0]          nxt_exp;

  always_comb begin
    logic signed [ACC_W-1:0] a_al, p_al, p_ext;
    logic signed [ACC_W:0]   wide;
    int                      d;
    p_ext = {{(ACC_W-SUM_W){sum1[SUM_W-1]}}, sum1};
    a_al  = acc;
    p_al  = p_ext;
    wide  = '0;
    d     = 0;
    if (first1 || acc == '0) begin
      nxt_acc = p_ext;
      nxt_exp = exp1;
    end else if (sum1 == '0) begin
      nxt_acc = acc;
      nxt_exp = acc_exp;
    end else begin
      d = int'(exp1) - int'(acc_exp);
      if (d >= 0) begin
        if (d >= int'(ACC_W)) a_al = acc >>> (ACC_W - 1);
        else                   a_al = acc >>> d;
        p_al    = p_ext;
        nxt_exp = exp1;
      end else begin
        a_al    = acc;
        if (-d >= int'(ACC_W)) p_al = p_ext >>> (ACC_W - 1);
        else                    p_al = p_ext >>> (-d);
        nxt_exp = acc_exp;
      end
      wide = {a_al[ACC_W-1], a_al} + {p_al[ACC_W-1], p_al};
      if (wide[ACC_W] != wide[ACC_W-1])
        nxt_acc = wide[ACC_W] ? {1'b1, {(ACC_W-1){1'b0}}} : {1'b0, {(ACC_W-1){1'b1}}};
      else
        nxt_acc = wide[ACC_W-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; acc_exp <= '0;
      res_valid <= 1'b0; res_acc <= '0; res_exp <= '0;
    end else begin
      res_valid <= en && v1 && last1;
      if (en && v1) begin
        acc     <= nxt_acc;
        acc_exp <= nxt_exp;
        if (last1) begin
          res_acc <= nxt_acc;
          res_exp <= nxt_exp;
        end
      end
    end
  end

endmodule
