// tb_gse_dot_unit -- self-checking test of the GSE group dot product.
//
// Random operand groups, plus full-scale groups of equal and of opposite
// signs that reach the ends of the sum's range. The sum is compared with
// a 64-bit integer model and the exponent with eA+eB.
module tb_gse_dot_unit;
  import gse_pkg::*;
  import tb_gse_ref_pkg::*;

  localparam int GROUP = 32;
  localparam int MAN_W = 5;
  localparam int EXP_W = 5;
  localparam int SUM_W = dot_width(GROUP, MAN_W);

  logic [EXP_W-1:0]            a_exp, b_exp;
  logic [GROUP-1:0]            a_sign, b_sign;
  logic [GROUP-1:0][MAN_W-1:0] a_man, b_man;
  logic signed [SUM_W-1:0]     sum;
  logic [EXP_W:0]              exp;

  gse_dot_unit #(.GROUP(GROUP), .MAN_W(MAN_W), .EXP_W(EXP_W)) dut (.*);

  int checks = 0, failures = 0;

  task automatic check(string what);
    longint s;
    s = 0;
    for (int i = 0; i < GROUP; i++) begin
      longint p;
      p = longint'(a_man[i]) * longint'(b_man[i]);
      s = (a_sign[i] == b_sign[i]) ? s + p : s - p;
    end
    #1;
    checks++;
    if (longint'(sum) != s || int'(exp) != int'(a_exp) + int'(b_exp)) begin
      failures++;
      $display("FAIL %s: sum %0d/%0d exp %0d", what, sum, s, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_man = '1; b_man = '1; a_sign = '0; b_sign = '0; a_exp = '1; b_exp = '1;
    check("max positive");
    b_sign = '1;
    check("max negative");
    for (int t = 0; t < 1000; t++) begin
      for (int i = 0; i < GROUP; i++) begin
        a_man[i] = MAN_W'($urandom); b_man[i] = MAN_W'($urandom);
      end
      a_sign = GROUP'($urandom); b_sign = GROUP'($urandom);
      a_exp = EXP_W'($urandom); b_exp = EXP_W'($urandom);
      check("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
