// tb_gse_quantizer -- self-checking test of the BF16-to-GSE quantizer.
//
// Drives random groups whose exponents straddle the shared-exponent
// window, plus directed groups for the corner cases: all zero, one
// dominant element, subnormal inputs, a rounding carry out of the mantissa, a group above
// the exponent range (saturation) and one below it (underflow). Every
// output field is compared with the real-number model of tb_gse_ref_pkg.
module tb_gse_quantizer;
  import gse_pkg::*;
  import tb_gse_ref_pkg::*;

  localparam int GROUP = 32;
  localparam int MAN_W = 5;
  localparam int EXP_W = 5;

  bf16_t [GROUP-1:0]            x;
  logic  [7:0]                  exp_base;
  logic  [EXP_W-1:0]            q_exp;
  logic  [GROUP-1:0]            q_sign;
  logic  [GROUP-1:0][MAN_W-1:0] q_man;
  logic                         sat, uflow;

  gse_quantizer #(.GROUP(GROUP), .MAN_W(MAN_W), .EXP_W(EXP_W)) dut (.*);

  int checks = 0, failures = 0;
  int n_sat = 0, n_uflow = 0;

  task automatic check_group(string what);
    logic [15:0] xs[];
    gse_group_t  r;
    xs = new[GROUP];
    foreach (xs[i]) xs[i] = x[i];
    r = quantize(xs, int'(exp_base), MAN_W, EXP_W);
    #1;
    checks++;
    if (q_exp != EXP_W'(r.ecode) || sat != r.sat || uflow != r.uflow) begin
      failures++;
      $display("FAIL %s: exp %0d/%0d sat %0b/%0b uflow %0b/%0b", what,
               q_exp, r.ecode, sat, r.sat, uflow, r.uflow);
    end
    for (int i = 0; i < GROUP; i++) begin
      checks++;
      if (q_man[i] != MAN_W'(r.man[i]) || q_sign[i] != r.sign[i]) begin
        failures++;
        $display("FAIL %s: elem %0d x=%h man %0d/%0d sign %0b/%0b", what, i, xs[i],
                 q_man[i], r.man[i], q_sign[i], r.sign[i]);
      end
    end
    n_sat   += int'(sat);
    n_uflow += int'(uflow);
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // all zero
    x = '0; exp_base = 8'd100;
    check_group("zero");
    // single dominant element, rest tiny
    x = '0; x[3] = 16'h3F80; x[7] = 16'h3000;  // 1.0 and 2^-31
    exp_base = 8'd110;
    check_group("dominant");
    // rounding carry: max element 1.1111111b, lower element rounds up
    for (int i = 0; i < GROUP; i++) x[i] = {1'b0, 8'd120, 7'h7F};
    exp_base = 8'd100;
    check_group("carry");
    // above the window: base + 31 < emax
    for (int i = 0; i < GROUP; i++) x[i] = rand_bf16(125, 130);
    exp_base = 8'd80;
    check_group("overflow");
    // below the window
    for (int i = 0; i < GROUP; i++) x[i] = rand_bf16(90, 100);
    exp_base = 8'd105;
    check_group("underflow");
    // subnormals only, and subnormals mixed with a small normal value
    for (int i = 0; i < GROUP; i++) x[i] = {1'($urandom), 8'd0, 7'($urandom)};
    exp_base = 8'd0;
    check_group("subnormal");
    x[5] = {1'b0, 8'd2, 7'h11};
    check_group("subnormal mixed");
    // random groups
    for (int t = 0; t < 400; t++) begin
      int c;
      c = int'($urandom_range(60, 140));
      for (int i = 0; i < GROUP; i++) x[i] = rand_bf16(c - 9, c);
      if ($urandom_range(0, 9) == 0) x[$urandom_range(0, GROUP-1)] = 16'h0000;
      exp_base = 8'(c + 5 - int'($urandom_range(0, 45)));
      check_group("random");
    end
    checks++;
    if (n_sat == 0 || n_uflow == 0) begin
      failures++;
      $display("FAIL: corner cases not reached sat=%0d uflow=%0d", n_sat, n_uflow);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
