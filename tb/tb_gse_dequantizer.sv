// tb_gse_dequantizer -- self-checking test of the INT32-to-BF16 converter.
//
// Random accumulators of every magnitude and random exponents, plus
// directed cases: zero, the most negative integer, exact ties for the
// round-to-even rule, a rounding carry into the exponent, overflow to the
// largest BF16 value and underflow to zero. Results are compared with the
// double-precision model of tb_gse_ref_pkg.
module tb_gse_dequantizer;
  import gse_pkg::*;
  import tb_gse_ref_pkg::*;

  logic signed [31:0] acc;
  logic signed [11:0] exp;
  bf16_t              y;

  gse_dequantizer #(.ACC_W(32)) dut (.*);

  int checks = 0, failures = 0;
  int n_round = 0, n_ovf = 0, n_unf = 0;

  task automatic check(string what);
    logic [15:0] r;
    real v;
    v = real'(longint'(acc)) * pow2(int'(exp));
    r = real_to_bf16(v);
    #1;
    checks++;
    if (y != r) begin
      failures++;
      $display("FAIL %s: acc=%0d exp=%0d y=%h expected %h", what, acc, exp, y, r);
    end
    if (r == 16'h7F7F || r == 16'hFF7F) n_ovf++;
    if (r == 16'h0000 && acc != 0) n_unf++;
    if (bf16_to_real(r) != v && r != 16'h0000) n_round++;
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    acc = 0; exp = 0; check("zero");
    acc = 32'sh80000000; exp = -3; check("most negative");
    acc = 32'sd385; exp = 0; check("tie to even down");   // 1.1000000|1
    acc = 32'sd387; exp = 0; check("tie to even up");     // 1.1000001|1
    acc = 32'sd511; exp = 0; check("carry");
    acc = 32'sd1000; exp = 200; check("overflow");
    acc = -32'sd1000; exp = 200; check("negative overflow");
    acc = 32'sd3; exp = -140; check("underflow");
    for (int t = 0; t < 5000; t++) begin
      int sh;
      sh  = int'($urandom_range(0, 31));
      acc = 32'($signed($urandom) >>> sh);
      exp = 12'(int'($urandom_range(0, 300)) - 200);
      check("random");
    end
    checks++;
    if (n_round == 0 || n_ovf == 0 || n_unf == 0) begin
      failures++;
      $display("FAIL: cases not reached round=%0d ovf=%0d unf=%0d", n_round, n_ovf, n_unf);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
