// tb_gse_pe -- self-checking test of one processing element.
//
// Feeds back-to-back reductions of random length (1 to 12 groups) with
// random stall cycles (en low) and idle cycles (in_valid low). Operand
// exponents vary per group so the accumulator realigns in both
// directions; full-scale runs drive a second, 16-bit-accumulator copy into saturation. Each result is
// compared with the integer model of tb_gse_ref_pkg, and res_valid must
// rise on the second enabled clock edge after the last group is presented.
module tb_gse_pe;
  import gse_pkg::*;
  import tb_gse_ref_pkg::*;

  localparam int GROUP = 32;
  localparam int MAN_W = 5;
  localparam int EXP_W = 5;
  localparam int ACC_W = 32;

  logic clk = 0, rst_n = 0, en = 0;
  logic in_valid = 0, in_first = 0, in_last = 0;
  logic [EXP_W-1:0]            a_exp, b_exp;
  logic [GROUP-1:0]            a_sign, b_sign;
  logic [GROUP-1:0][MAN_W-1:0] a_man, b_man;
  logic                        res_valid;
  logic signed [ACC_W-1:0]     res_acc;
  logic [EXP_W:0]              res_exp;

  gse_pe #(.GROUP(GROUP), .MAN_W(MAN_W), .EXP_W(EXP_W), .ACC_W(ACC_W)) dut (.*);

  // A narrow-accumulator copy on the same inputs, to reach saturation.
  logic                    res_valid16;
  logic signed [15:0]      res_acc16;
  logic [EXP_W:0]          res_exp16;
  gse_pe #(.GROUP(GROUP), .MAN_W(MAN_W), .EXP_W(EXP_W), .ACC_W(16)) dut16 (
    .clk, .rst_n, .en, .in_valid, .in_first, .in_last,
    .a_exp, .a_sign, .a_man, .b_exp, .b_sign, .b_man,
    .res_valid(res_valid16), .res_acc(res_acc16), .res_exp(res_exp16));
  longint exp16_q[$];
  int     exp16e_q[$];

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_up = 0, n_down = 0, n_sat = 0, n_stall = 0;

  // expected results, in order
  longint exp_acc_q[$];
  int     exp_exp_q[$];
  int     cyc = 0, last_cyc_q[$];
  int     en_edges = 0;

  always @(posedge clk) begin
    cyc++;
    if (en) en_edges++;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result checker
  always @(negedge clk) begin
    if (rst_n && res_valid) begin
      longint ea; int ee; int lc;
      ea = exp_acc_q.pop_front();
      ee = exp_exp_q.pop_front();
      lc = last_cyc_q.pop_front();
      checks++;
      if (longint'(res_acc) != ea || int'(res_exp) != ee) begin
        failures++;
        $display("FAIL result acc %0d/%0d exp %0d/%0d", res_acc, ea, res_exp, ee);
      end
      ea = exp16_q.pop_front();
      ee = exp16e_q.pop_front();
      checks++;
      if (!res_valid16 || longint'(res_acc16) != ea || int'(res_exp16) != ee) begin
        failures++;
        $display("FAIL 16-bit result acc %0d/%0d exp %0d/%0d", res_acc16, ea, res_exp16, ee);
      end
      checks++;
      if (en_edges - lc != 1) begin
        failures++;
        $display("FAIL latency %0d enabled edges", en_edges - lc);
      end
    end
  end

  initial begin
    longint acc, acc16; int aexp, aexp16;
    bit full;
    a_exp = '0; b_exp = '0; a_sign = '0; b_sign = '0; a_man = '0; b_man = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1; en <= 1;
    for (int t = 0; t < 300; t++) begin
      int len;
      len  = int'($urandom_range(1, 12));
      full = ($urandom_range(0, 15) == 0);
      for (int g = 0; g < len; g++) begin
        gse_group_t qa, qb;
        longint p; int pe;
        // optional idle / stall cycles before the group
        while ($urandom_range(0, 4) == 0) begin
          @(negedge clk);
          in_valid = 0;
          en = $urandom_range(0, 1);
          if (!en) n_stall++;
          @(posedge clk);
        end
        @(negedge clk);
        en = 1;
        for (int i = 0; i < GROUP; i++) begin
          a_man[i] = full ? '1 : MAN_W'($urandom);
          b_man[i] = full ? '1 : MAN_W'($urandom);
        end
        a_sign = full ? '0 : GROUP'($urandom);
        b_sign = full ? '0 : GROUP'($urandom);
        a_exp  = full ? EXP_W'(0) : EXP_W'($urandom_range(0, 31));
        b_exp  = full ? EXP_W'(0) : EXP_W'($urandom_range(0, 31));
        in_valid = 1; in_first = (g == 0); in_last = (g == len - 1);
        // model
        qa.man = new[GROUP]; qa.sign = new[GROUP];
        qb.man = new[GROUP]; qb.sign = new[GROUP];
        for (int i = 0; i < GROUP; i++) begin
          qa.man[i] = a_man[i]; qa.sign[i] = a_sign[i];
          qb.man[i] = b_man[i]; qb.sign[i] = b_sign[i];
        end
        p  = dot(qa, qb);
        pe = int'(a_exp) + int'(b_exp);
        if (g > 0 && acc != 0 && p != 0) begin
          if (pe > aexp) n_up++;
          if (pe < aexp) n_down++;
        end
        acc_step(acc, aexp, p, pe, g == 0, ACC_W);
        acc_step(acc16, aexp16, p, pe, g == 0, 16);
        if (acc16 == 32767 || acc16 == -32768) n_sat++;
        if (g == len - 1) begin
          exp_acc_q.push_back(acc);
          exp_exp_q.push_back(aexp);
          exp16_q.push_back(acc16);
          exp16e_q.push_back(aexp16);
          last_cyc_q.push_back(en_edges + 1);
        end
        @(posedge clk);
      end
    end
    @(negedge clk);
    in_valid = 0; en = 1;
    repeat (5) @(posedge clk);
    checks++;
    if (exp_acc_q.size() != 0 || n_up == 0 || n_down == 0 || n_stall == 0 || n_sat == 0) begin
      failures++;
      $display("FAIL: pending=%0d up=%0d down=%0d stall=%0d", exp_acc_q.size(), n_up, n_down, n_stall);
    end
    $display("events: realign_up=%0d realign_down=%0d saturate=%0d stalls=%0d", n_up, n_down, n_sat, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
