// tb_gse_pe_array -- self-checking test of the PE grid at a reduced size.
//
// A 3 x 4 grid of 4-lane PEs computes a stream of output tiles with
// random reduction lengths and random stall cycles. Every PE's result is
// compared with the integer model, which checks that row operand r and
// column operand c really meet in PE (r,c).
module tb_gse_pe_array;
  import gse_pkg::*;
  import tb_gse_ref_pkg::*;

  localparam int ROWS = 3, COLS = 4, GROUP = 4, MAN_W = 5, EXP_W = 5, ACC_W = 32;

  logic clk = 0, rst_n = 0, en = 0;
  logic in_valid = 0, in_first = 0, in_last = 0;
  logic [ROWS-1:0][EXP_W-1:0]            a_exp;
  logic [ROWS-1:0][GROUP-1:0]            a_sign;
  logic [ROWS-1:0][GROUP-1:0][MAN_W-1:0] a_man;
  logic [COLS-1:0][EXP_W-1:0]            b_exp;
  logic [COLS-1:0][GROUP-1:0]            b_sign;
  logic [COLS-1:0][GROUP-1:0][MAN_W-1:0] b_man;
  logic                                  res_valid;
  logic [ROWS-1:0][COLS-1:0][ACC_W-1:0]  res_acc;
  logic [ROWS-1:0][COLS-1:0][EXP_W:0]    res_exp;

  gse_pe_array #(.ROWS(ROWS), .COLS(COLS), .GROUP(GROUP), .MAN_W(MAN_W),
                 .EXP_W(EXP_W), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, tiles_done = 0;
  longint m_acc[ROWS][COLS];
  int     m_exp[ROWS][COLS];
  longint q_acc[$];
  int     q_exp[$];

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (rst_n && res_valid) begin
      tiles_done++;
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          longint ea; int ee;
          ea = q_acc.pop_front(); ee = q_exp.pop_front();
          checks++;
          if (longint'($signed(res_acc[r][c])) != ea || int'(res_exp[r][c]) != ee) begin
            failures++;
            $display("FAIL pe(%0d,%0d) acc %0d/%0d exp %0d/%0d", r, c,
                     $signed(res_acc[r][c]), ea, res_exp[r][c], ee);
          end
        end
    end
  end

  initial begin
    gse_group_t ga[ROWS], gb[COLS];
    repeat (3) @(posedge clk);
    rst_n <= 1; en <= 1;
    for (int t = 0; t < 60; t++) begin
      int len;
      len = int'($urandom_range(1, 8));
      for (int g = 0; g < len; g++) begin
        while ($urandom_range(0, 3) == 0) begin
          @(negedge clk); in_valid = 0; en = $urandom_range(0, 1);
          @(posedge clk);
        end
        @(negedge clk);
        en = 1; in_valid = 1; in_first = (g == 0); in_last = (g == len - 1);
        for (int r = 0; r < ROWS; r++) begin
          ga[r].man = new[GROUP]; ga[r].sign = new[GROUP];
          a_exp[r] = EXP_W'($urandom_range(0, 31));
          for (int i = 0; i < GROUP; i++) begin
            a_man[r][i] = MAN_W'($urandom); a_sign[r][i] = 1'($urandom);
            ga[r].man[i] = a_man[r][i]; ga[r].sign[i] = a_sign[r][i];
          end
        end
        for (int c = 0; c < COLS; c++) begin
          gb[c].man = new[GROUP]; gb[c].sign = new[GROUP];
          b_exp[c] = EXP_W'($urandom_range(0, 31));
          for (int i = 0; i < GROUP; i++) begin
            b_man[c][i] = MAN_W'($urandom); b_sign[c][i] = 1'($urandom);
            gb[c].man[i] = b_man[c][i]; gb[c].sign[i] = b_sign[c][i];
          end
        end
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < COLS; c++) begin
            acc_step(m_acc[r][c], m_exp[r][c], dot(ga[r], gb[c]),
                     int'(a_exp[r]) + int'(b_exp[c]), g == 0, ACC_W);
            if (g == len - 1) begin
              q_acc.push_back(m_acc[r][c]); q_exp.push_back(m_exp[r][c]);
            end
          end
        @(posedge clk);
      end
    end
    @(negedge clk); in_valid = 0; en = 1;
    repeat (5) @(posedge clk);
    checks++;
    if (tiles_done != 60 || q_acc.size() != 0) begin
      failures++;
      $display("FAIL: %0d tiles finished", tiles_done);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
