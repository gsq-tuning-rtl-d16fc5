// tb_gsq_engine -- end-to-end test of the engine at a reduced size.
//
// A 3 x 8 array of 4-lane PEs (two output groups per row) keeps the
// simulation short while every path of the full-size engine is used.
// Drives tiles of BF16 operands through the whole engine and checks every
// output row, BF16 values and the re-quantized GSE groups, against a model
// built from tb_gse_ref_pkg: real-number quantization of both operands,
// the integer accumulator model, exact BF16 rounding of acc * 2^exp and
// re-quantization of each output row. Random out_ready gaps and short
// tiles exercise the drain stall; exponent biases chosen per tile drive
// the quantizers into saturation and underflow. Each mechanism's count is
// printed, and one that never happened counts as a failure. A final phase
// streams tiles of ROWS groups with out_ready held high and checks that
// the engine accepts one group per cycle, i.e. ROWS*COLS*GROUP
// multiply-accumulates per clock (0.19 TOPS at 1 GHz).
module tb_gsq_engine;
  import gse_pkg::*;
  import tb_gse_ref_pkg::*;

  localparam int ROWS = 3, COLS = 8, GROUP = 4;
  localparam int MAN_W = 5, EXP_W = 5, ACC_W = 32;
  localparam int OUT_GROUPS = COLS / GROUP;
  localparam int ROW_W = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int NTILES = 120;      // random tiles
  localparam int NSTREAM = 4;    // full-rate tiles at the end
  localparam int MAXLEN = 8;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_last = 0;
  bf16_t [ROWS-1:0][GROUP-1:0] x;
  bf16_t [COLS-1:0][GROUP-1:0] w;
  logic [7:0] x_exp_base = 0, w_exp_base = 0, out_exp_base = 8'd100;
  logic q_sat, q_uflow;
  logic out_valid, out_ready = 0, out_last_row;
  logic [ROW_W-1:0] out_row;
  bf16_t [COLS-1:0] out_y;
  logic [OUT_GROUPS-1:0][EXP_W-1:0]            store_exp;
  logic [OUT_GROUPS-1:0][GROUP-1:0]            store_sign;
  logic [OUT_GROUPS-1:0][GROUP-1:0][MAN_W-1:0] store_man;

  gsq_engine #(.ROWS(ROWS), .COLS(COLS), .GROUP(GROUP)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_stall = 0, n_backpressure = 0, n_qsat = 0, n_quflow = 0;
  int n_realign = 0, n_inexact = 0, rows_seen = 0, cycles = 0;
  bit stream_phase = 0;
  int stream_groups = 0, stream_cycles = 0, stream_first = 0;

  // expected output rows
  typedef struct {
    int          row;
    logic [15:0] y[COLS];
  } row_t;
  row_t exp_q[$];

  initial begin
    #(2000000);
    failures++;
    $display("watchdog: %0d rows seen", rows_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------- monitor
  always @(posedge clk) begin
    cycles++;
    if (rst_n) begin
      if (in_valid && !in_ready) n_stall++;
      if (out_valid && !out_ready) n_backpressure++;
      if (q_sat) n_qsat++;
      if (q_uflow) n_quflow++;
      if (stream_phase && in_valid && in_ready) begin
        if (stream_groups == 0) stream_first = cycles;
        stream_groups++;
        stream_cycles = cycles - stream_first + 1;
      end
      if (out_valid && out_ready) begin
        row_t e;
        logic [15:0] yrow[];
        gse_group_t sq;
        rows_seen++;
        e = exp_q.pop_front();
        checks++;
        if (int'(out_row) != e.row || out_last_row != (e.row == ROWS - 1)) begin
          failures++;
          $display("FAIL row index %0d expected %0d", out_row, e.row);
        end
        for (int c = 0; c < COLS; c++) begin
          checks++;
          if (out_y[c] != e.y[c]) begin
            failures++;
            if (failures < 20) $display("FAIL row %0d col %0d y=%h expected %h", e.row, c, out_y[c], e.y[c]);
          end
        end
        for (int g = 0; g < OUT_GROUPS; g++) begin
          yrow = new[GROUP];
          for (int i = 0; i < GROUP; i++) yrow[i] = e.y[g*GROUP + i];
          sq = quantize(yrow, int'(out_exp_base), MAN_W, EXP_W);
          checks++;
          if (int'(store_exp[g]) != int'(sq.ecode)) begin
            failures++;
            $display("FAIL store exp row %0d group %0d", e.row, g);
          end
          for (int i = 0; i < GROUP; i++) begin
            checks++;
            if (int'(store_man[g][i]) != int'(sq.man[i]) || store_sign[g][i] != sq.sign[i]) begin
              failures++;
              if (failures < 20) $display("FAIL store row %0d group %0d elem %0d", e.row, g, i);
            end
          end
        end
      end
    end
  end

  always @(negedge clk) begin
    if (stream_phase) out_ready <= 1'b1;
    else              out_ready <= ($urandom_range(0, 3) != 0);
  end

  // ---------------------------------------------------------- driver + model
  task automatic run_tile(int len, int xb, int wb, int xc, int wc);
    longint macc[ROWS][COLS];
    int     mexp[ROWS][COLS];
    logic [15:0] xs[], ws[];
    gse_group_t qx[ROWS], qw[COLS];
    row_t e;
    for (int k = 0; k < len; k++) begin
      @(negedge clk);
      if (!stream_phase) begin
        while ($urandom_range(0, 7) == 0) begin
          in_valid = 0;
          @(negedge clk);
        end
      end
      for (int r = 0; r < ROWS; r++) begin
        int c0;
        c0 = xc + int'($urandom_range(0, 4)) - 2;
        xs = new[GROUP];
        for (int i = 0; i < GROUP; i++) begin
          x[r][i] = rand_bf16(c0 - 7, c0);
          xs[i] = x[r][i];
        end
        qx[r] = quantize(xs, xb, MAN_W, EXP_W);
      end
      for (int c = 0; c < COLS; c++) begin
        int c0;
        c0 = wc + int'($urandom_range(0, 4)) - 2;
        ws = new[GROUP];
        for (int i = 0; i < GROUP; i++) begin
          w[c][i] = rand_bf16(c0 - 7, c0);
          ws[i] = w[c][i];
        end
        qw[c] = quantize(ws, wb, MAN_W, EXP_W);
      end
      x_exp_base = 8'(xb); w_exp_base = 8'(wb);
      in_valid = 1; in_last = (k == len - 1);
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          longint p; int pe;
          p  = dot(qx[r], qw[c]);
          pe = int'(qx[r].ecode) + int'(qw[c].ecode);
          if (k > 0 && p != 0 && macc[r][c] != 0 && pe != mexp[r][c]) n_realign++;
          acc_step(macc[r][c], mexp[r][c], p, pe, k == 0, ACC_W);
        end
      do @(posedge clk); while (!in_ready);
    end
    for (int r = 0; r < ROWS; r++) begin
      e.row = r;
      for (int c = 0; c < COLS; c++) begin
        real v;
        v = real'(macc[r][c]) * pow2(mexp[r][c] + xb + wb - 254 - 2 * (MAN_W - 1));
        e.y[c] = real_to_bf16(v);
        if (bf16_to_real(e.y[c]) != v) n_inexact++;
      end
      exp_q.push_back(e);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < NTILES; t++) begin
      int len, xb, wb, xc, wc;
      len = int'($urandom_range(1, MAXLEN));
      xc = int'($urandom_range(115, 130));
      wc = int'($urandom_range(110, 125));
      xb = xc - 25; wb = wc - 25;
      if (t % 5 == 3) xb = xc - 40;      // operands above the exponent window
      if (t % 5 == 4) wb = wc + 3;       // operands below the exponent window
      run_tile(len, xb, wb, xc, wc);
    end
    @(negedge clk); in_valid = 0;
    wait (exp_q.size() == 0);
    // full-rate phase
    @(negedge clk);
    stream_phase = 1;
    @(negedge clk);
    for (int t = 0; t < NSTREAM; t++) run_tile(ROWS, 100, 100, 125, 120);
    @(negedge clk); in_valid = 0;
    stream_phase = 0;
    wait (exp_q.size() == 0);
    repeat (3) @(posedge clk);
    checks++;
    if (stream_groups != NSTREAM * ROWS || stream_cycles != stream_groups) begin
      failures++;
      $display("FAIL: full rate %0d groups in %0d cycles", stream_groups, stream_cycles);
    end
    $display("events: stall=%0d backpressure=%0d quant_sat=%0d quant_uflow=%0d realign=%0d inexact=%0d rows=%0d",
             n_stall, n_backpressure, n_qsat, n_quflow, n_realign, n_inexact, rows_seen);
    $display("rate: %0d MAC per cycle, %0.1f TOPS at 1 GHz", ROWS * COLS * GROUP,
             2.0 * ROWS * COLS * GROUP / 1000.0);
    checks++;
    if (n_stall == 0 || n_backpressure == 0 || n_qsat == 0 || n_quflow == 0 ||
        n_realign == 0 || n_inexact == 0) begin
      failures++;
      $display("FAIL: a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
