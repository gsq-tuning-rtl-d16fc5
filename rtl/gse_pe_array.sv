// gse_pe_array -- ROWS x COLS grid of GSE processing elements (the MatMul).
//
// Each cycle the array takes ROWS row-operand groups and COLS
// column-operand groups, all belonging to the same reduction step k.
// Row operand r is broadcast to every PE of row r, column operand c to
// every PE of column c, so PE (r,c) builds output element (r,c) of a
// ROWS x COLS output tile one group of GROUP products per cycle. A tile
// of reduction length K takes K/GROUP cycles and tiles run back to back.
//
// The method only says the engine runs at 1 GHz with a capability of
// 50 TOPS; the grid shape and the broadcast dataflow are this design's
// choice. With the defaults (25 x 32 PEs of 32 lanes) the array does
// 25*32*32 = 25,600 multiply-accumulates, i.e. 51.2 TOPS, per 1 GHz cycle.
//
// Interface: the control inputs (en, valid, first, last) are common to all
// PEs, so every PE sees the same timing as gse_pe: a tile's results appear
// two edges after its last group and stay until the next tile ends.
// res_valid is that of PE (0,0); all PEs pulse together.
module gse_pe_array
  import gse_pkg::*;
#(
  parameter int unsigned ROWS  = 25,
  parameter int unsigned COLS  = 32,
  parameter int unsigned GROUP = 32,
  parameter int unsigned MAN_W = 5,
  parameter int unsigned EXP_W = 5,
  parameter int unsigned ACC_W = 32
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   en,
  input  logic                                   in_valid,
  input  logic                                   in_first,
  input  logic                                   in_last,
  input  logic [ROWS-1:0][EXP_W-1:0]             a_exp,
  input  logic [ROWS-1:0][GROUP-1:0]             a_sign,
  input  logic [ROWS-1:0][GROUP-1:0][MAN_W-1:0]  a_man,
  input  logic [COLS-1:0][EXP_W-1:0]             b_exp,
  input  logic [COLS-1:0][GROUP-1:0]             b_sign,
  input  logic [COLS-1:0][GROUP-1:0][MAN_W-1:0]  b_man,
  output logic                                   res_valid,
  output logic [ROWS-1:0][COLS-1:0][ACC_W-1:0]   res_acc,
  output logic [ROWS-1:0][COLS-1:0][EXP_W:0]     res_exp
);

  logic [ROWS-1:0][COLS-1:0] pe_valid;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      gse_pe #(.GROUP(GROUP), .MAN_W(MAN_W), .EXP_W(EXP_W), .ACC_W(ACC_W)) u_pe (
        .clk, .rst_n, .en, .in_valid, .in_first, .in_last,
        .a_exp(a_exp[r]), .a_sign(a_sign[r]), .a_man(a_man[r]),
        .b_exp(b_exp[c]), .b_sign(b_sign[c]), .b_man(b_man[c]),
        .res_valid(pe_valid[r][c]),
        .res_acc(res_acc[r][c]),
        .res_exp(res_exp[r][c])
      );
    end
  end

  assign res_valid = pe_valid[0][0];

  // Every PE shares the control inputs, so they finish together.
  a_pes_in_step: assert property (@(posedge clk) disable iff (!rst_n)
    pe_valid == '0 || pe_valid == '1)
    else $error("gse_pe_array: PEs out of step");

endmodule
