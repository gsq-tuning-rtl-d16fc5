// gsq_engine -- GSE-INT matrix engine for fully quantized fine-tuning.
//
// One engine serves all three matrix products of a fine-tuned linear
// layer: the forward product Y = X W^T and, in the backward pass, the
// weight gradient and the input gradient. They differ only in which
// tensors are fed as row and column operands, which is up to the memory
// system around the engine. Every product runs quantize-compute-
// dequantize:
//
//   BF16 operands --gse_quantizer--> GSE-INT groups --gse_pe_array-->
//   INT32 tile --gse_dequantizer--> BF16 outputs --gse_quantizer-->
//   GSE-INT groups to store (e.g. activations kept for the backward pass)
//
// Dataflow. Per accepted cycle the engine takes, for one reduction step,
// ROWS row-operand groups x[r] and COLS column-operand groups w[c] of
// GROUP BF16 values each, together with each tensor's exponent bias.
// in_last marks the final group of the reduction; the next accepted
// group starts a new ROWS x COLS output tile. The engine then drains the
// finished tile one output row per cycle on the out_* port: COLS BF16
// values, plus the same row re-quantized to COLS/GROUP GSE groups against
// the exponent bias out_exp_base.
//
// Pipeline and stall. Stage Q registers the quantized operands, the PE
// stage 1 registers the dot products and stage 2 accumulates; results
// land in the PEs' result registers, which double as the drain buffer. A
// tile of K/GROUP groups with K/GROUP >= ROWS drains while the next one
// computes, so the array never waits. When a tile's last group reaches
// the accumulators while the previous tile is still draining, the whole
// pipeline stalls (in_ready low) until the drain is about to free the
// buffer. out_ready low also holds the drain.
//
// Exponent biases are sampled with each tile's last group and must stay
// constant over the tile. The drain path (row mux, dequantizer,
// re-quantizer) is combinational from registers to the out_* port.
//
// What comes from the method: group size 32, a 5-bit shared exponent,
// GSE-INT6 operands, integer multiply-accumulate with exponent addition,
// INT32 MatMul output, BF16 at the edges, re-quantized storage of outputs.
// What is this design's: the array shape (25 x 32, 51.2 TOPS at 1 GHz
// against the stated 50 TOPS), the broadcast dataflow, the pipeline, the
// handshakes, the exponent-bias inputs and all rounding and range rules.
module gsq_engine
  import gse_pkg::*;
#(
  parameter int unsigned ROWS  = 25,
  parameter int unsigned COLS  = 32,
  parameter int unsigned GROUP = 32,
  parameter int unsigned MAN_W = 5,
  parameter int unsigned EXP_W = 5,
  parameter int unsigned ACC_W = 32,
  localparam int unsigned OUT_GROUPS = COLS / GROUP,
  localparam int unsigned ROW_W = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                                        clk,
  input  logic                                        rst_n,
  // operand input
  input  logic                                        in_valid,
  output logic                                        in_ready,
  input  logic                                        in_last,
  input  bf16_t [ROWS-1:0][GROUP-1:0]                 x,
  input  bf16_t [COLS-1:0][GROUP-1:0]                 w,
  input  logic [7:0]                                  x_exp_base,
  input  logic [7:0]                                  w_exp_base,
  // quantizer range events for the group accepted last cycle
  output logic                                        q_sat,
  output logic                                        q_uflow,
  // result output, one tile row per cycle
  output logic                                        out_valid,
  input  logic                                        out_ready,
  output logic [ROW_W-1:0]                            out_row,
  output logic                                        out_last_row,
  output bf16_t [COLS-1:0]                            out_y,
  input  logic [7:0]                                  out_exp_base,
  output logic [OUT_GROUPS-1:0][EXP_W-1:0]            store_exp,
  output logic [OUT_GROUPS-1:0][GROUP-1:0]            store_sign,
  output logic [OUT_GROUPS-1:0][GROUP-1:0][MAN_W-1:0] store_man
);

  logic en;
  assign in_ready = en;

  // ---------------------------------------------------------------- Q
  logic [ROWS-1:0][EXP_W-1:0]            xq_exp;
  logic [ROWS-1:0][GROUP-1:0]            xq_sign;
  logic [ROWS-1:0][GROUP-1:0][MAN_W-1:0] xq_man;
  logic [COLS-1:0][EXP_W-1:0]            wq_exp;
  logic [COLS-1:0][GROUP-1:0]            wq_sign;
  logic [COLS-1:0][GROUP-1:0][MAN_W-1:0] wq_man;
  logic [ROWS-1:0] x_sat, x_uf;
  logic [COLS-1:0] w_sat, w_uf;

  for (genvar r = 0; r < ROWS; r++) begin : g_qx
    gse_quantizer #(.GROUP(GROUP), .MAN_W(MAN_W), .EXP_W(EXP_W)) u_q (
      .x(x[r]), .exp_base(x_exp_base),
      .q_exp(xq_exp[r]), .q_sign(xq_sign[r]), .q_man(xq_man[r]),
      .sat(x_sat[r]), .uflow(x_uf[r])
    );
  end
  for (genvar c = 0; c < COLS; c++) begin : g_qw
    gse_quantizer #(.GROUP(GROUP), .MAN_W(MAN_W), .EXP_W(EXP_W)) u_q (
      .x(w[c]), .exp_base(w_exp_base),
      .q_exp(wq_exp[c]), .q_sign(wq_sign[c]), .q_man(wq_man[c]),
      .sat(w_sat[c]), .uflow(w_uf[c])
    );
  end

  logic [ROWS-1:0][EXP_W-1:0]            sx_exp;
  logic [ROWS-1:0][GROUP-1:0]            sx_sign;
  logic [ROWS-1:0][GROUP-1:0][MAN_W-1:0] sx_man;
  logic [COLS-1:0][EXP_W-1:0]            sw_exp;
  logic [COLS-1:0][GROUP-1:0]            sw_sign;
  logic [COLS-1:0][GROUP-1:0][MAN_W-1:0] sw_man;
  logic       vq, firstq, lastq;
  logic [7:0] xbq, wbq;
  logic       next_first;   // the next accepted group opens a new tile

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vq <= 1'b0; firstq <= 1'b0; lastq <= 1'b0; next_first <= 1'b1;
      xbq <= '0; wbq <= '0; q_sat <= 1'b0; q_uflow <= 1'b0;
      sx_exp <= '0; sx_sign <= '0; sx_man <= '0;
      sw_exp <= '0; sw_sign <= '0; sw_man <= '0;
    end else if (en) begin
      vq      <= in_valid;
      firstq  <= next_first;
      lastq   <= in_last;
      xbq     <= x_exp_base;
      wbq     <= w_exp_base;
      q_sat   <= in_valid && (|x_sat || |w_sat);
      q_uflow <= in_valid && (|x_uf || |w_uf);
      sx_exp  <= xq_exp;  sx_sign <= xq_sign;  sx_man <= xq_man;
      sw_exp  <= wq_exp;  sw_sign <= wq_sign;  sw_man <= wq_man;
      if (in_valid) next_first <= in_last;
    end else begin
      q_sat   <= 1'b0;
      q_uflow <= 1'b0;
    end
  end

  // ---------------------------------------------------------------- PEs
  logic [ROWS-1:0][COLS-1:0][ACC_W-1:0] res_acc;
  logic [ROWS-1:0][COLS-1:0][EXP_W:0]   res_exp;
  logic                                 res_valid;

  gse_pe_array #(
    .ROWS(ROWS), .COLS(COLS), .GROUP(GROUP),
    .MAN_W(MAN_W), .EXP_W(EXP_W), .ACC_W(ACC_W)
  ) u_array (
    .clk, .rst_n, .en,
    .in_valid(vq), .in_first(firstq), .in_last(lastq),
    .a_exp(sx_exp), .a_sign(sx_sign), .a_man(sx_man),
    .b_exp(sw_exp), .b_sign(sw_sign), .b_man(sw_man),
    .res_valid, .res_acc, .res_exp
  );

  // Copy of the PE stage-1 control, to see a tile end coming.
  logic       v1, last1;
  logic [7:0] xb1, wb1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; last1 <= 1'b0; xb1 <= '0; wb1 <= '0;
    end else if (en) begin
      v1 <= vq; last1 <= lastq; xb1 <= xbq; wb1 <= wbq;
    end
  end

  // ---------------------------------------------------------------- drain
  logic             busy;
  logic [ROW_W-1:0] row;
  logic signed [11:0] tile_shift;  // unbiased exponent of code 0 of the product
  logic             drain_frees;

  assign drain_frees = !busy || (out_ready && row == ROW_W'(ROWS - 1));
  assign en          = !(v1 && last1 && !drain_frees);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; row <= '0; tile_shift <= '0;
    end else begin
      if (busy && out_ready) begin
        if (row == ROW_W'(ROWS - 1)) begin
          busy <= 1'b0;
          row  <= '0;
        end else begin
          row <= row + 1'b1;
        end
      end
      if (en && v1 && last1) begin
        busy       <= 1'b1;
        row        <= '0;
        tile_shift <= 12'(int'(xb1) + int'(wb1) - 2 * int'(BF16_BIAS) - 2 * (int'(MAN_W) - 1));
      end
    end
  end

  assign out_valid    = busy;
  assign out_row      = row;
  assign out_last_row = busy && row == ROW_W'(ROWS - 1);

  for (genvar c = 0; c < COLS; c++) begin : g_dq
    gse_dequantizer #(.ACC_W(ACC_W)) u_dq (
      .acc(res_acc[row][c]),
      .exp(tile_shift + 12'(res_exp[row][c])),
      .y(out_y[c])
    );
  end

  for (genvar g = 0; g < OUT_GROUPS; g++) begin : g_st
    logic sat_unused, uf_unused;
    gse_quantizer #(.GROUP(GROUP), .MAN_W(MAN_W), .EXP_W(EXP_W)) u_q (
      .x(out_y[g*GROUP +: GROUP]), .exp_base(out_exp_base),
      .q_exp(store_exp[g]), .q_sign(store_sign[g]), .q_man(store_man[g]),
      .sat(sat_unused), .uflow(uf_unused)
    );
  end

  // A tile end never reaches the accumulators while the buffer is held,
  // and a row offered on out_* stays until it is taken.
  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n)
    (en && v1 && last1) |-> drain_frees)
    else $error("gsq_engine: tile result overwrote an undrained tile");
  a_result_lands: assert property (@(posedge clk) disable iff (!rst_n)
    res_valid |-> (busy && row == '0))
    else $error("gsq_engine: tile result outside the drain buffer");
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && !out_ready) |=> (out_valid && $stable(out_row)))
    else $error("gsq_engine: output row dropped before it was taken");

  initial begin
    assert (COLS % GROUP == 0) else $error("gsq_engine: COLS must be a multiple of GROUP");
  end

endmodule
