// tb_lora_layer_step -- one fine-tuning step of a LoRA linear layer on the
// engine.
//
// Runs the workload the engine exists for, at a size a simulator finishes
// quickly: a linear layer with a frozen weight W (oc x ic) and a trainable
// low-rank adapter A (r x ic), B (oc x r), for a batch of b tokens. The
// testbench plays the memory system: it tiles each product, feeds the
// operands in BF16 and collects BF16 results. The products are
//
//   forward   Y0 = X W^T,   H = X A^T,   Y1 = H B^T,   Y = Y0 + Y1
//   backward  dB = G^T H,   T = G B,     dA = T^T X,   dX = G W + T A
//
// with G = dL/dY. H goes to memory through the engine's re-quantizing
// store port and is read back from its GSE form for dB, as the method
// keeps activations for the backward pass in GSE-INT. Every product is
// compared with exact real arithmetic on the same BF16 inputs. The relative
// Frobenius error must stay below 6%, a bound set by the 5-bit
// mantissas. The engine runs with a 4 x 8 array of 8-lane PEs. The default
// 32-lane groups would leave most of these small matrices as padding.
module tb_lora_layer_step;
  import gse_pkg::*;
  import tb_gse_ref_pkg::*;

  localparam int ROWS = 4, COLS = 8, GROUP = 8, MAN_W = 5, EXP_W = 5;
  localparam int OUT_GROUPS = COLS / GROUP;
  localparam int ROW_W = $clog2(ROWS);
  localparam int NB = 8, IC = 64, OC = 32, R = 8;   // tokens, in, out, rank
  localparam int MAXD = 64;
  localparam real TOL = 0.06;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_last = 0;
  bf16_t [ROWS-1:0][GROUP-1:0] x;
  bf16_t [COLS-1:0][GROUP-1:0] w;
  logic [7:0] x_exp_base = 0, w_exp_base = 0, out_exp_base = 0;
  logic q_sat, q_uflow;
  logic out_valid, out_ready = 1, out_last_row;
  logic [ROW_W-1:0] out_row;
  bf16_t [COLS-1:0] out_y;
  logic [OUT_GROUPS-1:0][EXP_W-1:0]            store_exp;
  logic [OUT_GROUPS-1:0][GROUP-1:0]            store_sign;
  logic [OUT_GROUPS-1:0][GROUP-1:0][MAN_W-1:0] store_man;

  gsq_engine #(.ROWS(ROWS), .COLS(COLS), .GROUP(GROUP), .MAN_W(MAN_W), .EXP_W(EXP_W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycles = 0, busy_cycles = 0;

  // Tensors, BF16 bit patterns, padded to MAXD x MAXD.
  typedef logic [15:0] mat_t[MAXD][MAXD];
  mat_t mX, mW, mA, mB, mG, mH, mHs, mT, mY0, mY1, mdB, mdA, mdX0, mdX1;
  // operand and result buffers of one product C = P Q^T
  mat_t opP, opQ, resC, resS;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cycles++;
    if (in_valid && in_ready) busy_cycles++;
  end

  // ------------------------------------------------------------ helpers
  function automatic real gauss();
    real s;
    s = 0.0;
    for (int i = 0; i < 12; i++) s += real'($urandom_range(0, 1000000)) / 1000000.0;
    return s - 6.0;
  endfunction

  function automatic int max_exp(mat_t m, int rows, int cols);
    int e;
    e = 0;
    for (int i = 0; i < rows; i++)
      for (int j = 0; j < cols; j++)
        if (int'(m[i][j][14:7]) > e) e = int'(m[i][j][14:7]);
    return e;
  endfunction

  // Value of a stored GSE element, as BF16 (exact: at most 5 significant bits).
  function automatic logic [15:0] gse_to_bf16(int base, int code, bit s, int m);
    real v;
    v = real'(m) * pow2(base + code - 127 - (MAN_W - 1));
    return real_to_bf16(s ? -v : v);
  endfunction

  // ------------------------------------------------------------ one product
  int rows_q[$], cols_q[$];   // origin of each tile handed to the drain
  int out_base_now;

  // drain monitor: writes BF16 results and the dequantized stored copy
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      int r0, c0;
      r0 = rows_q[0]; c0 = cols_q[0];
      for (int c = 0; c < COLS; c++) begin
        resC[r0 + int'(out_row)][c0 + c] = out_y[c];
        resS[r0 + int'(out_row)][c0 + c] =
          gse_to_bf16(out_base_now, int'(store_exp[c / GROUP]),
                      store_sign[c / GROUP][c % GROUP], int'(store_man[c / GROUP][c % GROUP]));
      end
      if (out_last_row) begin
        void'(rows_q.pop_front());
        void'(cols_q.pop_front());
      end
    end
  end

  // C[M x N] = P[M x K] * Q[N x K]^T on the engine
  task automatic engine_mm(int M, int N, int K, int out_base);
    int xb, wb;
    xb = max_exp(opP, M, K) - 28;
    wb = max_exp(opQ, N, K) - 28;
    out_base_now = out_base;
    out_exp_base = 8'(out_base);
    for (int i = 0; i < MAXD; i++)
      for (int j = 0; j < MAXD; j++) begin resC[i][j] = '0; resS[i][j] = '0; end
    for (int mt = 0; mt < M; mt += ROWS)
      for (int nt = 0; nt < N; nt += COLS)
        for (int kg = 0; kg < K; kg += GROUP) begin
          @(negedge clk);
          for (int r = 0; r < ROWS; r++)
            for (int i = 0; i < GROUP; i++)
              x[r][i] = (mt + r < M && kg + i < K) ? opP[mt + r][kg + i] : 16'h0;
          for (int c = 0; c < COLS; c++)
            for (int i = 0; i < GROUP; i++)
              w[c][i] = (nt + c < N && kg + i < K) ? opQ[nt + c][kg + i] : 16'h0;
          x_exp_base = 8'(xb); w_exp_base = 8'(wb);
          in_valid = 1;
          in_last  = (kg + GROUP >= K);
          do @(posedge clk); while (!in_ready);
          if (in_last) begin rows_q.push_back(mt); cols_q.push_back(nt); end
        end
    @(negedge clk);
    in_valid = 0; in_last = 0;
    wait (rows_q.size() == 0);
    @(negedge clk);
  endtask

  // Relative Frobenius error of resC against the exact product.
  task automatic check_product(string name, int M, int N, int K, output real err);
    real num, den, ref_v, got;
    num = 0.0; den = 0.0;
    for (int i = 0; i < M; i++)
      for (int j = 0; j < N; j++) begin
        ref_v = 0.0;
        for (int k = 0; k < K; k++) ref_v += bf16_to_real(opP[i][k]) * bf16_to_real(opQ[j][k]);
        got = bf16_to_real(resC[i][j]);
        num += (got - ref_v) * (got - ref_v);
        den += ref_v * ref_v;
      end
    err = (den > 0.0) ? $sqrt(num / den) : 1.0;
    checks++;
    if (!(err < TOL)) begin
      failures++;
      $display("FAIL %s: relative error %f", name, err);
    end else begin
      $display("%-22s %2d x %2d x %2d  relative error %f", name, M, N, K, err);
    end
  endtask

  // output exponent base from the exact result's largest magnitude
  function automatic int result_base(int M, int N, int K);
    real mx, v;
    int e;
    mx = 0.0;
    for (int i = 0; i < M; i++)
      for (int j = 0; j < N; j++) begin
        v = 0.0;
        for (int k = 0; k < K; k++) v += bf16_to_real(opP[i][k]) * bf16_to_real(opQ[j][k]);
        if (v < 0) v = -v;
        if (v > mx) mx = v;
      end
    e = int'(real_to_bf16(mx) >> 7) & 8'hFF;
    return e - 28;
  endfunction

  // ------------------------------------------------------------ the step
  initial begin
    real err, y_err, num, den;
    int ob;
    for (int i = 0; i < MAXD; i++)
      for (int j = 0; j < MAXD; j++) begin
        mX[i][j] = real_to_bf16(gauss());
        mW[i][j] = real_to_bf16(0.02 * gauss());
        mA[i][j] = real_to_bf16(0.02 * gauss());
        mB[i][j] = real_to_bf16(0.005 * gauss());
        mG[i][j] = real_to_bf16(0.001 * gauss());
      end
    // a few activation outliers, as LLM activations have
    for (int i = 0; i < NB; i++) mX[i][$urandom_range(0, IC - 1)] = real_to_bf16(40.0 * gauss());
    repeat (3) @(posedge clk);
    rst_n <= 1;

    // forward: Y0 = X W^T
    opP = mX; opQ = mW;
    ob = result_base(NB, OC, IC); engine_mm(NB, OC, IC, ob);
    check_product("Y0 = X W^T", NB, OC, IC, err); mY0 = resC;
    // H = X A^T, stored in GSE form
    opP = mX; opQ = mA;
    ob = result_base(NB, R, IC); engine_mm(NB, R, IC, ob);
    check_product("H = X A^T", NB, R, IC, err); mH = resC; mHs = resS;
    // Y1 = H B^T
    opP = mH;
    for (int i = 0; i < OC; i++) for (int k = 0; k < R; k++) opQ[i][k] = mB[i][k];
    ob = result_base(NB, OC, R); engine_mm(NB, OC, R, ob);
    check_product("Y1 = H B^T", NB, OC, R, err); mY1 = resC;
    // Y = Y0 + Y1 against the exact layer output
    num = 0.0; den = 0.0;
    for (int i = 0; i < NB; i++)
      for (int j = 0; j < OC; j++) begin
        real ref_v, got;
        ref_v = 0.0;
        for (int k = 0; k < IC; k++) ref_v += bf16_to_real(mX[i][k]) * bf16_to_real(mW[j][k]);
        for (int q = 0; q < R; q++) begin
          real h;
          h = 0.0;
          for (int k = 0; k < IC; k++) h += bf16_to_real(mX[i][k]) * bf16_to_real(mA[q][k]);
          ref_v += h * bf16_to_real(mB[j][q]);
        end
        got = bf16_to_real(mY0[i][j]) + bf16_to_real(mY1[i][j]);
        num += (got - ref_v) ** 2; den += ref_v ** 2;
      end
    y_err = $sqrt(num / den);
    checks++;
    if (!(y_err < TOL)) begin failures++; $display("FAIL Y: relative error %f", y_err); end
    else $display("%-22s %2d x %2d            relative error %f", "Y = Y0 + Y1 (layer)", NB, OC, y_err);
    // the stored GSE copy of H is close to H
    num = 0.0; den = 0.0;
    for (int i = 0; i < NB; i++)
      for (int j = 0; j < R; j++) begin
        num += (bf16_to_real(mHs[i][j]) - bf16_to_real(mH[i][j])) ** 2;
        den += bf16_to_real(mH[i][j]) ** 2;
      end
    checks++;
    if (!($sqrt(num / den) < TOL)) begin failures++; $display("FAIL stored H error %f", $sqrt(num / den)); end
    else $display("%-22s                     relative error %f", "H stored as GSE", $sqrt(num / den));

    // backward: dB = G^T Hs   (P = G^T: oc x b, Q = Hs^T: r x b)
    for (int i = 0; i < OC; i++) for (int k = 0; k < NB; k++) opP[i][k] = mG[k][i];
    for (int j = 0; j < R; j++)  for (int k = 0; k < NB; k++) opQ[j][k] = mHs[k][j];
    ob = result_base(OC, R, NB); engine_mm(OC, R, NB, ob);
    check_product("dB = G^T H", OC, R, NB, err); mdB = resC;
    // T = G B   (P = G: b x oc, Q = B^T: r x oc)
    for (int i = 0; i < NB; i++) for (int k = 0; k < OC; k++) opP[i][k] = mG[i][k];
    for (int j = 0; j < R; j++)  for (int k = 0; k < OC; k++) opQ[j][k] = mB[k][j];
    ob = result_base(NB, R, OC); engine_mm(NB, R, OC, ob);
    check_product("T = G B", NB, R, OC, err); mT = resC;
    // dA = T^T X   (P = T^T: r x b, Q = X^T: ic x b)
    for (int i = 0; i < R; i++)  for (int k = 0; k < NB; k++) opP[i][k] = mT[k][i];
    for (int j = 0; j < IC; j++) for (int k = 0; k < NB; k++) opQ[j][k] = mX[k][j];
    ob = result_base(R, IC, NB); engine_mm(R, IC, NB, ob);
    check_product("dA = T^T X", R, IC, NB, err); mdA = resC;
    // dX = G W + T A   (P = G, Q = W^T: ic x oc;  P = T, Q = A^T: ic x r)
    for (int i = 0; i < NB; i++) for (int k = 0; k < OC; k++) opP[i][k] = mG[i][k];
    for (int j = 0; j < IC; j++) for (int k = 0; k < OC; k++) opQ[j][k] = mW[k][j];
    ob = result_base(NB, IC, OC); engine_mm(NB, IC, OC, ob);
    check_product("dX0 = G W", NB, IC, OC, err); mdX0 = resC;
    for (int i = 0; i < NB; i++) for (int k = 0; k < R; k++) opP[i][k] = mT[i][k];
    for (int j = 0; j < IC; j++) for (int k = 0; k < R; k++) opQ[j][k] = mA[k][j];
    ob = result_base(NB, IC, R); engine_mm(NB, IC, R, ob);
    check_product("dX1 = T A", NB, IC, R, err); mdX1 = resC;

    $display("engine cycles: %0d accepted groups in %0d cycles", busy_cycles, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
