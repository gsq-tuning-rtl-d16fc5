// tb_gse_ref_pkg -- reference models for the GSE-INT engine testbenches.
//
// Written independently of the RTL: BF16 values are handled as real
// numbers, quantization divides by the LSB weight and rounds with $floor,
// and BF16 results are formed from the IEEE double bit pattern of the
// exact value. Only the accumulator model has to follow the RTL's integer
// alignment rule (shift the smaller-exponent operand right, keep the
// larger exponent), since that rule defines the result bit for bit.
package tb_gse_ref_pkg;

  function automatic real pow2(int n);
    real r;
    r = 1.0;
    if (n >= 0) for (int i = 0; i < n; i++) r = r * 2.0;
    else        for (int i = 0; i < -n; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real bf16_to_real(logic [15:0] b);
    real v;
    if (b[14:7] == 8'd0) v = (real'(b[6:0]) / 128.0) * pow2(-126);
    else v = (1.0 + real'(b[6:0]) / 128.0) * pow2(int'(b[14:7]) - 127);
    return b[15] ? -v : v;
  endfunction

  // Round to nearest even; saturate to the largest finite value above the
  // range; flush below the normal range to zero.
  function automatic logic [15:0] real_to_bf16(real r);
    logic [63:0] d;
    int          be;
    logic [6:0]  man;
    logic        g, st;
    logic [7:0]  mr;
    if (r == 0.0) return 16'h0000;
    d   = $realtobits(r);
    be  = int'(d[62:52]) - 1023 + 127;
    man = d[51:45];
    g   = d[44];
    st  = |d[43:0];
    mr  = {1'b0, man} + 8'(g && (st || man[0]));
    if (mr[7]) be++;
    if (be <= 0) return 16'h0000;
    if (be >= 255) return {d[63], 15'h7F7F};
    return {d[63], 8'(be), mr[6:0]};
  endfunction

  // Random BF16 value with an exponent field in [elo, ehi] (0 gives zero).
  function automatic logic [15:0] rand_bf16(int elo, int ehi);
    int e;
    e = elo + int'($urandom_range(0, ehi - elo));
    if (e <= 0) return 16'h0000;
    return {1'($urandom), 8'(e), 7'($urandom)};
  endfunction

  typedef struct {
    int unsigned ecode;
    bit          sign[];
    int unsigned man[];
    bit          sat;
    bit          uflow;
  } gse_group_t;

  // Quantize one group to GSE: shared exponent from the largest exponent
  // field, clamped to [base, base + 2^ew - 1]; mantissa = |x| / lsb
  // rounded half up and clamped to 2^mw - 1.
  function automatic gse_group_t quantize(logic [15:0] x[], int base, int mw, int ew);
    gse_group_t q;
    int  emax, eeff;
    real lsb, t;
    int  mmax;
    mmax = (1 << mw) - 1;
    q.sign = new[x.size()];
    q.man  = new[x.size()];
    q.sat = 0; q.uflow = 0;
    emax = 0;
    // exponent of the largest magnitude: log2 of the value, as an integer
    foreach (x[i]) begin
      real a; int e;
      a = bf16_to_real(x[i]);
      if (a < 0) a = -a;
      if (a != 0.0) begin
        e = 127;
        while (a >= 2.0) begin a = a / 2.0; e++; end
        while (a < 1.0 && e > 1) begin a = a * 2.0; e--; end
        if (e > emax) emax = e;
      end
    end
    eeff = emax;
    if (eeff < base) begin eeff = base; q.uflow = (emax != 0); end
    if (eeff > base + (1 << ew) - 1) eeff = base + (1 << ew) - 1;
    q.ecode = eeff - base;
    lsb = pow2(eeff - 127 - (mw - 1));
    foreach (x[i]) begin
      t = bf16_to_real(x[i]);
      if (t < 0) t = -t;
      t = $floor(t / lsb + 0.5);
      if (t > real'(mmax)) begin t = real'(mmax); q.sat = 1; end
      q.man[i]  = int'(t);
      q.sign[i] = x[i][15] && (q.man[i] != 0);
    end
    return q;
  endfunction

  function automatic longint dot(gse_group_t a, gse_group_t b);
    longint s;
    s = 0;
    foreach (a.man[i]) begin
      if (a.sign[i] != b.sign[i]) s -= longint'(a.man[i]) * longint'(b.man[i]);
      else                        s += longint'(a.man[i]) * longint'(b.man[i]);
    end
    return s;
  endfunction

  // Arithmetic right shift rounding toward minus infinity.
  function automatic longint asr(longint v, int n);
    if (n >= 62) return (v < 0) ? -1 : 0;
    if (v >= 0) return v / (longint'(1) << n);
    return -((-v + (longint'(1) << n) - 1) / (longint'(1) << n));
  endfunction

  // One accumulation step of a PE with an acc_w-bit saturating register.
  function automatic void acc_step(inout longint acc, inout int aexp,
                                   input longint p, input int pexp,
                                   input bit first, input int acc_w);
    longint lim, s;
    lim = (longint'(1) << (acc_w - 1));
    if (first || acc == 0) begin acc = p; aexp = pexp; return; end
    if (p == 0) return;
    if (pexp >= aexp) begin s = asr(acc, pexp - aexp) + p; aexp = pexp; end
    else              s = acc + asr(p, aexp - pexp);
    if (s > lim - 1) s = lim - 1;
    if (s < -lim)    s = -lim;
    acc = s;
  endfunction

endpackage
