// tb_ref_pkg: reference models used by the testbenches.
//
// Each function restates, in plain procedural code, what a block is meant to
// compute, so that a testbench can compare the hardware against it. Nothing
// here is shared with the RTL except the configuration types.
package tb_ref_pkg;
  import redy_pkg::*;

  // Bin of an exponent for ascending boundaries.
  function automatic int ref_bin(input int e, input logic [N_BINS-2:0][EXP_W-1:0] bound);
    int b = 0;
    for (int i = 0; i < N_BINS-1; i++) if (e >= int'(bound[i])) b = i + 1;
    return b;
  endfunction

  // DU in Q1.10 from a histogram, per-bin ED and n_log2 (saturating at 11 bits).
  function automatic int ref_du(input int hist[N_BINS], input logic [N_BINS-1:0][CNT_W-1:0] ed,
                                input int n_log2);
    longint s = 0;
    longint v;
    for (int i = 0; i < N_BINS; i++) begin
      int d = hist[i] - int'(ed[i]);
      s += (d < 0) ? -d : d;
    end
    if (n_log2 <= 10) v = s * (longint'(1) << (10 - n_log2));
    else              v = s / (longint'(1) << (n_log2 - 10));
    if (v > 2047) v = 2047;
    return int'(v);
  endfunction

  // Precision from DU (Algorithm 1, step 3).
  function automatic int ref_prec(input int du, input logic [N_COEF-1:0][DU_W-1:0] p, input bit bypass);
    if (bypass)            return 8;
    if (du > int'(p[0]))   return 8;
    if (du > int'(p[1]))   return 7;
    if (du > int'(p[2]))   return 6;
    if (du > int'(p[3]))   return 5;
    if (du > int'(p[4]))   return 4;
    return 3;
  endfunction

  // Whole ReDy decision for a group of FP32 activations.
  function automatic int ref_group_prec(input logic [31:0] acts[], input redy_cfg_t cfg);
    int hist[N_BINS];
    int k;
    int n = acts.size();
    foreach (hist[i]) hist[i] = 0;
    k = (cfg.sample_stride <= 1) ? 1 : int'(cfg.sample_stride);
    for (int i = 0; i < n; i += k) begin
      int b = ref_bin(int'(acts[i][30:23]), cfg.bound);
      if (hist[b] < 1023) hist[b]++;
    end
    return ref_prec(ref_du(hist, cfg.ed, int'(cfg.n_log2)), cfg.p, int'(cfg.depth) < N_BINS);
  endfunction

  // Value of a normal, non-negative FP32 bit pattern (zero for denormals).
  function automatic real fp2real(input logic [31:0] f);
    real m;
    if (f[30:23] == 0) return 0.0;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    return (f[31] ? -m : m) * (2.0 ** (real'(int'(f[30:23])) - 127.0));
  endfunction

  // FP32 bit pattern of a positive real, mantissa truncated.
  function automatic logic [31:0] real2fp(input real r);
    int e = 0;
    real m;
    if (r <= 0.0) return 32'd0;
    while (r >= 2.0 ** real'(e + 1)) e++;
    while (r < 2.0 ** real'(e)) e--;
    m = r / (2.0 ** real'(e)) - 1.0;
    return {1'b0, 8'(e + 127), 23'(longint'($floor(m * 8388608.0)))};
  endfunction

  // Uniform quantization, computed with real arithmetic.
  function automatic int ref_quant(input logic [31:0] a, input quant_cfg_t q, input int prec);
    real r, s, x;
    longint v;
    int d, qp, pmax;
    if (a[31] || a[30:23] == 0) v = 0;
    else if (a[30:23] == 8'hFF) v = longint'(1) << 40;
    else begin
      r = fp2real(a);
      s = real'(q.scale_m) * (2.0 ** real'(int'(q.scale_e)));
      x = r * s;
      if (x > 1.0e12) v = longint'(1) << 40;
      else v = longint'($floor(x + 0.5));
    end
    v = v - longint'(q.zero);
    if (v < 0) v = 0;
    if (v > 255) v = 255;
    d = 8 - prec;
    if (d <= 0) return int'(v);
    qp = int'((v + (longint'(1) << (d - 1))) >>> d);
    pmax = (1 << prec) - 1;
    return (qp > pmax) ? pmax : qp;
  endfunction

  // FP32 from an integer times 2^-frac, truncated mantissa, flush to zero.
  function automatic logic [31:0] ref_int2fp(input longint v, input int frac);
    int msb, ex;
    longint m;
    if (v <= 0) return 32'd0;
    msb = 0;
    for (int i = 0; i < 40; i++) if (v >= (longint'(1) << i)) msb = i;
    ex = 127 + msb - frac;
    if (ex <= 0) return 32'd0;
    if (msb >= 23) m = v >> (msb - 23);
    else           m = v << (23 - msb);
    return {1'b0, 8'(ex), 23'(m)};
  endfunction

  // Bit-serial crossbar result of output k: x[r] are the p-bit inputs,
  // cells[r*cols + c] the 2-bit cells, each column's sum per input bit is
  // clipped at 31 (5-bit ADC), weights are 4 cells (LSB slice first).
  function automatic longint ref_apu_out(input int x[], input int cells[], input int cols,
                                         input int k, input int p);
    longint tot = 0;
    for (int b = 0; b < p; b++)
      for (int j = 0; j < 4; j++) begin
        int s = 0;
        for (int r = 0; r < x.size(); r++)
          if ((x[r] >> b) & 1) s += cells[r*cols + 4*k + j];
        if (s > 31) s = 31;
        tot += longint'(s) << (2*j + b);
      end
    return tot << (8 - p);
  endfunction

endpackage
