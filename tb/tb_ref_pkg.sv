// tb_ref_pkg: reference models for the testbenches.
//
// FP16 is modelled with double-precision reals: a value is decoded exactly,
// an operation is carried out exactly in double precision (all FP16 products
// and sums used here are exact in double), and the result is rounded to FP16
// by real_to_fp16 (nearest, ties to even; results below 2^-14 flush to zero,
// above the range become infinity). This is independent of the RTL's integer
// implementation.
//
// The job model builds the input word stream of one PE job (random
// activations and weights) and computes the expected 16 outputs, following
// the exponential dot product: quantize activations by boundary search, count
// exponent sums / exponents / signs per neuron in 8-bit wrapping counters, then
// dequantize term by term in FP16 in the same order as the hardware.
package tb_ref_pkg;

  function automatic real fp16_to_real(input logic [15:0] h);
    real m;
    int  e;
    if (h[14:10] == 5'd0) return 0.0;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    e = int'(h[14:10]) - 15;
    m = m * (2.0 ** e);
    return h[15] ? -m : m;
  endfunction

  function automatic logic [15:0] real_to_fp16(input real x);
    logic [63:0] b;
    logic        s, g, st;
    int          e;
    logic [52:0] m53;
    logic [11:0] m;
    if (x == 0.0) return 16'h0000;
    b   = $realtobits(x);
    s   = b[63];
    e   = int'(b[62:52]) - 1023;
    m53 = {1'b1, b[51:0]};
    m   = {1'b0, m53[52:42]};
    g   = m53[41];
    st  = |m53[40:0];
    if (g && (st || m[0])) m = m + 1;
    if (m[11]) begin m = m >> 1; e = e + 1; end
    if (e > 15)  return {s, 5'h1f, 10'h0};
    if (e < -14) return {s, 15'h0};
    return {s, 5'(e + 15), m[9:0]};
  endfunction

  function automatic logic [15:0] rmul(input logic [15:0] a, input logic [15:0] b);
    return real_to_fp16(fp16_to_real(a) * fp16_to_real(b));
  endfunction

  function automatic logic [15:0] radd(input logic [15:0] a, input logic [15:0] b);
    return real_to_fp16(fp16_to_real(a) + fp16_to_real(b));
  endfunction

  function automatic logic [15:0] rint(input int v);
    return real_to_fp16(real'(v));
  endfunction

  // ------------------------------------------------------------ job model ---
  localparam int MAXB = 16;            // batches
  localparam int MAXI = 8 * MAXB;      // inputs

  class job_t;
    int          n;                    // exponent bits
    int          nb;                   // batches
    logic [3:0]  term_en;
    logic [15:0] bnd   [128];
    logic [15:0] blut  [256];
    logic [15:0] scl   [4];
    logic [15:0] act   [MAXI];         // FP16 activations
    logic [7:0]  aq    [MAXI];         // expected quantized activations
    logic [7:0]  wq    [16][MAXI];     // weights {S, int}
    logic [15:0] out   [16];
    int          n_zero, n_neg, n_clip;

    function new(int n_, int nb_, logic [3:0] ten, int seed);
      real b;
      int  half, top;
      void'($urandom(seed));
      n = n_; nb = nb_; term_en = ten;
      n_zero = 0; n_neg = 0; n_clip = 0;
      half = 1 << (n - 1);
      top  = (1 << n) - 1;
      b    = 2.0 ** (8.0 / real'(1 << n));
      // boundaries: first one just above zero, then geometric, last clipped
      for (int k = 0; k < 128; k++) bnd[k] = 16'hffff;
      bnd[0] = 16'h0001;
      for (int k = 1; k < (1 << n); k++) bnd[k] = real_to_fp16(0.02 * (b ** real'(k)));
      bnd[top] = 16'h7800;  // values at or above 32768 clip to the top code
      for (int i = 0; i < 256; i++) blut[i] = real_to_fp16(b ** real'(i - (1 << n)) );
      scl[0] = 16'h3c00;  // 1.0
      scl[1] = 16'h3800;  // 0.5
      scl[2] = 16'hb400;  // -0.25
      scl[3] = 16'h3000;  // 0.125
      for (int i = 0; i < 8 * nb; i++) begin
        int r;
        r = $urandom_range(0, 15);
        if (r == 0)       act[i] = 16'h0000;
        else if (r == 1)  act[i] = 16'h7a00;          // clips
        else              act[i] = 16'(($urandom_range(0, 1) << 15) | $urandom_range(16'h1c00, 16'h4c00));
        aq[i] = quant(act[i]);
        for (int j = 0; j < 16; j++) begin
          int e;
          e = $urandom_range(0, top) - half;          // includes the zero code
          wq[j][i] = {1'($urandom_range(0, 1)), 7'(e)};
        end
      end
      compute();
    endfunction

    function logic [7:0] quant(logic [15:0] a);
      int q;
      q = (1 << n) - 1;
      for (int k = (1 << n) - 1; k >= 0; k--) if (a[14:0] < bnd[k][14:0]) q = k;
      if (a[14:0] >= bnd[(1 << n) - 1][14:0]) n_clip++;
      return {a[15], 7'(q - (1 << (n - 1)))};
    endfunction

    function void compute();
      int half;
      half = 1 << (n - 1);
      for (int j = 0; j < 16; j++) begin
        logic signed [7:0]  c1 [256];
        logic signed [7:0]  c2 [128];
        logic signed [7:0]  c3 [128];
        logic signed [15:0] c4;
        logic [15:0] o, t;
        for (int k = 0; k < 256; k++) c1[k] = 0;
        for (int k = 0; k < 128; k++) begin c2[k] = 0; c3[k] = 0; end
        c4 = 0;
        for (int i = 0; i < 8 * nb; i++) begin
          int ea, ew, d;
          ea = int'(signed'(aq[i][6:0]));
          ew = int'(signed'(wq[j][i][6:0]));
          if (ea == -half || ew == -half) begin
            if (j == 0) n_zero++;
            continue;
          end
          d = (aq[i][7] ^ wq[j][i][7]) ? -1 : 1;
          if (d < 0 && j == 0) n_neg++;
          if (term_en[0]) c1[ea + ew + 2 * half] += 8'(d);
          if (term_en[1]) c2[ew + half] += 8'(d);
          if (term_en[2]) c3[ea + half] += 8'(d);
          if (term_en[3]) c4 += 16'(d);
        end
        o = 16'h0000;
        if (term_en[0]) begin
          t = 0;
          for (int k = 0; k < (1 << (n + 1)); k++) t = radd(t, rmul(rint(int'(c1[k])), blut[k]));
          o = radd(o, rmul(scl[0], t));
        end
        if (term_en[1]) begin
          t = 0;
          for (int k = 0; k < (1 << n); k++) t = radd(t, rmul(rint(int'(c2[k])), blut[k + half]));
          o = radd(o, rmul(scl[1], t));
        end
        if (term_en[2]) begin
          t = 0;
          for (int k = 0; k < (1 << n); k++) t = radd(t, rmul(rint(int'(c3[k])), blut[k + half]));
          o = radd(o, rmul(scl[2], t));
        end
        if (term_en[3]) o = radd(o, rmul(scl[3], rint(int'(c4))));
        out[j] = o;
      end
    endfunction

    // Input stream word w of the job (4 activation words + 32 weight words per batch)
    function logic [31:0] word(int w);
      int bt, k;
      bt = w / 36;
      k  = w % 36;
      if (k < 4) return {act[8 * bt + 2 * k + 1], act[8 * bt + 2 * k]};
      k = k - 4;
      return {wq[4 * (k % 4) + 3][8 * bt + k / 4], wq[4 * (k % 4) + 2][8 * bt + k / 4],
              wq[4 * (k % 4) + 1][8 * bt + k / 4], wq[4 * (k % 4)][8 * bt + k / 4]};
    endfunction

    function int nwords();
      return 36 * nb;
    endfunction
  endclass

endpackage
