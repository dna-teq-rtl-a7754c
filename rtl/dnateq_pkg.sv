// dnateq_pkg: types, constants and FP16 arithmetic shared by the exponential
// dot-product accelerator.
//
// A quantized tensor element is a byte {S, int}: S is the sign (1 = negative),
// int a 7-bit two's-complement exponent sign-extended from the layer's n bits
// (3 <= n <= 7). The n-bit code -(2^(n-1)) stands for the value zero. Weights
// and activations of one layer share n and the base b, so a product of two
// elements is +/- b^(intA+intW) and a dot product reduces to counting exponents.
//
// The FP16 helpers (used by the dequantizers) round to nearest, ties to even,
// and flush subnormal inputs and results to zero; results above the FP16 range
// become infinity. Flushing subnormals is a choice of this design: the source
// only says the dequantizer uses an FP16 multiplier.
package dnateq_pkg;

  localparam int N_CS     = 16;  // counter sets (output neurons) per PE
  localparam int N_ACT    = 8;   // activations quantized per batch
  localparam int EXP_W    = 7;   // exponent field width (worst case n = 7)
  localparam int CNT_W    = 8;   // array counter entry width
  localparam int ACC_W    = 16;  // sign-product accumulator width (term 4)
  localparam int AC1_DEPTH = 256; // 2^(n+1) for n = 7
  localparam int AC23_DEPTH = 128; // 2^n for n = 7
  localparam int BLUT_DEPTH = 256; // 2^(n+1) for n = 7
  localparam int ADDR_W   = 26;  // 32-bit word address inside one vault (4 GB / 16 vaults)
  localparam int COORD_W  = 2;   // mesh coordinate width (4 x 4 mesh)

  typedef struct packed {
    logic             s;
    logic [EXP_W-1:0] e;
  } qval_t;

  // Counter-set read select
  typedef enum logic [1:0] {SEL_ACC = 2'd0, SEL_AC1 = 2'd1, SEL_AC2 = 2'd2, SEL_AC3 = 2'd3} cs_sel_e;

  // Memory-controller commands issued by the host
  typedef enum logic [1:0] {MC_RD_PE = 2'd0, MC_RD_NET = 2'd1, MC_WR_PE = 2'd2} mc_op_e;

  typedef struct packed {
    mc_op_e              op;
    logic [ADDR_W-1:0]   addr;      // first local word
    logic [15:0]         len;       // number of words
    logic [COORD_W-1:0]  dst_x;     // MC_RD_NET: destination tile
    logic [COORD_W-1:0]  dst_y;
    logic [ADDR_W-1:0]   dst_addr;  // MC_RD_NET: first word in the destination vault
  } mc_cmd_t;

  // Single-flit network packet: a remote write of one word
  typedef struct packed {
    logic [COORD_W-1:0] dst_x;
    logic [COORD_W-1:0] dst_y;
    logic [ADDR_W-1:0]  addr;
    logic [31:0]        data;
  } flit_t;

  // n-bit zero code -(2^(n-1)) sign-extended to EXP_W bits
  function automatic logic [EXP_W-1:0] zero_code(input logic [2:0] nbits);
    logic [EXP_W-1:0] z;
    z = '1;
    z = z << (nbits - 3'd1);
    return z;
  endfunction

  // ---------------------------------------------------------------- FP16 ---
  // Round a positive significand to FP16. sig holds the significand with its
  // leading one at bit 31; the value is sig/2^31 * 2^e. sticky flags nonzero
  // bits below sig.
  function automatic logic [15:0] fp16_pack(input logic sgn, input int e,
                                            input logic [31:0] sig, input logic sticky);
    logic [11:0] m;
    logic        g, r;
    int          ee;
    m  = {1'b0, sig[31:21]};
    g  = sig[20];
    r  = (|sig[19:0]) | sticky;
    if (g && (r || m[0])) m = m + 12'd1;
    ee = e;
    if (m[11]) begin
      m  = m >> 1;
      ee = ee + 1;
    end
    if (ee > 15)       return {sgn, 5'h1f, 10'h0};
    else if (ee < -14) return {sgn, 15'h0};
    else               return {sgn, 5'(ee + 15), m[9:0]};
  endfunction

  // Leading-one position of a 32-bit word (0 if the word is zero)
  function automatic int lead1(input logic [31:0] v);
    int p;
    p = 0;
    for (int i = 0; i < 32; i++) if (v[i]) p = i;
    return p;
  endfunction

  function automatic logic fp16_is_zero(input logic [15:0] a);
    return a[14:10] == 5'h0;  // zero or subnormal (flushed)
  endfunction

  function automatic logic fp16_is_inf(input logic [15:0] a);
    return a[14:10] == 5'h1f;
  endfunction

  function automatic logic [15:0] fp16_mul(input logic [15:0] a, input logic [15:0] b);
    logic        s;
    logic [21:0] p;
    int          e;
    logic [31:0] sig;
    s = a[15] ^ b[15];
    if (fp16_is_zero(a) || fp16_is_zero(b)) return {s, 15'h0};
    if (fp16_is_inf(a) || fp16_is_inf(b))   return {s, 5'h1f, 10'h0};
    p = {1'b1, a[9:0]} * {1'b1, b[9:0]};
    e = int'(a[14:10]) + int'(b[14:10]) - 30;
    if (p[21]) begin
      sig = {p, 10'h0};
      e   = e + 1;
    end else begin
      sig = {p[20:0], 11'h0};
    end
    return fp16_pack(s, e, sig, 1'b0);
  endfunction

  function automatic logic [15:0] fp16_add(input logic [15:0] a, input logic [15:0] b);
    logic [15:0] x, y;
    int          d, ex, lz;
    logic [40:0] mx, my, sum;
    logic        sticky;
    logic [31:0] sig;
    if (fp16_is_zero(a) && fp16_is_zero(b)) return {a[15] & b[15], 15'h0};
    if (fp16_is_zero(a)) return b;
    if (fp16_is_zero(b)) return a;
    if (fp16_is_inf(a)) return a;
    if (fp16_is_inf(b)) return b;
    // x gets the larger magnitude
    if (a[14:0] >= b[14:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    d  = int'(x[14:10]) - int'(y[14:10]);
    ex = int'(x[14:10]) - 15;
    mx = {1'b0, 1'b1, x[9:0], 29'h0};
    my = {1'b0, 1'b1, y[9:0], 29'h0};
    sticky = 1'b0;
    if (d > 29) begin
      sticky = 1'b1;
      my     = '0;
    end else if (d > 0) begin
      my = my >> d;  // 29 spare bits keep every shifted-out bit
    end
    if (x[15] == y[15]) sum = mx + my;
    else                sum = mx - my - 41'(sticky);
    if (sum == '0) return 16'h0000;
    // leading one of sum: bit 39 (carry) or lower
    lz  = lead1(sum[40:9]) + 9;
    if (sum[40:9] == '0) lz = lead1(sum[31:0]);
    ex  = ex + (lz - 39);
    sum = sum << (40 - lz);
    sig = sum[40:9];
    return fp16_pack(x[15], ex, sig, (|sum[8:0]) | sticky);
  endfunction

  // Signed integer (up to 16 bits) to FP16
  function automatic logic [15:0] int16_to_fp16(input logic signed [15:0] v);
    logic        s;
    logic [31:0] mag;
    int          p;
    if (v == 0) return 16'h0000;
    s   = v[15];
    mag = s ? 32'(-32'(v)) : 32'(v);
    p   = lead1(mag);
    return fp16_pack(s, p, mag << (31 - p), 1'b0);
  endfunction

endpackage
