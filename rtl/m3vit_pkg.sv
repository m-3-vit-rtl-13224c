// m3vit_pkg: shared sizes, number format and fixed-point helpers of the
// M3ViT backbone accelerator.
//
// Every activation, weight and parameter is a signed 16-bit fixed-point word
// with FRAC = 8 fraction bits (Q7.8). Dot products are accumulated exactly in
// ACC_W bits and brought back to Q7.8 with an arithmetic shift and saturation.
// The non-linear functions (GELU, exp) use simple hardware approximations;
// they are this design's own choice, the paper does not say how the FPGA
// evaluates them. The model sizes follow the paper's ViT-small MoE backbone:
// 12 layers (6 ViT, 6 MoE), 12 heads, 16 experts with top-4 routing and
// experts four times narrower than the ViT MLP.
package m3vit_pkg;

  localparam int DATA_W = 16;
  localparam int FRAC   = 8;
  localparam int ACC_W  = 48;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Which part of a layer the shared hardware is running (Fig. 3 path 1-6).
  typedef enum logic [1:0] {LAYER_VIT = 2'd0, LAYER_MOE = 2'd1} layer_type_e;

  // Saturate a wide value to a data word.
  function automatic data_t sat16(input logic signed [63:0] v);
    if (v > 64'sd32767)       return 16'sh7fff;
    else if (v < -64'sd32768) return 16'sh8000;
    else                      return data_t'(v);
  endfunction

  // Scale an exact accumulator (2*FRAC fraction bits) back to Q7.8.
  function automatic data_t acc_to_data(input acc_t a);
    logic signed [63:0] w;
    w = 64'(a) >>> FRAC;
    return sat16(w);
  endfunction

  // Q7.8 product of two Q7.8 words.
  function automatic data_t qmul(input data_t a, input data_t b);
    logic signed [63:0] w;
    w = (64'(a) * 64'(b)) >>> FRAC;
    return sat16(w);
  endfunction

  // Q7.8 sum with saturation.
  function automatic data_t qadd(input data_t a, input data_t b);
    return sat16(64'(a) + 64'(b));
  endfunction

  // GELU approximated as x * sigmoid(1.702 x) with the sigmoid replaced by
  // the straight line 0.5 + 1.702 x / 6 clamped to [0, 1]: zero below
  // -1.76, identity above +1.76, a quadratic in between (largest deviation
  // from the exact GELU about 0.07). 18591 = round(2^16 * 1.702 / 6).
  function automatic data_t gelu_q(input data_t x);
    logic signed [63:0] t, p;
    t = ((64'(x) * 64'sd18591) >>> 8) + 64'sd32768;   // Q16
    if (t < 0)              t = 0;
    else if (t > 64'sd65536) t = 64'sd65536;
    p = (64'(x) * t) >>> 16;
    return sat16(p);
  endfunction

  // exp(d) for d <= 0 in Q7.8, result in Q0.16 (65536 = 1.0), computed as
  // 2^(d*log2 e) with a linear approximation of the fractional power of two.
  function automatic logic [16:0] exp_q16(input data_t d);
    logic [31:0] z;   // -d * log2(e), Q8, non-negative
    logic [31:0] n, f;
    logic [16:0] m;
    if (d >= 0) return 17'd65536;
    z = 32'((-32'(d) * 32'sd369) >>> 8);
    n = z >> 8;
    f = z & 32'hff;
    m = 17'(32'd65536 - f * 32'd128);
    if (n > 16) return 17'd0;
    return m >> n;
  endfunction

  // floor(256 / sqrt(n)) for elaboration-time constants.
  function automatic int inv_sqrt_q8(input int n);
    int r;
    r = 0;
    while ((r + 1) * (r + 1) * n <= 65536) r++;
    return r;
  endfunction

  // floor(2^24 / n) for division by a constant length.
  function automatic longint recip_q24(input int n);
    return (longint'(1) << 24) / longint'(n);
  endfunction

  function automatic int clog2(input int n);
    int r;
    r = 0;
    while ((1 << r) < n) r++;
    return (r < 1) ? 1 : r;
  endfunction

endpackage
