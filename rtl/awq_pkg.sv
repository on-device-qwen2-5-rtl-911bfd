// awq_pkg -- types, sizes and FP32 arithmetic shared by the AWQ matrix-vector
// accelerator.
//
// The accelerator multiplies an FP32 activation vector by an INT4 weight
// matrix quantised with AWQ (one FP16 scale and one INT4 zero per output
// channel and per group of GS input channels). Weights travel from DRAM in
// "AWQ macros": a run of 128-bit beats holding 8 scales, 8 zeros and the
// GS x 8 INT4 weights of one group of 8 output channels.
//
// Numbers that follow the paper: group size 64, 128-bit beats, 8 weights
// per 32-bit qweight word, 8x8 processing elements, 4 channels, FP32
// arithmetic, FP16 scales. The FP32 operators below are this design's own:
// round-to-nearest-even, subnormal inputs and results flushed to zero,
// infinities and NaNs passed through without IEEE exception semantics.
package awq_pkg;

  // ---- sizes ---------------------------------------------------------------
  localparam int unsigned GS_DEFAULT   = 64;   // AWQ group size used by the design
  localparam int unsigned BEAT_W       = 128;  // data width of one AXI channel
  localparam int unsigned N_LANES      = 4;    // AXI channels / MACRO_MAC units
  localparam int unsigned N_OC         = 8;    // output channels per macro (INT4 per 32-bit word)
  localparam int unsigned PE_ROWS      = 8;    // input channels held by the PE array at once
  localparam int unsigned WORDS_PER_BEAT = BEAT_W / 32;
  // Qwen2.5-0.5B intermediate (FFN) size: the longest input vector of any
  // projection, hence the default depth of the activation buffers.
  localparam int unsigned ACT_DEPTH_DEFAULT = 4864;

  typedef logic [31:0] fp32_t;
  typedef logic [15:0] fp16_t;
  typedef logic [3:0]  int4_t;

  // One unpacked row: the 8 INT4 weights of one input channel for the 8
  // output channels of a macro, together with that macro's zeros and scales.
  typedef struct packed {
    int4_t [N_OC-1:0] qw;
    int4_t [N_OC-1:0] zero;
    fp16_t [N_OC-1:0] scale;
    logic             last;   // last row of the macro
  } unpacked_row_t;

  // Result of one group of 8 output channels.
  typedef struct packed {
    fp32_t [N_OC-1:0] sum;
    logic  [15:0]     block;  // index of the 8-channel block within the lane's run
  } result_t;

  // ---- AXI4 read channel bundles (AR and R only: the accelerator never
  // writes to memory) ---------------------------------------------------------
  localparam int unsigned AXI_AW = 40;
  typedef struct packed {
    logic [AXI_AW-1:0] addr;
    logic [7:0]        len;
    logic [2:0]        size;
    logic [1:0]        burst;
    logic              valid;
  } axi_ar_t;

  typedef struct packed {
    logic [BEAT_W-1:0] data;
    logic [1:0]        resp;
    logic              last;
    logic              valid;
  } axi_r_t;

  // ---- FP32 helpers ----------------------------------------------------------
  function automatic logic [4:0] lzc27(input logic [26:0] v);
    logic [4:0] n;
    n = 5'd27;
    for (int i = 0; i <= 26; i++)
      if (v[i]) n = 5'(26 - i);
    return n;
  endfunction

  // FP16 -> FP32, exact. Subnormal FP16 values are flushed to zero.
  function automatic fp32_t fp16_to_fp32(input fp16_t h);
    logic [4:0] e;
    e = h[14:10];
    if (e == 5'd0)       return {h[15], 31'd0};
    else if (e == 5'h1f) return {h[15], 8'hff, h[9:0], 13'd0};
    else                 return {h[15], 8'(e) + 8'd112, h[9:0], 13'd0};
  endfunction

  // Small signed integer (-16..15) -> FP32, exact.
  function automatic fp32_t int5_to_fp32(input logic signed [4:0] v);
    logic [4:0] mag;
    logic [7:0] e;
    logic [22:0] m;
    int p;
    mag = v[4] ? 5'(-v) : 5'(v);
    if (mag == 5'd0) return 32'd0;
    p = 0;
    for (int i = 0; i < 5; i++) if (mag[i]) p = i;
    e = 8'(127 + p);
    m = 23'({18'd0, mag} << (23 - p));
    return {v[4], e, m};
  endfunction

  function automatic fp32_t fp32_mul(input fp32_t a, input fp32_t b);
    logic        s;
    logic [7:0]  ea, eb;
    logic [47:0] prod;
    logic [23:0] mant;
    logic        g, st;
    logic signed [10:0] e;
    s  = a[31] ^ b[31];
    ea = a[30:23];
    eb = b[30:23];
    if (ea == 8'hff || eb == 8'hff) return {s, 8'hff, 23'd0};
    if (ea == 8'd0  || eb == 8'd0)  return {s, 31'd0};
    prod = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = 11'(ea) + 11'(eb) - 11'sd127;
    if (prod[47]) begin
      mant = {1'b0, prod[46:24]};
      g    = prod[23];
      st   = |prod[22:0];
      e    = e + 11'sd1;
    end else begin
      mant = {1'b0, prod[45:23]};
      g    = prod[22];
      st   = |prod[21:0];
    end
    if (g && (st || mant[0])) mant = mant + 24'd1;
    if (mant[23]) e = e + 11'sd1;          // rounding carried out: mantissa is 0
    if (e >= 11'sd255) return {s, 8'hff, 23'd0};
    if (e <= 11'sd0)   return {s, 31'd0};
    return {s, e[7:0], mant[22:0]};
  endfunction

  function automatic fp32_t fp32_add(input fp32_t a, input fp32_t b);
    fp32_t x, y;
    logic [7:0]  ex, ey;
    logic [7:0]  d;
    logic [26:0] mx, my, sh;
    logic [27:0] sum;
    logic [4:0]  lz;
    logic signed [10:0] e;
    logic [23:0] mant;
    logic        s;
    // flush subnormal inputs
    x = (a[30:23] == 8'd0) ? {a[31], 31'd0} : a;
    y = (b[30:23] == 8'd0) ? {b[31], 31'd0} : b;
    if (x[30:23] == 8'hff) return x;
    if (y[30:23] == 8'hff) return y;
    if (x[30:0] == 31'd0 && y[30:0] == 31'd0) return {x[31] & y[31], 31'd0};
    if (x[30:0] == 31'd0) return y;
    if (y[30:0] == 31'd0) return x;
    // order by magnitude
    if (y[30:0] > x[30:0]) begin
      fp32_t t;
      t = x; x = y; y = t;
    end
    s  = x[31];
    ex = x[30:23];
    ey = y[30:23];
    d  = ex - ey;
    mx = {1'b1, x[22:0], 3'b000};
    my = {1'b1, y[22:0], 3'b000};
    if (d >= 8'd27) sh = 27'd1;              // only the sticky bit survives
    else begin
      sh = my >> d;
      if ((my & ((27'd1 << d) - 27'd1)) != 27'd0) sh[0] = 1'b1;
    end
    e = 11'(ex);
    if (x[31] == y[31]) begin
      sum = {1'b0, mx} + {1'b0, sh};
      if (sum[27]) begin
        sum = {1'b0, sum[27:2], sum[1] | sum[0]};
        e   = e + 11'sd1;
      end
    end else begin
      sum = {1'b0, mx} - {1'b0, sh};
      if (sum == 28'd0) return 32'd0;
      lz  = lzc27(sum[26:0]);
      sum = sum << lz;
      e   = e - 11'(lz);
    end
    mant = {1'b0, sum[25:3]};
    if (sum[2] && (sum[1] || sum[0] || mant[0])) mant = mant + 24'd1;
    if (mant[23]) e = e + 11'sd1;
    if (e >= 11'sd255) return {s, 8'hff, 23'd0};
    if (e <= 11'sd0)   return {s, 31'd0};
    return {s, e[7:0], mant[22:0]};
  endfunction

endpackage
