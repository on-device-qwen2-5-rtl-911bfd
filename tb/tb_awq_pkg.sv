// tb_awq_pkg -- stimulus generators and reference models for the accelerator
// testbenches.
//
// Weights, scales, zeros and activations are generated from a hash of their
// position, so a testbench and the memory model agree on the data without
// storing it. The reference computes the dequantised dot products in the
// simulator's real arithmetic, rounding to single precision after every
// operation in the order the hardware uses; products and sums of two
// single-precision numbers are exact or correctly rounded in double
// precision, so the reference matches a correct FP32 datapath bit for bit.
package tb_awq_pkg;

  localparam int unsigned BEAT_BYTES = 16;

  function automatic logic [63:0] mix64(input logic [63:0] x);
    x = x ^ (x >> 33);
    x = x * 64'hff51afd7ed558ccd;
    x = x ^ (x >> 33);
    x = x * 64'hc4ceb9fe1a85ec53;
    x = x ^ (x >> 33);
    return x;
  endfunction

  // FP16 scale with a magnitude between 2^-5 and 2^1, random sign
  function automatic logic [15:0] gen_scale(input logic [63:0] h);
    logic [4:0] e;
    e = 5'(10 + (h[7:0] % 7));
    return {h[8], e, h[18:9]};
  endfunction

  // One 128-bit beat of the macro memory at byte address addr. The memory
  // holds macros of bpm beats back to back from address 0.
  function automatic logic [127:0] gen_beat(input longint unsigned addr, input int unsigned bpm,
                                            input logic [31:0] seed);
    longint unsigned beat_idx;
    int unsigned b;
    logic [127:0] d;
    beat_idx = addr / BEAT_BYTES;
    b = int'(beat_idx % bpm);
    for (int i = 0; i < 4; i++) d[32*i +: 32] = 32'(mix64({seed, 32'(beat_idx)} ^ 64'(i * 77 + 1)));
    if (b == 0) begin
      for (int j = 0; j < 8; j++) d[16*j +: 16] = gen_scale(mix64({seed, 32'(beat_idx)} + 64'(j * 131 + 7)));
    end else if (b == 1) begin
      d[127:32] = '0;
    end
    return d;
  endfunction

  // FP32 activation x[k], magnitude in [0.5, 2), random sign
  function automatic logic [31:0] gen_act(input int unsigned k, input logic [31:0] seed);
    logic [63:0] h;
    h = mix64({seed ^ 32'h5a5a_1234, 32'(k)});
    return {h[40], 8'(126 + h[0]), h[23:1]};
  endfunction

  // ---- single-precision reference arithmetic -------------------------------
  // double -> single, round to nearest even (normal range only; tiny
  // results flush to zero like the hardware)
  function automatic logic [31:0] f32(input real r);
    logic [63:0] d;
    logic [10:0] e;
    int          e32;
    logic [23:0] m;
    logic [28:0] rest;
    d = $realtobits(r);
    e = d[62:52];
    if (e == 0) return {d[63], 31'd0};
    e32 = int'(e) - 1023 + 127;
    m = {1'b0, d[51:29]};
    rest = d[28:0];
    if (rest[28] && ((rest[27:0] != 0) || m[0])) m = m + 1;
    if (m[23]) e32 = e32 + 1;
    if (e32 >= 255) return {d[63], 8'hff, 23'd0};
    if (e32 <= 0) return {d[63], 31'd0};
    return {d[63], 8'(e32), m[22:0]};
  endfunction
  function automatic real r32(input logic [31:0] b);
    if (b[30:23] == 0) return $bitstoreal({b[31], 63'd0});
    return $bitstoreal({b[31], 11'(int'(b[30:23]) - 127 + 1023), b[22:0], 29'd0});
  endfunction
  function automatic logic [31:0] fadd(input logic [31:0] a, input logic [31:0] b);
    return f32(r32(a) + r32(b));
  endfunction
  function automatic logic [31:0] fmul(input logic [31:0] a, input logic [31:0] b);
    return f32(r32(a) * r32(b));
  endfunction
  function automatic logic [31:0] h2f(input logic [15:0] h);
    int e;
    real m;
    if (h[14:10] == 0) return {h[15], 31'd0};
    e = int'(h[14:10]) - 15;
    m = (1.0 + real'(h[9:0]) / 1024.0) * (2.0 ** e);
    return f32(h[15] ? -m : m);
  endfunction

  // PE: (q - z) * (x * s)
  function automatic logic [31:0] ref_pe(input logic [3:0] q, input logic [3:0] z,
                                         input logic [15:0] s, input logic [31:0] x);
    logic [31:0] xs;
    xs = fmul(x, h2f(s));
    return fmul(f32(real'(int'(q) - int'(z))), xs);
  endfunction

  // 8-input pairwise tree ((0+1)+(2+3))+((4+5)+(6+7))
  function automatic logic [31:0] ref_tree(input logic [31:0] v [8]);
    logic [31:0] a [4];
    logic [31:0] b [2];
    for (int i = 0; i < 4; i++) a[i] = fadd(v[2*i], v[2*i+1]);
    for (int i = 0; i < 2; i++) b[i] = fadd(a[2*i], a[2*i+1]);
    return fadd(b[0], b[1]);
  endfunction

  // The 8 outputs of the output block whose macros start at byte offset
  // blk_addr of the macro memory: K = n_macros * gs input channels, blocks of
  // 8 rows reduced by the pairwise tree, block sums accumulated in order.
  function automatic logic [7:0][31:0] ref_block(input longint unsigned blk_addr,
                                                 input int unsigned n_macros, input int unsigned gs,
                                                 input logic [31:0] wseed, input logic [31:0] aseed);
    int unsigned bpm;
    logic [7:0][31:0] acc;
    logic [31:0] col [8][8];
    logic [127:0] sb, zb, qb;
    logic [31:0] x;
    longint unsigned maddr;
    bpm = 2 + gs / 4;
    acc = '0;
    for (int unsigned m = 0; m < n_macros; m++) begin
      maddr = blk_addr + longint'(m) * bpm * BEAT_BYTES;
      sb = gen_beat(maddr, bpm, wseed);
      zb = gen_beat(maddr + BEAT_BYTES, bpm, wseed);
      for (int unsigned r8 = 0; r8 < gs / 8; r8++) begin
        for (int unsigned r = 0; r < 8; r++) begin
          int unsigned kk;
          logic [31:0] w;
          kk = r8 * 8 + r;
          if (kk % 4 == 0) qb = gen_beat(maddr + longint'(2 + kk / 4) * BEAT_BYTES, bpm, wseed);
          w = qb[32 * (kk % 4) +: 32];
          x = gen_act(m * gs + kk, aseed);
          for (int c = 0; c < 8; c++)
            col[c][r] = ref_pe(w[4*c +: 4], zb[4*c +: 4], sb[16*c +: 16], x);
        end
        for (int c = 0; c < 8; c++)
          if (m == 0 && r8 == 0) acc[c] = ref_tree(col[c]);
          else acc[c] = fadd(acc[c], ref_tree(col[c]));
      end
    end
    return acc;
  endfunction

endpackage
