// lutmul_pkg: constants and constant functions shared by the LUT-multiplication
// dataflow accelerator.
//
// The accelerator embeds quantised weights into LUT6_2 look-up tables: every LUT
// holds two product bits of a constant multiplier for two weights (selected by
// WS) and a 4-bit unsigned activation. lut_init() computes the 64-bit INIT value
// of one such LUT; it reproduces the four INIT values printed for the weights
// 1 and -3 (64'hfffe_0000_fffe_0000, 64'h07fe_0000_f83e_0000,
// 64'h39c6_ff00_5a5a_f0f0, 64'hcccc_cccc_aaaa_aaaa).
//
// Weights, thresholds and biases are compile-time constants (they become LUT
// contents). Their default values are deterministic pseudo-random patterns
// produced by gen_weights/gen_thresholds/gen_bias, standing in for the values a
// trained, quantised network would supply; any layer can be given real values
// by overriding its packed WEIGHTS/THRESHOLDS/BIAS parameter. Packed layouts:
//   WEIGHTS    entry (co, j)  at [(co*NPROD + j)*WBITS +: WBITS]   (two's complement)
//   THRESHOLDS entry (co, k)  at [(co*NT + k)*32 +: 32]            (signed, rising in k)
//   BIAS       entry co       at [co*32 +: 32]                     (signed)
// Lint note: the generator functions clear a 131072-bit work vector with '0;
// one simulator flags any fill wider than 8192 bits as suspect. The width is
// intended: it is the largest parameter pattern a layer can request.
package lutmul_pkg;

  // Activations are 4-bit unsigned (uint4): the four low LUT inputs.
  localparam int ABITS = 4;

  // Widest packed parameter the default generators can fill.
  localparam int MAXP = 131072;
  typedef logic [MAXP-1:0] pbits_t;

  // Integer hash used for the default constant patterns.
  function automatic logic [31:0] hash32(input int unsigned a);
    logic [31:0] x;
    x = a ^ 32'h9e37_79b9;
    x = x ^ (x >> 16);
    x = x * 32'h7feb_352d;
    x = x ^ (x >> 15);
    x = x * 32'h846c_a68b;
    x = x ^ (x >> 16);
    return x;
  endfunction

  // Signed value of a WBITS-wide two's complement field.
  function automatic int sext(input logic [31:0] v, input int bits);
    int r;
    r = int'(v & ((32'd1 << bits) - 1));
    if (r >= (1 << (bits - 1))) r = r - (1 << bits);
    return r;
  endfunction

  // INIT of LUT6_2 number `pair` of a constant multiplier holding weights w0
  // (WS=0) and w1 (WS=1). LUT input {I5,I4,I3..I0} = {1'b1, WS, A[3:0]}:
  // O6 (INIT[63:32], I5=1) gives product bit 2*pair+1, O5 (INIT[31:0]) bit 2*pair.
  function automatic logic [63:0] lut_init(input int w0, input int w1, input int pair);
    logic [63:0] init;
    int p;
    init = '0;
    for (int addr = 0; addr < 64; addr++) begin
      p = ((addr & 16) != 0 ? w1 : w0) * (addr & 15);
      if ((addr & 32) != 0) init[addr] = p[2*pair+1];
      else                  init[addr] = p[2*pair];
    end
    return init;
  endfunction

  // n pseudo-random weights of wbits bits each, full signed range.
  function automatic pbits_t gen_weights(input int seed, input int n, input int wbits);
    pbits_t v;
    logic [31:0] h;
    v = '0;
    for (int i = 0; i < n; i++) begin
      h = hash32(seed * 7919 + i);
      for (int b = 0; b < wbits; b++) v[i*wbits + b] = h[b];
    end
    return v;
  endfunction

  // nt rising thresholds per channel, spaced by step, centred on a per-channel
  // offset in [-step/2, step/2).
  function automatic pbits_t gen_thresholds(input int seed, input int nch, input int nt,
                                            input int step);
    pbits_t v;
    int t;
    int off;
    v = '0;
    for (int c = 0; c < nch; c++) begin
      off = int'(hash32(seed * 104729 + c) % step) - step / 2;
      for (int k = 0; k < nt; k++) begin
        t = (k - nt / 2) * step + off;
        v[(c*nt + k)*32 +: 32] = t;
      end
    end
    return v;
  endfunction

  // nch pseudo-random biases in [-range, range).
  function automatic pbits_t gen_bias(input int seed, input int nch, input int range);
    pbits_t v;
    v = '0;
    for (int c = 0; c < nch; c++)
      v[c*32 +: 32] = int'(hash32(seed * 15485863 + c) % (2 * range)) - range;
    return v;
  endfunction

  // Default spacing of the thresholds of a layer: about 4 sigma of the
  // accumulator for random weights spread over the 2^OBITS-1 thresholds.
  function automatic int th_step(input int nprod, input int wbits, input int obits);
    int s;
    s = (2 * nprod) << (wbits - 4);
    s = s >>> (obits - 4);
    return (s < 1) ? 1 : s;
  endfunction

endpackage
