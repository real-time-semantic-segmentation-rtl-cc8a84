// enet_pkg: types, constants and weight tables shared by the streaming
// segmentation network.
//
// Number format. Every activation travels as a signed fixed-point value of
// ACT_W = 9 bits with ACT_FRAC = 8 fractional bits, i.e. the range [-1, 1) in
// steps of 1/256. After a ReLU the value is non-negative and fits the 8-bit
// unsigned <8,0> format the network uses for its input (pixel/256); the extra
// sign bit carries the layers that are not followed by a ReLU (the last 1x1
// convolutions of a bottleneck and the final classifier). Weights are signed
// 8-bit values with 7 fractional bits (QKeras quantized_bits(8,0)). Biases are
// the batch-norm terms merged into the convolution and live at the
// accumulator scale (15 fractional bits). Results are truncated and
// saturated back to ACT_W.
//
// The network configuration below is the heterogeneously quantised EnetHQ
// model: f0..f5 = 8, 2, 4, 8, 4, 3, input 240 x 152 RGB, 4 output classes,
// reuse factor 6. The per-layer bit widths of that model are not published,
// so a single 8-bit width is used everywhere.
//
// The trained weights are not published either. conv_weight() and
// conv_bias() give every layer a fixed pseudo-random weight set derived from
// a per-layer seed (a 32-bit integer hash), so that the hardware and any
// reference model produce identical numbers. Loading real weights means
// replacing these two functions.
package enet_pkg;

  // ---- number formats ----
  localparam int ACT_W    = 9;
  localparam int ACT_FRAC = 8;
  localparam int WGT_W    = 8;
  localparam int WGT_FRAC = 7;
  localparam int ACC_W    = 32;
  localparam int PIX_W    = 8;    // camera pixel, one colour channel

  typedef logic signed [ACT_W-1:0] act_t;
  typedef logic signed [WGT_W-1:0] wgt_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  localparam int ACT_MAX = (1 << (ACT_W - 1)) - 1;
  localparam int ACT_MIN = -(1 << (ACT_W - 1));

  // ---- EnetHQ configuration (Table 3 of the source, bold row) ----
  localparam int IMG_W     = 240;
  localparam int IMG_H     = 152;
  localparam int IMG_C     = 3;
  localparam int N_CLASSES = 4;
  localparam int HQ_F0 = 8;
  localparam int HQ_F1 = 2;
  localparam int HQ_F2 = 4;
  localparam int HQ_F3 = 8;
  localparam int HQ_F4 = 4;
  localparam int HQ_F5 = 3;
  localparam int REUSE = 6;
  localparam int BOTTLENECKS_PER_BLOCK = 3;

  // Bottleneck variants: the first bottleneck of blocks 1-2 down-samples,
  // the first of blocks 4-5 up-samples, all others keep the resolution.
  typedef enum logic [1:0] {BN_DOWN = 2'd0, BN_REGULAR = 2'd1, BN_UP = 2'd2} bn_mode_e;

  // Ways of joining a main branch and a skip branch.
  typedef enum logic {MERGE_ADD = 1'b0, MERGE_CONCAT = 1'b1} merge_mode_e;

  // Depth of the skip-branch FIFO that lets the main branch fill its line
  // buffers while the skip branch runs ahead: the main branch needs about
  // three rows of the merge resolution before its first output (about four
  // when it up-samples, since the skip branch then emits every row twice).
  function automatic int skip_fifo_depth(int w_out, bit up);
    return (up ? 6 : 4) * w_out + 16;
  endfunction

  // ---- deterministic weights ----
  function automatic logic [31:0] hash32(logic [31:0] a, logic [31:0] b);
    logic [31:0] x;
    x = a * 32'h9E3779B1 ^ (b + 32'h7F4A7C15) * 32'h85EBCA77;
    x = x ^ (x >> 15);
    x = x * 32'h2C1B3C6D;
    x = x ^ (x >> 12);
    x = x * 32'h297A2D39;
    x = x ^ (x >> 15);
    return x;
  endfunction

  // Weight magnitude bound, shrinking with the fan-in so that activations
  // neither vanish nor saturate everywhere.
  function automatic int weight_amp(int fan_in);
    if (fan_in <= 4)  return 96;
    if (fan_in <= 16) return 56;
    if (fan_in <= 48) return 32;
    return 20;
  endfunction

  // Weight idx of a layer; idx = ((o*K + ky)*K + kx)*CIN + ci.
  function automatic wgt_t conv_weight(int seed, int idx, int fan_in);
    int amp;
    amp = weight_amp(fan_in);
    return wgt_t'(int'(hash32(seed, idx) % (2 * amp + 1)) - amp);
  endfunction

  // Merged batch-norm offset of output channel o, in units of 2^-15.
  function automatic acc_t conv_bias(int seed, int o);
    return acc_t'(int'(hash32(seed ^ 32'h5A5A0000, o) % 4096) - 1024);
  endfunction

  // Requantise an accumulator value (15 fractional bits) to an activation:
  // truncate the WGT_FRAC extra bits, saturate, optional ReLU.
  function automatic act_t requant(acc_t acc, bit relu);
    acc_t s;
    s = acc >>> WGT_FRAC;
    if (relu && s < 0) return '0;
    if (s > ACT_MAX) return act_t'(ACT_MAX);
    if (s < ACT_MIN) return act_t'(ACT_MIN);
    return act_t'(s);
  endfunction

  // Saturating addition of two activations (skip connection).
  function automatic act_t sat_add(act_t a, act_t b);
    int s;
    s = int'(a) + int'(b);
    if (s > ACT_MAX) return act_t'(ACT_MAX);
    if (s < ACT_MIN) return act_t'(ACT_MIN);
    return act_t'(s);
  endfunction

endpackage
