// bottleneck: one ENet bottleneck of the encoder or decoder, as a chain of
// streaming layers.
//
// MODE = BN_DOWN (first bottleneck of encoder blocks 1 and 2):
//   Maxpool(2,2), then
//   main: Pad(1) Conv(2,F)+ReLU  Pad(2) Conv(3,F)+ReLU  Conv(1,F)
//   skip: Conv(1,F)
//   Add, ReLU.               Output H/2 x W/2 x F.
// MODE = BN_REGULAR (all other bottlenecks): the same without the Maxpool.
//                            Output H x W x F.
// MODE = BN_UP (first bottleneck of decoder blocks 4 and 5):
//   main: Pad(1) Conv(2,F)+ReLU  Upsample(2)  Pad(2) Conv(3,F)+ReLU  Conv(1,F)
//   skip: Conv(1,F) Upsample(2)
//   Add, ReLU.               Output 2H x 2W x F.
// Every convolution has the batch-norm merged into it. The main branch has
// to fill the line buffers of its 2x2 and 3x3 convolutions before it gives
// its first pixel, while the skip branch answers at once; a FIFO on the skip
// branch, just before the Add, holds the skip results meanwhile
// (skip_fifo_depth in enet_pkg). Its high-water mark is brought out as
// skip_max_occ.
//
// Interface: valid/ready pixel streams; in_data holds CIN activations,
// out_data F activations (channel c in bits [c*ACT_W +: ACT_W]).
// Timing: the convolutions dominate, RF+2 cycles per output pixel each;
// all layers work concurrently on different parts of the image.
//
// Follows the source: the layer sequence of the encoder and decoder
// diagrams, the same filter count F inside and at the output of a
// bottleneck, three bottlenecks per block of which only one changes the
// resolution. Own choices: the resolution change happens in the first
// bottleneck of a block; a Pad(1) before the decoder's Conv(2,F), which the
// decoder diagram does not show but which the output sizes of the network
// require; and the FIFO depth.
module bottleneck
  import enet_pkg::*;
#(
  parameter bn_mode_e MODE = BN_DOWN,
  parameter int H    = 8,
  parameter int W    = 8,
  parameter int CIN  = 2,
  parameter int F    = 2,
  parameter int RF   = REUSE,
  parameter int SEED = 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [CIN*ACT_W-1:0] in_data,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [F*ACT_W-1:0]  out_data,
  output logic [15:0]         skip_max_occ
);

  // resolution at the fork (after an optional max pool) and at the output
  localparam int HM = (MODE == BN_DOWN) ? H / 2 : H;
  localparam int WM = (MODE == BN_DOWN) ? W / 2 : W;
  localparam int HO = (MODE == BN_UP) ? 2 * HM : HM;
  localparam int WO = (MODE == BN_UP) ? 2 * WM : WM;
  localparam int SDEPTH = skip_fifo_depth(WO, MODE == BN_UP);
  localparam int CW = CIN * ACT_W;
  localparam int FW = F * ACT_W;

  // ---- optional max pool ----
  logic          s0_valid, s0_ready;
  logic [CW-1:0] s0_data;

  if (MODE == BN_DOWN) begin : g_pool
    maxpool2d_stream #(.H(H), .W(W), .C(CIN)) u_pool (
      .clk, .rst_n,
      .in_valid (in_valid), .in_ready (in_ready), .in_data (in_data),
      .out_valid(s0_valid), .out_ready(s0_ready), .out_data(s0_data)
    );
  end else begin : g_nopool
    assign s0_valid = in_valid;
    assign in_ready = s0_ready;
    assign s0_data  = in_data;
  end

  // ---- fork ----
  logic          m0_valid, m0_ready, k0_valid, k0_ready;
  logic [CW-1:0] m0_data, k0_data;

  stream_fork #(.WIDTH(CW)) u_fork (
    .clk, .rst_n,
    .in_valid(s0_valid), .in_ready(s0_ready), .in_data(s0_data),
    .a_valid (m0_valid), .a_ready (m0_ready), .a_data (m0_data),
    .b_valid (k0_valid), .b_ready (k0_ready), .b_data (k0_data)
  );

  // ---- main branch ----
  logic          m1_valid, m1_ready;
  logic [CW-1:0] m1_data;
  logic          m2_valid, m2_ready, m3_valid, m3_ready, m4_valid, m4_ready;
  logic          m5_valid, m5_ready, m6_valid, m6_ready;
  logic [FW-1:0] m2_data, m3_data, m4_data, m5_data, m6_data;

  zero_pad_stream #(.H(HM), .W(WM), .C(CIN), .P(1)) u_pad1 (
    .clk, .rst_n,
    .in_valid (m0_valid), .in_ready (m0_ready), .in_data (m0_data),
    .out_valid(m1_valid), .out_ready(m1_ready), .out_data(m1_data)
  );

  conv2d_stream #(.H(HM+1), .W(WM+1), .CIN(CIN), .COUT(F), .K(2), .RF(RF),
                  .SEED(SEED*16+1), .RELU(1'b1)) u_conv2 (
    .clk, .rst_n,
    .in_valid (m1_valid), .in_ready (m1_ready), .in_data (m1_data),
    .out_valid(m2_valid), .out_ready(m2_ready), .out_data(m2_data)
  );

  if (MODE == BN_UP) begin : g_up_main
    upsample2d_stream #(.H(HM), .W(WM), .C(F)) u_up (
      .clk, .rst_n,
      .in_valid (m2_valid), .in_ready (m2_ready), .in_data (m2_data),
      .out_valid(m3_valid), .out_ready(m3_ready), .out_data(m3_data)
    );
  end else begin : g_same_main
    assign m3_valid = m2_valid;
    assign m2_ready = m3_ready;
    assign m3_data  = m2_data;
  end

  zero_pad_stream #(.H(HO), .W(WO), .C(F), .P(2)) u_pad2 (
    .clk, .rst_n,
    .in_valid (m3_valid), .in_ready (m3_ready), .in_data (m3_data),
    .out_valid(m4_valid), .out_ready(m4_ready), .out_data(m4_data)
  );

  conv2d_stream #(.H(HO+2), .W(WO+2), .CIN(F), .COUT(F), .K(3), .RF(RF),
                  .SEED(SEED*16+2), .RELU(1'b1)) u_conv3 (
    .clk, .rst_n,
    .in_valid (m4_valid), .in_ready (m4_ready), .in_data (m4_data),
    .out_valid(m5_valid), .out_ready(m5_ready), .out_data(m5_data)
  );

  conv2d_stream #(.H(HO), .W(WO), .CIN(F), .COUT(F), .K(1), .RF(RF),
                  .SEED(SEED*16+3), .RELU(1'b0)) u_conv1 (
    .clk, .rst_n,
    .in_valid (m5_valid), .in_ready (m5_ready), .in_data (m5_data),
    .out_valid(m6_valid), .out_ready(m6_ready), .out_data(m6_data)
  );

  // ---- skip branch ----
  logic          k1_valid, k1_ready, k2_valid, k2_ready, k3_valid, k3_ready;
  logic [FW-1:0] k1_data, k2_data, k3_data;
  logic [$clog2(SDEPTH+1)-1:0] occ;

  conv2d_stream #(.H(HM), .W(WM), .CIN(CIN), .COUT(F), .K(1), .RF(RF),
                  .SEED(SEED*16+4), .RELU(1'b0)) u_skip_conv (
    .clk, .rst_n,
    .in_valid (k0_valid), .in_ready (k0_ready), .in_data (k0_data),
    .out_valid(k1_valid), .out_ready(k1_ready), .out_data(k1_data)
  );

  if (MODE == BN_UP) begin : g_up_skip
    upsample2d_stream #(.H(HM), .W(WM), .C(F)) u_up (
      .clk, .rst_n,
      .in_valid (k1_valid), .in_ready (k1_ready), .in_data (k1_data),
      .out_valid(k2_valid), .out_ready(k2_ready), .out_data(k2_data)
    );
  end else begin : g_same_skip
    assign k2_valid = k1_valid;
    assign k1_ready = k2_ready;
    assign k2_data  = k1_data;
  end

  stream_fifo #(.DEPTH(SDEPTH), .WIDTH(FW)) u_skip_fifo (
    .clk, .rst_n,
    .in_valid (k2_valid), .in_ready (k2_ready), .in_data (k2_data),
    .out_valid(k3_valid), .out_ready(k3_ready), .out_data(k3_data),
    .max_occ  (occ)
  );

  assign skip_max_occ = 16'(occ);

  // ---- join ----
  merge_relu_stream #(.MODE(MERGE_ADD), .CA(F), .CB(F)) u_add (
    .a_valid  (m6_valid), .a_ready (m6_ready), .a_data (m6_data),
    .b_valid  (k3_valid), .b_ready (k3_ready), .b_data (k3_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data)
  );

endmodule
