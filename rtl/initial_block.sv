// initial_block: the first stage of the network, turning the RGB image into
// F0 feature maps at half resolution.
//
// Maxpool(2), then two branches:
//   main: Pad(2) Conv(3, F0-CIN) (batch-norm merged)
//   skip: the pooled input itself
// Concat (convolution channels first, then the CIN pooled channels), ReLU.
// Input H x W x CIN, output H/2 x W/2 x F0.
//
// The pooled pixels wait in a FIFO on the skip branch while the 3x3
// convolution fills its line buffer (skip_fifo_depth in enet_pkg); its
// high-water mark is brought out as skip_max_occ.
//
// Interface: valid/ready pixel streams, channel c in bits [c*ACT_W +: ACT_W].
// Follows the source's initial-block diagram, which shows Conv(3,29) for the
// baseline with f0 = 32, i.e. f0 minus the three pooled colour channels; here
// that count is F0-CIN (5 for EnetHQ, f0 = 8). Own choices: the channel order
// of the concatenation and the FIFO depth.
module initial_block
  import enet_pkg::*;
#(
  parameter int H    = IMG_H,
  parameter int W    = IMG_W,
  parameter int CIN  = IMG_C,
  parameter int F0   = HQ_F0,
  parameter int RF   = REUSE,
  parameter int SEED = 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [CIN*ACT_W-1:0]  in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [F0*ACT_W-1:0]   out_data,
  output logic [15:0]           skip_max_occ
);

  localparam int HM = H / 2;
  localparam int WM = W / 2;
  localparam int NC = F0 - CIN;
  localparam int CW = CIN * ACT_W;
  localparam int SDEPTH = skip_fifo_depth(WM, 1'b0);

  logic          p_valid, p_ready, m0_valid, m0_ready, k0_valid, k0_ready;
  logic          m1_valid, m1_ready, m2_valid, m2_ready, k1_valid, k1_ready;
  logic [CW-1:0] p_data, m0_data, k0_data, m1_data, k1_data;
  logic [NC*ACT_W-1:0] m2_data;
  logic [$clog2(SDEPTH+1)-1:0] occ;

  maxpool2d_stream #(.H(H), .W(W), .C(CIN)) u_pool (
    .clk, .rst_n,
    .in_valid (in_valid), .in_ready (in_ready), .in_data (in_data),
    .out_valid(p_valid),  .out_ready(p_ready),  .out_data(p_data)
  );

  stream_fork #(.WIDTH(CW)) u_fork (
    .clk, .rst_n,
    .in_valid(p_valid),  .in_ready(p_ready),  .in_data(p_data),
    .a_valid (m0_valid), .a_ready (m0_ready), .a_data (m0_data),
    .b_valid (k0_valid), .b_ready (k0_ready), .b_data (k0_data)
  );

  zero_pad_stream #(.H(HM), .W(WM), .C(CIN), .P(2)) u_pad (
    .clk, .rst_n,
    .in_valid (m0_valid), .in_ready (m0_ready), .in_data (m0_data),
    .out_valid(m1_valid), .out_ready(m1_ready), .out_data(m1_data)
  );

  conv2d_stream #(.H(HM+2), .W(WM+2), .CIN(CIN), .COUT(NC), .K(3), .RF(RF),
                  .SEED(SEED*16+1), .RELU(1'b0)) u_conv (
    .clk, .rst_n,
    .in_valid (m1_valid), .in_ready (m1_ready), .in_data (m1_data),
    .out_valid(m2_valid), .out_ready(m2_ready), .out_data(m2_data)
  );

  stream_fifo #(.DEPTH(SDEPTH), .WIDTH(CW)) u_skip_fifo (
    .clk, .rst_n,
    .in_valid (k0_valid), .in_ready (k0_ready), .in_data (k0_data),
    .out_valid(k1_valid), .out_ready(k1_ready), .out_data(k1_data),
    .max_occ  (occ)
  );

  assign skip_max_occ = 16'(occ);

  merge_relu_stream #(.MODE(MERGE_CONCAT), .CA(NC), .CB(CIN)) u_concat (
    .a_valid  (m2_valid), .a_ready (m2_ready), .a_data (m2_data),
    .b_valid  (k1_valid), .b_ready (k1_ready), .b_data (k1_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data)
  );

endmodule
