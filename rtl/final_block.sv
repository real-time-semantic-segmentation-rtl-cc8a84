// final_block: the classifier at the end of the network.
//
// Upsample(2), Pad(1), Conv(2, NCLS): the F5 feature maps at half resolution
// become NCLS class scores per pixel at full resolution. The scores are the
// signed convolution outputs (no ReLU); the class of a pixel is the one with
// the largest score, which is left to the consumer, as the source does not
// place an arg-max on the device.
//
// Interface: valid/ready pixel streams; in_data holds CIN activations,
// out_data NCLS scores, channel c in bits [c*ACT_W +: ACT_W].
// Input H x W x CIN, output 2H x 2W x NCLS. Timing: the convolution takes
// RF+2 cycles per output pixel and sets the pace of the whole network.
module final_block
  import enet_pkg::*;
#(
  parameter int H    = IMG_H / 2,
  parameter int W    = IMG_W / 2,
  parameter int CIN  = HQ_F5,
  parameter int NCLS = N_CLASSES,
  parameter int RF   = REUSE,
  parameter int SEED = 99
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [CIN*ACT_W-1:0]  in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [NCLS*ACT_W-1:0] out_data
);

  localparam int CW = CIN * ACT_W;

  logic          u_valid, u_ready, p_valid, p_ready;
  logic [CW-1:0] u_data, p_data;

  upsample2d_stream #(.H(H), .W(W), .C(CIN)) u_up (
    .clk, .rst_n,
    .in_valid (in_valid), .in_ready (in_ready), .in_data (in_data),
    .out_valid(u_valid),  .out_ready(u_ready),  .out_data(u_data)
  );

  zero_pad_stream #(.H(2*H), .W(2*W), .C(CIN), .P(1)) u_pad (
    .clk, .rst_n,
    .in_valid (u_valid), .in_ready (u_ready), .in_data (u_data),
    .out_valid(p_valid), .out_ready(p_ready), .out_data(p_data)
  );

  conv2d_stream #(.H(2*H+1), .W(2*W+1), .CIN(CIN), .COUT(NCLS), .K(2), .RF(RF),
                  .SEED(SEED*16+1), .RELU(1'b0)) u_conv (
    .clk, .rst_n,
    .in_valid (p_valid),  .in_ready (p_ready),  .in_data (p_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data)
  );

endmodule
