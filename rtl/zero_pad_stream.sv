// zero_pad_stream: zero padding by P pixels on the lower and right sides of
// a streamed image, the Pad(p) layer of the network graph.
//
// Input: an H x W x C image in raster order. Output: the (H+P) x (W+P) x C
// image in raster order, where the P extra columns at the end of each row
// and the P extra rows at the bottom are zero. Output counters walk the
// padded image; inside the original H x W area the stream passes straight
// through (combinational valid/ready/data), elsewhere the layer emits zeros
// without taking input.
//
// Follows the source: padding only towards the bottom and the right, so a
// K x K "valid" convolution behind Pad(K-1) keeps the image size. Own
// choice: the pass-through has no register stage. Images may follow back to
// back. Timing: one output pixel per cycle when the consumer is ready.
module zero_pad_stream
  import enet_pkg::*;
#(
  parameter int H = 4,
  parameter int W = 4,
  parameter int C = 2,
  parameter int P = 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [C*ACT_W-1:0]  in_data,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [C*ACT_W-1:0]  out_data
);

  logic [$clog2(W+P+1)-1:0] col;
  logic [$clog2(H+P+1)-1:0] row;
  logic in_area;

  assign in_area    = (int'(row) < H) && (int'(col) < W);
  assign out_valid = in_area ? in_valid : 1'b1;
  assign in_ready  = in_area && out_ready;
  assign out_data  = in_area ? in_data : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col <= '0;
      row <= '0;
    end else if (out_valid && out_ready) begin
      if (int'(col) == W + P - 1) begin
        col <= '0;
        row <= (int'(row) == H + P - 1) ? '0 : row + 1'b1;
      end else begin
        col <= col + 1'b1;
      end
    end
  end

endmodule
