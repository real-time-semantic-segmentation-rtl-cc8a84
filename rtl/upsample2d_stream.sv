// upsample2d_stream: 2 x nearest-neighbour upsampling of a streamed image,
// the Upsample(2) layer of the network graph.
//
// Input: an H x W x C image in raster order. Output: the 2H x 2W x C image
// in which every input pixel fills a 2 x 2 square. Each input row is sent
// twice. On the first pass the layer accepts a pixel, emits it twice and
// stores it in a one-row buffer of W pixels; on the second pass it replays
// the row from the buffer, each pixel twice, and accepts no input.
//
// Interface: valid/ready streams, channel c in bits [c*ACT_W +: ACT_W];
// both in_ready and out_valid come from registers. Timing: on the first pass
// 3 cycles per input pixel (accept, two outputs), on the second pass 1 cycle
// per output pixel. The upsampling method is not spelled out in the source;
// nearest neighbour (the Keras UpSampling2D default) is assumed. H only
// documents the image height: the logic needs just the row width.
module upsample2d_stream
  import enet_pkg::*;
#(
  parameter int H = 4,
  parameter int W = 4,
  parameter int C = 2
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

  logic [C*ACT_W-1:0] row_buf [W];
  logic [C*ACT_W-1:0] cur;
  localparam int CW = (W > 1) ? $clog2(W) : 1;
  logic [CW-1:0] col;
  logic replay;   // second pass over the current row
  logic have;     // first pass: cur holds a pixel being emitted
  logic dup;      // which of the two copies is on the output
  logic fire;

  assign in_ready  = !replay && !have;
  assign out_valid = replay || have;
  assign out_data  = replay ? row_buf[col] : cur;
  assign fire      = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) row_buf[col] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur    <= '0;
      col    <= '0;
      replay <= 1'b0;
      have   <= 1'b0;
      dup    <= 1'b0;
    end else begin
      if (in_valid && in_ready) begin
        cur  <= in_data;
        have <= 1'b1;
        dup  <= 1'b0;
      end
      if (fire) begin
        dup <= !dup;
        if (dup) begin
          have <= 1'b0;
          if (int'(col) == W - 1) begin
            col    <= '0;
            replay <= !replay;
          end else begin
            col <= col + 1'b1;
          end
        end
      end
    end
  end

endmodule
