// maxpool2d_stream: 2 x 2 max pooling with stride 2 on a pixel stream.
//
// An H x W x C image arrives pixel by pixel in raster order; the layer emits
// the (H/2) x (W/2) x C image of channel-wise maxima of each non-overlapping
// 2 x 2 square. It reuses the convolution line buffer with K = 2 (one row
// shift register of depth W and a 2 x 2 window), as the source suggests for
// pooling layers. Row and column counters mark the pixel that closes a square
// (odd row, odd column); after that push the layer holds the maximum in an
// output register and stops accepting input until it has been transferred.
//
// Interface: valid/ready streams, channel c in bits [c*ACT_W +: ACT_W].
// in_ready comes from a register. Timing: 1 cycle per input pixel, plus one
// cycle per output pixel when out_ready is high. H and W must be even; odd
// trailing rows or columns would be dropped. Images may follow back to back.
module maxpool2d_stream
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

  logic [1:0][1:0][C*ACT_W-1:0] win;
  logic [$clog2(W+1)-1:0] col;
  logic [$clog2(H+1)-1:0] row;
  logic push;
  logic closing;
  logic have;      // an output waits for transfer
  logic fresh;     // the window was completed by the last push

  assign in_ready  = !have && !fresh;
  assign push      = in_valid && in_ready;
  assign closing   = row[0] && col[0];
  assign out_valid = have;

  line_buffer #(.K(2), .W(W), .DW(C*ACT_W)) u_lb (
    .clk  (clk),
    .push (push),
    .din  (in_data),
    .win  (win)
  );

  act_t mx [C];
  always_comb begin
    for (int c = 0; c < C; c++) begin
      act_t a, b;
      a = (act_t'(win[0][0][c*ACT_W +: ACT_W]) > act_t'(win[0][1][c*ACT_W +: ACT_W]))
        ? act_t'(win[0][0][c*ACT_W +: ACT_W]) : act_t'(win[0][1][c*ACT_W +: ACT_W]);
      b = (act_t'(win[1][0][c*ACT_W +: ACT_W]) > act_t'(win[1][1][c*ACT_W +: ACT_W]))
        ? act_t'(win[1][0][c*ACT_W +: ACT_W]) : act_t'(win[1][1][c*ACT_W +: ACT_W]);
      mx[c] = (a > b) ? a : b;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col      <= '0;
      row      <= '0;
      have     <= 1'b0;
      fresh    <= 1'b0;
      out_data <= '0;
    end else begin
      if (push) begin
        fresh <= closing;
        if (int'(col) == W - 1) begin
          col <= '0;
          row <= (int'(row) == H - 1) ? '0 : row + 1'b1;
        end else begin
          col <= col + 1'b1;
        end
      end
      if (fresh) begin
        fresh <= 1'b0;
        have  <= 1'b1;
        for (int c = 0; c < C; c++) out_data[c*ACT_W +: ACT_W] <= mx[c];
      end
      if (have && out_ready) have <= 1'b0;
    end
  end

endmodule
