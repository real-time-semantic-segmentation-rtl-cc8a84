// line_buffer: the shift-register line buffer and sliding input window of a
// streaming K x K convolution or pooling layer.
//
// An image of width W arrives one pixel (a vector of all its channels, DW
// bits) per push, row by row. K-1 shift registers of depth W are chained:
// the new pixel enters the first one, the element that falls out of each
// register enters the next. Since each register holds exactly one image row,
// the elements that fall out are the pixels straight above the new one, one
// and two (up to K-1) rows up. The new pixel and the popped pixels form a
// column vector that is shifted into the right-hand column of the K x K
// window; the left-hand column is dropped. All of it happens in the cycle of
// the push. This is the organisation the source describes (K-1 buffers of
// depth W instead of K^2 buffers of depth K*(W-K+1)).
//
// Interface: push/din in; win[r][c] out, r = 0 the top (oldest) row,
// c = K-1 the newest column, so win[K-1][K-1] is the pixel just pushed.
// win is valid from the clock edge after a push. Whether a window position
// is complete (at least K rows and K columns seen) is decided by the
// counters of the layer that uses the buffer, not here.
//
// Design choices: the registers behave as always full (they start with
// whatever they hold and never report empty); they have no reset, as the
// first K-1 rows of every image are never used for an output. For K = 1 the
// window is a single register.
module line_buffer #(
  parameter int K  = 3,
  parameter int W  = 8,
  parameter int DW = 8
) (
  input  logic                          clk,
  input  logic                          push,
  input  logic [DW-1:0]                 din,
  output logic [K-1:0][K-1:0][DW-1:0]   win
);

  // Column entering the window: col[K-1] is the new pixel, col[r] for r <
  // K-1 is what falls out of shift register K-2-r.
  logic [K-1:0][DW-1:0] col;

  assign col[K-1] = din;

  if (K > 1) begin : g_rows
    logic [DW-1:0] sr [K-1][W];   // sr[k][0] is the oldest element

    for (genvar k = 0; k < K - 1; k++) begin : g_sr
      logic [DW-1:0] sr_in;
      if (k == 0) begin : g_first
        assign sr_in = din;
      end else begin : g_next
        assign sr_in = sr[k-1][0];
      end
      assign col[K-2-k] = sr[k][0];

      always_ff @(posedge clk) begin
        if (push) begin
          for (int i = 0; i < W - 1; i++) sr[k][i] <= sr[k][i+1];
          sr[k][W-1] <= sr_in;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (push) begin
      for (int r = 0; r < K; r++) begin
        for (int c = 0; c < K - 1; c++) win[r][c] <= win[r][c+1];
        win[r][K-1] <= col[r];
      end
    end
  end

endmodule
