// tb_line_buffer: self-checking testbench for line_buffer.
//
// Pushes a numbered pixel sequence (pixel n carries the value n) into a 3x3
// buffer of row width 5 and a 2x2 buffer of row width 4, with random idle
// cycles between pushes. Once K-1 rows and K-1 pixels have gone in, the
// window after push n must hold pixel n - (K-1-r)*W - (K-1-c) at row r,
// column c: the pixels of the K x K square that ends at the newest pixel.
// Idle cycles must leave the window unchanged.
module tb_line_buffer;

  logic clk = 1'b0;
  always #5 clk = !clk;

  int checks = 0;
  int failures = 0;

  localparam int K3 = 3, W3 = 5, K2 = 2, W2 = 4, DW = 12;

  logic push;
  logic [DW-1:0] din;
  logic [K3-1:0][K3-1:0][DW-1:0] win3;
  logic [K2-1:0][K2-1:0][DW-1:0] win2;

  line_buffer #(.K(K3), .W(W3), .DW(DW)) u_lb3 (.clk(clk), .push(push), .din(din), .win(win3));
  line_buffer #(.K(K2), .W(W2), .DW(DW)) u_lb2 (.clk(clk), .push(push), .din(din), .win(win2));

  int n = 0;   // pixels pushed so far

  initial begin
    push = 1'b0;
    din  = '0;
    repeat (2) @(negedge clk);
    while (n < 60) begin
      @(negedge clk);
      // check the window left by the previous push (or by an idle cycle)
      if (n >= (K3 - 1) * W3 + K3) begin
        for (int r = 0; r < K3; r++)
          for (int c = 0; c < K3; c++) begin
            checks++;
            if (win3[r][c] != DW'(n - 1 - (K3-1-r)*W3 - (K3-1-c))) begin
              failures++;
              $display("K=3 after %0d pushes: win[%0d][%0d]=%0d", n, r, c, win3[r][c]);
            end
          end
      end
      if (n >= (K2 - 1) * W2 + K2) begin
        for (int r = 0; r < K2; r++)
          for (int c = 0; c < K2; c++) begin
            checks++;
            if (win2[r][c] != DW'(n - 1 - (K2-1-r)*W2 - (K2-1-c))) begin
              failures++;
              $display("K=2 after %0d pushes: win[%0d][%0d]=%0d", n, r, c, win2[r][c]);
            end
          end
      end
      if ($urandom_range(0, 2) != 0) begin
        push = 1'b1;
        din  = DW'(n);
        n++;
      end else begin
        push = 1'b0;
      end
    end
    @(negedge clk);
    push = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
