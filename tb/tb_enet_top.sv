// tb_enet_top: end-to-end testbench of enet_top at a reduced image size (16 x 24).
//
// Streams 3 random RGB images back to back into the network and compares
// every class-score pixel with the reference model of enet_ref_pkg (the
// whole network as plain tensor loops). The input has random gaps and the output random back-pressure.
// Besides the data it counts how often the design's mechanisms act, and
// fails if one never does:
//   - input stalls: the network holds in_ready low while a pixel waits
//     (the convolutions and pools throttle the stream);
//   - output back-pressure: out_ready low while a score pixel waits;
//   - image overlap: pixels of image k+1 taken before the last score pixel
//     of image k has left (dataflow pipelining of a batch);
//   - skip-branch FIFO use: every one of the 16 skip FIFOs holds data at
//     some point (reported high-water marks);
//   - down-sampling, regular and up-sampling bottlenecks all take part, as
//     the output resolution equals the input resolution only if all do.
// It also reports the latency of the first image (first pixel in to last
// score out) and the time for the whole batch, and checks the single-image
// latency against the 4.9 ms at a 7 ns clock (700,000 cycles) reported for
// this configuration, and that the batch takes less than 3 times it.
module tb_enet_top;
  import enet_pkg::*;
  import enet_ref_pkg::*;

  localparam int H = 16;
  localparam int W = 24;
  localparam int NIMG = 3;
  localparam int GAPS = 1;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = !clk;

  int checks = 0;
  int failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [IMG_C*PIX_W-1:0] in_pixel;
  logic [N_CLASSES*ACT_W-1:0] out_score;
  logic [15:0] skip_max_occ [16];

  enet_top #(.H(H), .W(W)) u_dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_pixel,
    .out_valid, .out_ready, .out_score, .skip_max_occ
  );

  tensor img [NIMG];
  tensor expd [NIMG];
  int f [6] = '{HQ_F0, HQ_F1, HQ_F2, HQ_F3, HQ_F4, HQ_F5};
  int npix;
  int nxt = 0;
  int nout = 0;
  bit done = 0;
  int n_in_stall = 0, n_out_stall = 0, n_overlap = 0;
  longint t_first_in = -1, t_img0_done = -1, t_all_done = -1;

  initial begin
    for (int i = 0; i < NIMG; i++) begin
      img[i]  = random_image(IMG_C, H, W);
      expd[i] = network(img[i], f);
    end
    npix = H * W;
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      in_valid <= 1'b0;
      in_pixel <= '0;
    end else begin
      if (in_valid && !in_ready) n_in_stall++;
      if (in_valid && in_ready) begin
        if (t_first_in < 0) t_first_in = cyc;
        if (nxt > npix && nout < npix) n_overlap++;
      end
      if (!in_valid || in_ready) begin
        if (nxt < NIMG * npix && (GAPS == 0 || $urandom_range(0, 7) != 0)) begin
          int im, y, x;
          im = nxt / npix;
          y = (nxt % npix) / W;
          x = nxt % W;
          in_valid <= 1'b1;
          for (int c = 0; c < IMG_C; c++) in_pixel[c*PIX_W +: PIX_W] <= PIX_W'(img[im].get(c, y, x));
          nxt <= nxt + 1;
        end else begin
          in_valid <= 1'b0;
        end
      end
    end
  end

  always @(posedge clk) begin
    out_ready <= ($urandom_range(0, 7) != 0);
    if (rst_n && out_valid && !out_ready) n_out_stall++;
    if (rst_n && out_valid && out_ready) begin
      int im, p;
      logic [N_CLASSES*ACT_W-1:0] e;
      im = nout / npix;
      p  = nout % npix;
      e = '0;
      if (im < NIMG)
        for (int c = 0; c < N_CLASSES; c++)
          e[c*ACT_W +: ACT_W] = ACT_W'(expd[im].get(c, p / W, p % W));
      checks++;
      if (im >= NIMG || out_score !== e) begin
        failures++;
        if (failures < 10) $display("image %0d pixel %0d: got %h expected %h", im, p, out_score, e);
      end
      if (nout + 1 == npix) t_img0_done = cyc;
      if (nout + 1 == NIMG * npix) begin
        t_all_done = cyc;
        done <= 1'b1;
      end
      nout <= nout + 1;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done);
    repeat (100) @(posedge clk);
    $display("latency of image 0: %0d cycles; %0d images: %0d cycles",
             t_img0_done - t_first_in, NIMG, t_all_done - t_first_in);
    $display("input stalls %0d, output stalls %0d, overlapped input pixels %0d",
             n_in_stall, n_out_stall, n_overlap);
    for (int s = 0; s < 16; s++) begin
      $display("skip FIFO of stage %0d: high-water %0d", s, skip_max_occ[s]);
      checks++;
      if (skip_max_occ[s] == 0) failures++;
    end
    checks++;
    if (nout != NIMG * npix) begin failures++; $display("%0d score pixels", nout); end
    checks++;
    if (n_in_stall == 0) begin failures++; $display("no input stall"); end
    checks++;
    if (n_out_stall == 0) begin failures++; $display("no output back-pressure"); end
    checks++;
    if (n_overlap == 0) begin failures++; $display("images did not overlap"); end
    checks++;
    if (t_img0_done - t_first_in > 700000) begin failures++; $display("latency above 700000 cycles"); end
    checks++;
    if (t_all_done - t_first_in >= NIMG * (t_img0_done - t_first_in)) begin
      failures++;
      $display("batch not faster than sequential images");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog: %0d of %0d score pixels", nout, NIMG * npix);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
