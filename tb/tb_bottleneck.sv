// tb_bottleneck: self-checking testbench for bottleneck.
//
// Cases: the down-sampling, regular and up-sampling variants.
// Each case streams random images through its instance, pixel by pixel in
// raster order, with random gaps on the input valid and the output ready,
// and compares every output pixel with the reference model of
// enet_ref_pkg (whole-tensor loops, independent of the streaming RTL).
// Cases marked with a rate check also run without gaps and measure the
// cycles between consecutive outputs. A watchdog ends the run with a
// failure if the outputs do not all arrive.
module tb_bottleneck;
  import enet_pkg::*;
  import enet_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = !clk;

  int checks = 0;
  int failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic logic [8*ACT_W-1:0] pack(tensor t, int idx);
    logic [8*ACT_W-1:0] v;
    int y, x;
    v = '0;
    y = idx / t.w;
    x = idx % t.w;
    for (int ch = 0; ch < t.c; ch++) v[ch*ACT_W +: ACT_W] = ACT_W'(t.get(ch, y, x));
    return v;
  endfunction

  function automatic tensor rand_signed(int c, int h, int w);
    tensor t = new(c, h, w);
    foreach (t.d[i]) t.d[i] = int'($urandom_range(0, 511)) - 256;
    return t;
  endfunction

  // ---------------- case 0: down, 8x10x4 -> 4x5x3 ----------------
  localparam int CI_0 = 4;
  localparam int CO_0 = 3;
  localparam int NIMG_0 = 2;
  logic in_valid_0, in_ready_0, out_valid_0, out_ready_0;
  logic [CI_0*ACT_W-1:0] in_data_0;
  logic [CO_0*ACT_W-1:0] out_data_0;
  tensor img_0 [NIMG_0];
  tensor exp_0 [NIMG_0];
  int nxt_0 = 0;
  int nout_0 = 0;
  int in_total_0;
  int out_total_0;
  bit done_0 = 0;
  longint last_out_0 = 0;
  int rate_bad_0 = 0;
  int rate_seen_0 = 0;

  bottleneck #(.MODE(BN_DOWN), .H(8), .W(10), .CIN(4), .F(3), .RF(6), .SEED(5)) u_dut_0 (
    .clk(clk), .rst_n(rst_n),
    .in_valid(in_valid_0), .in_ready(in_ready_0), .in_data(in_data_0),
    .out_valid(out_valid_0), .out_ready(out_ready_0), .out_data(out_data_0),
    .skip_max_occ(occ_0)
  );

  initial begin
    for (int i = 0; i < NIMG_0; i++) begin
      img_0[i] = rand_signed(4, 8, 10);
      exp_0[i] = bottleneck(img_0[i], 0, 3, 5);
    end
    in_total_0  = NIMG_0 * img_0[0].h * img_0[0].w;
    out_total_0 = NIMG_0 * exp_0[0].h * exp_0[0].w;
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      in_valid_0 <= 1'b0;
      in_data_0  <= '0;
    end else if (!in_valid_0 || in_ready_0) begin
      if (nxt_0 < in_total_0 && (1 == 0 || $urandom_range(0, 3) != 0)) begin
        in_valid_0 <= 1'b1;
        in_data_0  <= (CI_0*ACT_W)'(pack(img_0[nxt_0 / (img_0[0].h * img_0[0].w)],
                                         nxt_0 % (img_0[0].h * img_0[0].w)));
        nxt_0 <= nxt_0 + 1;
      end else begin
        in_valid_0 <= 1'b0;
      end
    end
  end

  always @(posedge clk) begin
    out_ready_0 <= (1 == 0) || ($urandom_range(0, 3) != 0);
    if (rst_n && out_valid_0 && out_ready_0) begin
      if (nout_0 >= out_total_0) begin
        failures++;
        $display("case 0: extra output pixel");
      end else begin
        int im, p;
        logic [CO_0*ACT_W-1:0] e;
        im = nout_0 / (exp_0[0].h * exp_0[0].w);
        p  = nout_0 % (exp_0[0].h * exp_0[0].w);
        e  = (CO_0*ACT_W)'(pack(exp_0[im], p));
        checks++;
        if (out_data_0 !== e) begin
          failures++;
          if (failures < 10)
            $display("case 0: image %0d pixel %0d got %h expected %h", im, p, out_data_0, e);
        end
      end
      if (0 > 0 && nout_0 > 0 && (nout_0 % exp_0[0].w) != 0) begin
        rate_seen_0++;
        if (cyc - last_out_0 != 0) rate_bad_0++;
      end
      last_out_0 <= cyc;
      nout_0 <= nout_0 + 1;
      if (nout_0 + 1 == out_total_0) done_0 <= 1'b1;
    end
  end
  logic [15:0] occ_0;

  // ---------------- case 1: regular, 5x6x3 -> 5x6x4 ----------------
  localparam int CI_1 = 3;
  localparam int CO_1 = 4;
  localparam int NIMG_1 = 2;
  logic in_valid_1, in_ready_1, out_valid_1, out_ready_1;
  logic [CI_1*ACT_W-1:0] in_data_1;
  logic [CO_1*ACT_W-1:0] out_data_1;
  tensor img_1 [NIMG_1];
  tensor exp_1 [NIMG_1];
  int nxt_1 = 0;
  int nout_1 = 0;
  int in_total_1;
  int out_total_1;
  bit done_1 = 0;
  longint last_out_1 = 0;
  int rate_bad_1 = 0;
  int rate_seen_1 = 0;

  bottleneck #(.MODE(BN_REGULAR), .H(5), .W(6), .CIN(3), .F(4), .RF(6), .SEED(6)) u_dut_1 (
    .clk(clk), .rst_n(rst_n),
    .in_valid(in_valid_1), .in_ready(in_ready_1), .in_data(in_data_1),
    .out_valid(out_valid_1), .out_ready(out_ready_1), .out_data(out_data_1),
    .skip_max_occ(occ_1)
  );

  initial begin
    for (int i = 0; i < NIMG_1; i++) begin
      img_1[i] = rand_signed(3, 5, 6);
      exp_1[i] = bottleneck(img_1[i], 1, 4, 6);
    end
    in_total_1  = NIMG_1 * img_1[0].h * img_1[0].w;
    out_total_1 = NIMG_1 * exp_1[0].h * exp_1[0].w;
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      in_valid_1 <= 1'b0;
      in_data_1  <= '0;
    end else if (!in_valid_1 || in_ready_1) begin
      if (nxt_1 < in_total_1 && (1 == 0 || $urandom_range(0, 3) != 0)) begin
        in_valid_1 <= 1'b1;
        in_data_1  <= (CI_1*ACT_W)'(pack(img_1[nxt_1 / (img_1[0].h * img_1[0].w)],
                                         nxt_1 % (img_1[0].h * img_1[0].w)));
        nxt_1 <= nxt_1 + 1;
      end else begin
        in_valid_1 <= 1'b0;
      end
    end
  end

  always @(posedge clk) begin
    out_ready_1 <= (1 == 0) || ($urandom_range(0, 3) != 0);
    if (rst_n && out_valid_1 && out_ready_1) begin
      if (nout_1 >= out_total_1) begin
        failures++;
        $display("case 1: extra output pixel");
      end else begin
        int im, p;
        logic [CO_1*ACT_W-1:0] e;
        im = nout_1 / (exp_1[0].h * exp_1[0].w);
        p  = nout_1 % (exp_1[0].h * exp_1[0].w);
        e  = (CO_1*ACT_W)'(pack(exp_1[im], p));
        checks++;
        if (out_data_1 !== e) begin
          failures++;
          if (failures < 10)
            $display("case 1: image %0d pixel %0d got %h expected %h", im, p, out_data_1, e);
        end
      end
      if (0 > 0 && nout_1 > 0 && (nout_1 % exp_1[0].w) != 0) begin
        rate_seen_1++;
        if (cyc - last_out_1 != 0) rate_bad_1++;
      end
      last_out_1 <= cyc;
      nout_1 <= nout_1 + 1;
      if (nout_1 + 1 == out_total_1) done_1 <= 1'b1;
    end
  end
  logic [15:0] occ_1;

  // ---------------- case 2: up, 3x4x4 -> 6x8x3 ----------------
  localparam int CI_2 = 4;
  localparam int CO_2 = 3;
  localparam int NIMG_2 = 2;
  logic in_valid_2, in_ready_2, out_valid_2, out_ready_2;
  logic [CI_2*ACT_W-1:0] in_data_2;
  logic [CO_2*ACT_W-1:0] out_data_2;
  tensor img_2 [NIMG_2];
  tensor exp_2 [NIMG_2];
  int nxt_2 = 0;
  int nout_2 = 0;
  int in_total_2;
  int out_total_2;
  bit done_2 = 0;
  longint last_out_2 = 0;
  int rate_bad_2 = 0;
  int rate_seen_2 = 0;

  bottleneck #(.MODE(BN_UP), .H(3), .W(4), .CIN(4), .F(3), .RF(6), .SEED(7)) u_dut_2 (
    .clk(clk), .rst_n(rst_n),
    .in_valid(in_valid_2), .in_ready(in_ready_2), .in_data(in_data_2),
    .out_valid(out_valid_2), .out_ready(out_ready_2), .out_data(out_data_2),
    .skip_max_occ(occ_2)
  );

  initial begin
    for (int i = 0; i < NIMG_2; i++) begin
      img_2[i] = rand_signed(4, 3, 4);
      exp_2[i] = bottleneck(img_2[i], 2, 3, 7);
    end
    in_total_2  = NIMG_2 * img_2[0].h * img_2[0].w;
    out_total_2 = NIMG_2 * exp_2[0].h * exp_2[0].w;
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      in_valid_2 <= 1'b0;
      in_data_2  <= '0;
    end else if (!in_valid_2 || in_ready_2) begin
      if (nxt_2 < in_total_2 && (1 == 0 || $urandom_range(0, 3) != 0)) begin
        in_valid_2 <= 1'b1;
        in_data_2  <= (CI_2*ACT_W)'(pack(img_2[nxt_2 / (img_2[0].h * img_2[0].w)],
                                         nxt_2 % (img_2[0].h * img_2[0].w)));
        nxt_2 <= nxt_2 + 1;
      end else begin
        in_valid_2 <= 1'b0;
      end
    end
  end

  always @(posedge clk) begin
    out_ready_2 <= (1 == 0) || ($urandom_range(0, 3) != 0);
    if (rst_n && out_valid_2 && out_ready_2) begin
      if (nout_2 >= out_total_2) begin
        failures++;
        $display("case 2: extra output pixel");
      end else begin
        int im, p;
        logic [CO_2*ACT_W-1:0] e;
        im = nout_2 / (exp_2[0].h * exp_2[0].w);
        p  = nout_2 % (exp_2[0].h * exp_2[0].w);
        e  = (CO_2*ACT_W)'(pack(exp_2[im], p));
        checks++;
        if (out_data_2 !== e) begin
          failures++;
          if (failures < 10)
            $display("case 2: image %0d pixel %0d got %h expected %h", im, p, out_data_2, e);
        end
      end
      if (0 > 0 && nout_2 > 0 && (nout_2 % exp_2[0].w) != 0) begin
        rate_seen_2++;
        if (cyc - last_out_2 != 0) rate_bad_2++;
      end
      last_out_2 <= cyc;
      nout_2 <= nout_2 + 1;
      if (nout_2 + 1 == out_total_2) done_2 <= 1'b1;
    end
  end
  logic [15:0] occ_2;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done_0 && done_1 && done_2);
    repeat (50) @(posedge clk);
    checks++;
    if (nout_0 != out_total_0) begin failures++; $display("case 0: %0d of %0d outputs", nout_0, out_total_0); end
    checks++;
    if (occ_0 == 0) begin failures++; $display("case 0 skip FIFO unused"); end
    checks++;
    if (nout_1 != out_total_1) begin failures++; $display("case 1: %0d of %0d outputs", nout_1, out_total_1); end
    checks++;
    if (occ_1 == 0) begin failures++; $display("case 1 skip FIFO unused"); end
    checks++;
    if (nout_2 != out_total_2) begin failures++; $display("case 2: %0d of %0d outputs", nout_2, out_total_2); end
    checks++;
    if (occ_2 == 0) begin failures++; $display("case 2 skip FIFO unused"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog: outputs did not all arrive");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
