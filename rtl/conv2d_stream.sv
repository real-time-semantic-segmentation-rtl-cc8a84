// conv2d_stream: one streaming convolution layer with merged batch-norm and
// optional ReLU (a QConv2DBatchnorm layer of the network).
//
// The layer takes an H x W x CIN image one pixel per transfer, row by row,
// and produces the (H-K+1) x (W-K+1) x COUT "valid" convolution, one output
// pixel per transfer, in the same raster order. Padding is a separate layer
// (zero_pad_stream) in front of it, as in the network graph.
//
// How it works: every accepted pixel is pushed into a line_buffer (K-1 row
// shift registers feeding a K x K window) in one cycle. Row and column
// counters tell whether the window now covers a complete K x K position
// (row >= K-1 and col >= K-1). If it does, the layer computes all COUT
// outputs for that window. The multipliers are time-shared with a reuse
// factor RF: each output channel has ceil(K*K*CIN/RF) multipliers, and the
// K*K*CIN products of a channel are accumulated over STEPS = min(RF,
// K*K*CIN) cycles. The merged batch-norm offset starts the accumulator; the
// result is truncated, saturated to 9 bits and passed through a ReLU if
// RELU is set.
//
// Interface: valid/ready streams. in_data holds CIN activations, channel c in
// bits [c*ACT_W +: ACT_W]; out_data likewise COUT activations. in_ready is a
// register-driven signal (no combinational path from out_ready).
// Timing: a pixel that does not complete a window takes 1 cycle; one that
// does takes 1 cycle to enter, STEPS cycles to compute, and at least 1 cycle
// for the output transfer, so RF+2 cycles when out_ready is high.
//
// Follows the source: line-buffer structure, merged conv+batch-norm, reuse
// factor, no stride or dilation. Own choices: the exact schedule above, the
// fixed-point formats of enet_pkg, saturation, and the generated weights
// (conv_weight/conv_bias with the layer's SEED), since trained weights are
// not published. Counters wrap at the end of each image, so images can
// follow each other without a gap.
module conv2d_stream
  import enet_pkg::*;
#(
  parameter int H    = 6,
  parameter int W    = 6,
  parameter int CIN  = 2,
  parameter int COUT = 2,
  parameter int K    = 3,
  parameter int RF   = REUSE,
  parameter int SEED = 1,
  parameter bit RELU = 1'b1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [CIN*ACT_W-1:0]   in_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [COUT*ACT_W-1:0]  out_data
);

  localparam int KKC   = K * K * CIN;
  localparam int STEPS = (RF < KKC) ? RF : KKC;
  localparam int NMUL  = (KKC + STEPS - 1) / STEPS;   // multipliers per output channel

  // ---- weight and bias ROMs ----
  function automatic logic [COUT*KKC*WGT_W-1:0] init_w();
    logic [COUT*KKC*WGT_W-1:0] r;
    r = '0;
    for (int o = 0; o < COUT; o++)
      for (int j = 0; j < KKC; j++)
        r[(o*KKC + j)*WGT_W +: WGT_W] = conv_weight(SEED, o*KKC + j, KKC);
    return r;
  endfunction

  function automatic logic [COUT*ACC_W-1:0] init_b();
    logic [COUT*ACC_W-1:0] r;
    for (int o = 0; o < COUT; o++) r[o*ACC_W +: ACC_W] = conv_bias(SEED, o);
    return r;
  endfunction

  localparam logic [COUT*KKC*WGT_W-1:0] WROM = init_w();
  localparam logic [COUT*ACC_W-1:0]     BROM = init_b();

  // ---- control ----
  typedef enum logic [1:0] {S_IN, S_CALC, S_OUT} state_e;
  state_e state;

  logic [$clog2(W+1)-1:0]     col;
  logic [$clog2(H+1)-1:0]     row;
  logic [$clog2(STEPS+1)-1:0] step;

  logic push;
  logic win_complete;

  assign in_ready     = (state == S_IN);
  assign push         = in_valid && in_ready;
  assign win_complete = (int'(row) >= K - 1) && (int'(col) >= K - 1);
  assign out_valid    = (state == S_OUT);

  // ---- line buffer and window ----
  logic [K-1:0][K-1:0][CIN*ACT_W-1:0] win;

  line_buffer #(.K(K), .W(W), .DW(CIN*ACT_W)) u_lb (
    .clk  (clk),
    .push (push),
    .din  (in_data),
    .win  (win)
  );

  // Window flattened in weight order: j = (ky*K + kx)*CIN + ci.
  act_t xv [KKC];
  always_comb begin
    for (int ky = 0; ky < K; ky++)
      for (int kx = 0; kx < K; kx++)
        for (int ci = 0; ci < CIN; ci++)
          xv[(ky*K + kx)*CIN + ci] = act_t'(win[ky][kx][ci*ACT_W +: ACT_W]);
  end

  // ---- time-shared multipliers: products j = m*STEPS + step ----
  acc_t acc  [COUT];
  acc_t part [COUT];

  always_comb begin
    for (int o = 0; o < COUT; o++) begin
      part[o] = '0;
      for (int m = 0; m < NMUL; m++) begin
        int j;
        j = m * STEPS + int'(step);
        if (j < KKC)
          part[o] = part[o] + acc_t'(xv[j]) * acc_t'(wgt_t'(WROM[(o*KKC + j)*WGT_W +: WGT_W]));
      end
    end
  end

  act_t res [COUT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IN;
      col   <= '0;
      row   <= '0;
      step  <= '0;
      for (int o = 0; o < COUT; o++) begin
        acc[o] <= '0;
        res[o] <= '0;
      end
    end else begin
      unique case (state)
        S_IN: if (push) begin
          if (int'(col) == W - 1) begin
            col <= '0;
            row <= (int'(row) == H - 1) ? '0 : row + 1'b1;
          end else begin
            col <= col + 1'b1;
          end
          if (win_complete) begin
            state <= S_CALC;
            step  <= '0;
            for (int o = 0; o < COUT; o++) acc[o] <= acc_t'(BROM[o*ACC_W +: ACC_W]);
          end
        end
        S_CALC: begin
          for (int o = 0; o < COUT; o++) acc[o] <= acc[o] + part[o];
          if (int'(step) == STEPS - 1) begin
            state <= S_OUT;
            for (int o = 0; o < COUT; o++) res[o] <= requant(acc[o] + part[o], RELU);
          end else begin
            step <= step + 1'b1;
          end
        end
        S_OUT: if (out_ready) state <= S_IN;
        default: state <= S_IN;
      endcase
    end
  end

  always_comb
    for (int o = 0; o < COUT; o++) out_data[o*ACT_W +: ACT_W] = res[o];

endmodule
