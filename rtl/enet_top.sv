// enet_top: streaming semantic-segmentation network (compressed ENet,
// EnetHQ configuration) for a 240 x 152 RGB camera image and four classes
// (background, road, car, person).
//
// The network is laid out as a dataflow pipeline with one hardware unit per
// layer, all running at once on successive parts of the image:
//   stage 0       initial block                      -> F0 x H/2 x W/2
//   stages 1-3    block 1, 3 bottlenecks, 1st down   -> F1 x H/4 x W/4
//   stages 4-6    block 2, 3 bottlenecks, 1st down   -> F2 x H/8 x W/8
//   stages 7-9    block 3, 3 bottlenecks             -> F3 x H/8 x W/8
//   stages 10-12  block 4, 3 bottlenecks, 1st up     -> F4 x H/4 x W/4
//   stages 13-15  block 5, 3 bottlenecks, 1st up     -> F5 x H/2 x W/2
//   final block   upsample, pad, 2x2 conv            -> 4 x H x W scores
// Pixels enter in raster order, one RGB pixel per transfer (8 bits per
// colour, read as pixel/256), and the class scores leave in raster order,
// one pixel of four signed 9-bit scores (8 fractional bits) per transfer.
// Consecutive images can follow each other without a gap: while the
// decoder still works on one image, the encoder already takes the next.
//
// Interface: in_valid/in_ready/in_pixel (colour c in bits [c*8 +: 8]),
// out_valid/out_ready/out_score (class k in bits [k*9 +: 9]), and the
// high-water marks of the 16 skip-branch FIFOs (stage 0 = initial block),
// the occupancy measurement used to size those FIFOs.
// Timing: throughput is set by the final 2x2 convolution at full
// resolution, RF+2 cycles per output pixel.
//
// Follows the source: the block sequence, resolutions, EnetHQ filter counts
// (8, 2, 4, 8, 4, 3), reuse factor 6, stream-per-layer dataflow with FIFOs.
// Own choices: which bottleneck of a block changes the resolution, image
// orientation (240 wide, 152 high), number formats and weights (enet_pkg),
// and where FIFOs sit (on the skip branches only; the other layers are
// joined directly by their valid/ready handshakes).
module enet_top
  import enet_pkg::*;
#(
  parameter int H  = IMG_H,
  parameter int W  = IMG_W,
  parameter int F0 = HQ_F0,
  parameter int F1 = HQ_F1,
  parameter int F2 = HQ_F2,
  parameter int F3 = HQ_F3,
  parameter int F4 = HQ_F4,
  parameter int F5 = HQ_F5,
  parameter int RF = REUSE
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [IMG_C*PIX_W-1:0]     in_pixel,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [N_CLASSES*ACT_W-1:0] out_score,
  output logic [15:0]                skip_max_occ [16]
);

  localparam int NSTAGE = 1 + 5 * BOTTLENECKS_PER_BLOCK;

  function automatic int fmax();
    int m;
    m = F0;
    if (F1 > m) m = F1;
    if (F2 > m) m = F2;
    if (F3 > m) m = F3;
    if (F4 > m) m = F4;
    if (F5 > m) m = F5;
    return m;
  endfunction

  localparam int FM = fmax();

  // block (1..5) and position (0..2) of bottleneck stage s >= 1
  function automatic int blk(int s);
    return (s - 1) / BOTTLENECKS_PER_BLOCK + 1;
  endfunction

  function automatic bn_mode_e stage_mode(int s);
    if ((s - 1) % BOTTLENECKS_PER_BLOCK != 0) return BN_REGULAR;
    if (blk(s) <= 2) return BN_DOWN;
    if (blk(s) >= 4) return BN_UP;
    return BN_REGULAR;
  endfunction

  // output filters of stage s
  function automatic int stage_f(int s);
    if (s == 0) return F0;
    case (blk(s))
      1: return F1;
      2: return F2;
      3: return F3;
      4: return F4;
      default: return F5;
    endcase
  endfunction

  // output resolution divisor (2, 4 or 8) of stage s
  function automatic int stage_div(int s);
    int d;
    d = 2;
    for (int i = 1; i <= s; i++) begin
      if (stage_mode(i) == BN_DOWN) d = d * 2;
      if (stage_mode(i) == BN_UP)   d = d / 2;
    end
    return d;
  endfunction

  // stream between stages: bus[s] is the output of stage s, low channels used
  logic                bus_valid [NSTAGE];
  logic                bus_ready [NSTAGE];
  logic [FM*ACT_W-1:0] bus_data  [NSTAGE];

  // input pixel: 8-bit colour value v read as v/256
  logic [IMG_C*ACT_W-1:0] in_act;
  always_comb
    for (int c = 0; c < IMG_C; c++)
      in_act[c*ACT_W +: ACT_W] = {1'b0, in_pixel[c*PIX_W +: PIX_W]};

  logic [F0*ACT_W-1:0] init_data;

  initial_block #(.H(H), .W(W), .CIN(IMG_C), .F0(F0), .RF(RF), .SEED(1)) u_initial (
    .clk, .rst_n,
    .in_valid (in_valid), .in_ready (in_ready), .in_data (in_act),
    .out_valid(bus_valid[0]), .out_ready(bus_ready[0]), .out_data(init_data),
    .skip_max_occ(skip_max_occ[0])
  );
  assign bus_data[0] = (FM*ACT_W)'(init_data);

  for (genvar s = 1; s < NSTAGE; s++) begin : g_stage
    localparam bn_mode_e MODE = stage_mode(s);
    localparam int CI  = stage_f(s - 1);
    localparam int FO  = stage_f(s);
    localparam int DIV = stage_div(s - 1);
    logic [FO*ACT_W-1:0] o_data;

    bottleneck #(.MODE(MODE), .H(H / DIV), .W(W / DIV), .CIN(CI), .F(FO),
                 .RF(RF), .SEED(s + 1)) u_bn (
      .clk, .rst_n,
      .in_valid (bus_valid[s-1]), .in_ready (bus_ready[s-1]),
      .in_data  (bus_data[s-1][CI*ACT_W-1:0]),
      .out_valid(bus_valid[s]), .out_ready(bus_ready[s]), .out_data(o_data),
      .skip_max_occ(skip_max_occ[s])
    );
    assign bus_data[s] = (FM*ACT_W)'(o_data);
  end

  localparam int DLAST = stage_div(NSTAGE - 1);

  final_block #(.H(H / DLAST), .W(W / DLAST), .CIN(F5), .NCLS(N_CLASSES), .RF(RF),
                .SEED(99)) u_final (
    .clk, .rst_n,
    .in_valid (bus_valid[NSTAGE-1]), .in_ready (bus_ready[NSTAGE-1]),
    .in_data  (bus_data[NSTAGE-1][F5*ACT_W-1:0]),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_score)
  );

endmodule
