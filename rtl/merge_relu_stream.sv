// merge_relu_stream: joins the main branch and the skip branch of a block and
// applies the ReLU that follows the join.
//
// MODE = MERGE_ADD (bottlenecks, "Add" then "ReLU"): both inputs carry C
// channels; the output is relu(a + b) per channel, the sum saturated to the
// activation range. MODE = MERGE_CONCAT (initial block, "Concat" then
// "ReLU"): the output carries CA + CB channels, those of input a in the low
// channel positions followed by those of input b, each passed through ReLU.
//
// Interface: two valid/ready input streams and one output stream. A pixel is
// taken from both inputs in the same cycle, when both are valid and the
// output is ready; the path is combinational (no register stage), so the
// join adds no latency. The two inputs must carry pixels of the same
// position, which holds because both branches see the same pixel order.
// The channel order of the concatenation is not given in the source: the
// convolution output first, the pooled input after it, is assumed.
module merge_relu_stream
  import enet_pkg::*;
#(
  parameter merge_mode_e MODE = MERGE_ADD,
  parameter int CA = 2,
  parameter int CB = 2,
  parameter int CO = (MODE == MERGE_ADD) ? CA : CA + CB
) (
  input  logic                 a_valid,
  output logic                 a_ready,
  input  logic [CA*ACT_W-1:0]  a_data,
  input  logic                 b_valid,
  output logic                 b_ready,
  input  logic [CB*ACT_W-1:0]  b_data,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [CO*ACT_W-1:0]  out_data
);

  assign out_valid = a_valid && b_valid;
  assign a_ready   = b_valid && out_ready;
  assign b_ready   = a_valid && out_ready;

  function automatic act_t relu(act_t v);
    return (v < 0) ? '0 : v;
  endfunction

  always_comb begin
    out_data = '0;
    if (MODE == MERGE_ADD) begin
      for (int c = 0; c < CA && c < CB; c++)
        out_data[c*ACT_W +: ACT_W] =
          relu(sat_add(act_t'(a_data[c*ACT_W +: ACT_W]), act_t'(b_data[c*ACT_W +: ACT_W])));
    end else begin
      for (int c = 0; c < CA; c++)
        out_data[c*ACT_W +: ACT_W] = relu(act_t'(a_data[c*ACT_W +: ACT_W]));
      for (int c = 0; c < CB && CA + c < CO; c++)
        out_data[(CA+c)*ACT_W +: ACT_W] = relu(act_t'(b_data[c*ACT_W +: ACT_W]));
    end
  end

endmodule
