// stream_fork: sends every pixel of one stream to two consumers (the main
// and the skip branch of a block).
//
// The input pixel is offered to both outputs. Each output transfers it when
// its consumer is ready; a flag remembers an output that has already taken
// the current pixel, and the input is released once both have it. So a
// branch that stalls holds back the other one only by one pixel, and
// out_valid never waits for the other consumer's ready.
//
// Interface: one valid/ready input, two valid/ready outputs with the same
// data. Timing: combinational from input to outputs; one pixel per cycle
// when both consumers are ready.
module stream_fork #(
  parameter int WIDTH = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [WIDTH-1:0]  in_data,
  output logic              a_valid,
  input  logic              a_ready,
  output logic [WIDTH-1:0]  a_data,
  output logic              b_valid,
  input  logic              b_ready,
  output logic [WIDTH-1:0]  b_data
);

  logic a_done, b_done;

  assign a_valid  = in_valid && !a_done;
  assign b_valid  = in_valid && !b_done;
  assign a_data   = in_data;
  assign b_data   = in_data;
  assign in_ready = (a_done || a_ready) && (b_done || b_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_done <= 1'b0;
      b_done <= 1'b0;
    end else if (in_valid && in_ready) begin
      a_done <= 1'b0;
      b_done <= 1'b0;
    end else begin
      if (a_valid && a_ready) a_done <= 1'b1;
      if (b_valid && b_ready) b_done <= 1'b1;
    end
  end

endmodule
