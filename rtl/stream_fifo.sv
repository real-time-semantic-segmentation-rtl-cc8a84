// stream_fifo: FIFO between two layers of the dataflow network, with an
// occupancy high-water mark.
//
// In a layer-per-module dataflow design every layer is joined to the next by
// a FIFO. How full such a FIFO gets depends on the schedule of both layers,
// so the source sizes them by simulating the design on example images,
// recording each FIFO's maximum occupancy and then shrinking every FIFO to
// that value. max_occ is that measurement: the largest number of entries
// held at once since reset.
//
// Interface: valid/ready in and out, WIDTH bits of data. out_valid and
// in_ready come from registers (count); out_data is read from the memory
// array at the read pointer. A push and a pop may happen in the same cycle.
// Timing: an entry pushed in one cycle can be popped in the next.
// Assertions check that the memory never overflows or underflows.
module stream_fifo #(
  parameter int DEPTH = 4,
  parameter int WIDTH = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [WIDTH-1:0]            in_data,
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [WIDTH-1:0]            out_data,
  output logic [$clog2(DEPTH+1)-1:0]  max_occ
);

  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic [$clog2(DEPTH+1)-1:0] count;
  logic push, pop;

  assign in_ready  = (int'(count) < DEPTH);
  assign out_valid = (count != 0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr  <= '0;
      rd_ptr  <= '0;
      count   <= '0;
      max_occ <= '0;
    end else begin
      if (push) wr_ptr <= (int'(wr_ptr) == DEPTH - 1) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (int'(rd_ptr) == DEPTH - 1) ? '0 : rd_ptr + 1'b1;
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
      if (push && !pop && count + 1'b1 > max_occ) max_occ <= count + 1'b1;
    end
  end

  a_no_overflow: assert property (@(posedge clk)
    !(push && !pop && int'(count) == DEPTH)) else $error("stream_fifo: overflow");
  a_no_underflow: assert property (@(posedge clk)
    !(pop && count == 0)) else $error("stream_fifo: underflow");

endmodule
