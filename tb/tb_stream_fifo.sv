// tb_stream_fifo: self-checking testbench for stream_fifo.
//
// A FIFO of depth 5 is driven with random pushes and random pops; a queue
// in the testbench models it. Checked: every popped word against the queue,
// in_ready low exactly when 5 words are held, out_valid high exactly when
// at least one is held, and max_occ equal to the largest queue size seen.
// A first phase fills the FIFO to full without popping, so the full
// condition and a high-water mark of 5 are always exercised.
module tb_stream_fifo;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = !clk;

  int checks = 0;
  int failures = 0;

  localparam int DEPTH = 5, WIDTH = 10;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [WIDTH-1:0] in_data, out_data;
  logic [$clog2(DEPTH+1)-1:0] max_occ;

  stream_fifo #(.DEPTH(DEPTH), .WIDTH(WIDTH)) u_dut (.*);

  logic [WIDTH-1:0] q[$];
  int hw = 0;
  int full_seen = 0;
  int cycle = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (in_ready != (q.size() < DEPTH) || out_valid != (q.size() > 0)) begin
        failures++;
        $display("flags wrong with %0d held: in_ready=%b out_valid=%b", q.size(), in_ready, out_valid);
      end
      if (q.size() == DEPTH) full_seen++;
      if (out_valid && out_ready) begin
        logic [WIDTH-1:0] e;
        e = q.pop_front();
        checks++;
        if (out_data != e) begin
          failures++;
          $display("popped %h expected %h", out_data, e);
        end
      end
      if (in_valid && in_ready) q.push_back(in_data);
      if (q.size() > hw) hw = q.size();
      cycle++;
    end
  end

  initial begin
    in_valid = 1'b0;
    in_data  = '0;
    out_ready = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // phase 1: fill without popping
    repeat (8) begin
      @(negedge clk);
      in_valid = 1'b1;
      in_data  = WIDTH'($urandom);
    end
    // phase 2: random traffic
    repeat (400) begin
      @(negedge clk);
      in_valid  = ($urandom_range(0, 2) != 0);
      in_data   = WIDTH'($urandom);
      out_ready = ($urandom_range(0, 2) != 0);
    end
    // drain
    @(negedge clk);
    in_valid = 1'b0;
    out_ready = 1'b1;
    repeat (10) @(negedge clk);
    checks++;
    if (int'(max_occ) != hw || hw != DEPTH) begin
      failures++;
      $display("max_occ %0d, largest occupancy %0d", max_occ, hw);
    end
    checks++;
    if (full_seen == 0 || q.size() != 0) begin
      failures++;
      $display("full seen %0d times, %0d left", full_seen, q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
