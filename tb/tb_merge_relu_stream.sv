// tb_merge_relu_stream: self-checking testbench for merge_relu_stream.
//
// Two instances: an Add+ReLU join of 3-channel streams and a Concat+ReLU
// join of a 2-channel and a 3-channel stream. Random activations (including
// values whose sum overflows the 9-bit range) and random valid/ready
// combinations are applied; the expected outputs are computed here with
// plain integer arithmetic: relu(clamp(a+b)) per channel for the Add, the a
// channels then the b channels, each through ReLU, for the Concat. The
// handshake must transfer only when both inputs are valid and the output
// is ready, taking from both inputs together.
module tb_merge_relu_stream;
  import enet_pkg::*;

  int checks = 0;
  int failures = 0;

  logic a_valid, b_valid, out_ready;
  logic add_a_ready, add_b_ready, add_out_valid;
  logic cat_a_ready, cat_b_ready, cat_out_valid;
  logic [3*ACT_W-1:0] a3, b3, add_out;
  logic [2*ACT_W-1:0] a2;
  logic [5*ACT_W-1:0] cat_out;

  merge_relu_stream #(.MODE(MERGE_ADD), .CA(3), .CB(3)) u_add (
    .a_valid(a_valid), .a_ready(add_a_ready), .a_data(a3),
    .b_valid(b_valid), .b_ready(add_b_ready), .b_data(b3),
    .out_valid(add_out_valid), .out_ready(out_ready), .out_data(add_out));

  merge_relu_stream #(.MODE(MERGE_CONCAT), .CA(2), .CB(3)) u_cat (
    .a_valid(a_valid), .a_ready(cat_a_ready), .a_data(a2),
    .b_valid(b_valid), .b_ready(cat_b_ready), .b_data(b3),
    .out_valid(cat_out_valid), .out_ready(out_ready), .out_data(cat_out));

  function automatic int sx(logic [ACT_W-1:0] v);
    return int'(signed'(v));
  endfunction

  function automatic int relu_clamp(int v);
    if (v > 255) v = 255;
    if (v < 0) v = 0;
    return v;
  endfunction

  initial begin
    for (int t = 0; t < 500; t++) begin
      bit fire;
      a_valid   = $urandom_range(0, 3) != 0;
      b_valid   = $urandom_range(0, 3) != 0;
      out_ready = $urandom_range(0, 3) != 0;
      a3 = (3*ACT_W)'({$urandom, $urandom});
      b3 = (3*ACT_W)'({$urandom, $urandom});
      a2 = (2*ACT_W)'($urandom);
      #1;
      fire = a_valid && b_valid && out_ready;
      checks++;
      if (add_out_valid != (a_valid && b_valid) || cat_out_valid != (a_valid && b_valid) ||
          add_a_ready != (b_valid && out_ready) || add_b_ready != (a_valid && out_ready) ||
          cat_a_ready != (b_valid && out_ready) || cat_b_ready != (a_valid && out_ready) ||
          (add_a_ready && a_valid) != fire || (add_b_ready && b_valid) != fire) begin
        failures++;
        $display("handshake wrong: av=%b bv=%b or=%b", a_valid, b_valid, out_ready);
      end
      for (int c = 0; c < 3; c++) begin
        checks++;
        if (sx(add_out[c*ACT_W +: ACT_W]) != relu_clamp(sx(a3[c*ACT_W +: ACT_W]) + sx(b3[c*ACT_W +: ACT_W]))) begin
          failures++;
          $display("add ch%0d: %0d + %0d gave %0d", c, sx(a3[c*ACT_W +: ACT_W]),
                   sx(b3[c*ACT_W +: ACT_W]), sx(add_out[c*ACT_W +: ACT_W]));
        end
      end
      for (int c = 0; c < 5; c++) begin
        int e;
        e = (c < 2) ? relu_clamp(sx(a2[c*ACT_W +: ACT_W])) : relu_clamp(sx(b3[(c-2)*ACT_W +: ACT_W]));
        checks++;
        if (sx(cat_out[c*ACT_W +: ACT_W]) != e) begin
          failures++;
          $display("concat ch%0d: got %0d expected %0d", c, sx(cat_out[c*ACT_W +: ACT_W]), e);
        end
      end
      #9;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
