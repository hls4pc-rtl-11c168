// tb_distance_pe -- checks the squared-distance PE against a reference on corner values
// (+-127/-128 extremes) and random points, including the one-clock latency.
module tb_distance_pe;
  import hls4pc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  point_t a, b;
  dist_t d;

  distance_pe dut (.clk, .rst_n, .in_valid, .a, .b, .out_valid, .distance(d));

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_d(point_t p, point_t q);
    int dx = int'(p.x) - int'(q.x);
    int dy = int'(p.y) - int'(q.y);
    int dz = int'(p.z) - int'(q.z);
    return dx*dx + dy*dy + dz*dz;
  endfunction

  task automatic one(point_t p, point_t q);
    @(negedge clk);
    a = p; b = q; in_valid = 1'b1;
    @(negedge clk);
    in_valid = 1'b0;
    checks++;
    if (!out_valid || int'(d) != ref_d(p, q)) begin
      failures++;
      $display("mismatch %p %p: got %0d exp %0d v=%b", p, q, d, ref_d(p, q), out_valid);
    end
  endtask

  initial begin
    in_valid = 1'b0; a = '0; b = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    one('{x:8'sd127, y:8'sd127, z:8'sd127}, '{x:-8'sd128, y:-8'sd128, z:-8'sd128});
    one('{x:-8'sd128, y:8'sd0, z:8'sd5}, '{x:8'sd127, y:8'sd0, z:-8'sd5});
    one('{x:8'sd3, y:8'sd4, z:8'sd0}, '{x:8'sd0, y:8'sd0, z:8'sd0});
    for (int i = 0; i < 500; i++) one(point_t'($urandom), point_t'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
