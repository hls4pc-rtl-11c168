// tb_knn_stages -- the grouping of all four PointMLP-Lite stages: knn_unit instances with
// 256/128/64 input points, 128/64/32 samples and K = 16 neighbours (stages 2 to 4), plus
// stage 1 (512 points, 256 samples) with a 32-wide selection scan (SEL = 32), each
// checked beat by beat against a brute-force reference and for its per-sample clock count.
module tb_knn_stages;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic d1, d2, d3, d4;
  int c1, c2, c3, c4, f1, f2, f3, f4;

  knn_stage_check #(.N(512), .NS(256), .K(16), .SEL(32)) u_s1 (.clk, .rst_n, .done(d1), .checks(c1), .failures(f1));
  knn_stage_check #(.N(256), .NS(128), .K(16)) u_s2 (.clk, .rst_n, .done(d2), .checks(c2), .failures(f2));
  knn_stage_check #(.N(128), .NS(64),  .K(16)) u_s3 (.clk, .rst_n, .done(d3), .checks(c3), .failures(f3));
  knn_stage_check #(.N(64),  .NS(32),  .K(16)) u_s4 (.clk, .rst_n, .done(d4), .checks(c4), .failures(f4));

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c1 + c2 + c3 + c4, f1 + f2 + f3 + f4 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (d1 && d2 && d3 && d4);
    $display("stage 1 (SEL 32): %0d checks, stage 2: %0d, stage 3: %0d, stage 4: %0d", c1, c2, c3, c4);
    $display("TB_RESULT checks=%0d failures=%0d", c1 + c2 + c3 + c4, f1 + f2 + f3 + f4);
    $finish;
  end
endmodule
