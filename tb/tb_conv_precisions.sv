// tb_conv_precisions -- the convolution layer at the weight/activation precisions of the
// quantisation study, 4/4, 6/6, 8/4 and 16/16 bits, each checked by conv_check.
module tb_conv_precisions;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic d [4];
  int c [4], f [4];

  conv_check #(.WB(4),  .AB(4))  u_4_4   (.clk, .rst_n, .done(d[0]), .checks(c[0]), .failures(f[0]));
  conv_check #(.WB(6),  .AB(6))  u_6_6   (.clk, .rst_n, .done(d[1]), .checks(c[1]), .failures(f[1]));
  conv_check #(.WB(8),  .AB(4))  u_8_4   (.clk, .rst_n, .done(d[2]), .checks(c[2]), .failures(f[2]));
  conv_check #(.WB(16), .AB(16)) u_16_16 (.clk, .rst_n, .done(d[3]), .checks(c[3]), .failures(f[3]));

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c[0]+c[1]+c[2]+c[3], f[0]+f[1]+f[2]+f[3]+1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (d[0] && d[1] && d[2] && d[3]);
    $display("4/4: %0d  6/6: %0d  8/4: %0d  16/16: %0d checks", c[0], c[1], c[2], c[3]);
    $display("TB_RESULT checks=%0d failures=%0d", c[0]+c[1]+c[2]+c[3], f[0]+f[1]+f[2]+f[3]);
    $finish;
  end
endmodule
