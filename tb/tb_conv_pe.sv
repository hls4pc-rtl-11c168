// tb_conv_pe -- MAC + bias PE: random dot products of random length, with the `first`
// flag restarting accumulation, compared with a reference sum plus bias.
module tb_conv_pe;
  import hls4pc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic mac_en, first;
  coord_t act;
  logic signed [7:0] wgt;
  logic signed [15:0] bias;
  logic signed [23:0] psum;

  conv_pe dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mac_en = 0; first = 0; act = '0; wgt = '0; bias = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      automatic int len = (t == 0) ? 64 : $urandom_range(1, 40);
      automatic int sum = 0;
      bias = (t == 0) ? 16'sd32767 : 16'($urandom);
      for (int i = 0; i < len; i++) begin
        @(negedge clk);
        mac_en = 1; first = (i == 0);
        act = (t == 0) ? -8'sd128 : coord_t'($urandom);
        wgt = (t == 0) ? -8'sd128 : 8'($urandom);
        sum += int'(act) * int'(wgt);
      end
      @(negedge clk);
      mac_en = 0;
      // idle cycles must not disturb the result
      repeat ($urandom_range(0, 2)) @(negedge clk);
      checks++;
      if (int'(psum) != sum + int'(bias)) begin
        failures++; $display("t=%0d len=%0d psum=%0d exp=%0d", t, len, psum, sum + int'(bias));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
