// tb_conv1d_layer -- the convolution layer at 8/8 bits in two shapes: a kernel-3
// convolution (CIN 5, COUT 8, 2 PEs, sequences of 7 positions) and an MLP layer (kernel 1,
// one position per sequence, CIN 16, COUT 12, 4 PEs). Both are checked by conv_check
// against a reference, including the window period.
module tb_conv1d_layer;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic d0, d1;
  int c0, c1, f0, f1;

  conv_check #(.CIN(5),  .COUT(8),  .KS(3), .LEN(7), .NPE(2)) u_conv (.clk, .rst_n, .done(d0), .checks(c0), .failures(f0));
  conv_check #(.CIN(16), .COUT(12), .KS(1), .LEN(1), .NPE(4), .SEQS(24)) u_mlp (.clk, .rst_n, .done(d1), .checks(c1), .failures(f1));

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (d0 && d1);
    $display("conv: %0d checks, mlp: %0d checks", c0, c1);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1);
    $finish;
  end
endmodule
