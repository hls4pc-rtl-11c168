// tb_stream_fifo -- random push/pop traffic against a queue model; checks order, data,
// full (in_ready low at DEPTH words) and empty flags.
module tb_stream_fifo;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0, fulls = 0;
  always #5 clk = ~clk;

  localparam int W = 12, D = 5;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [W-1:0] q [$];
  logic stalled = 1'b0;

  stream_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 1'b0; out_ready = 1'b0; in_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      @(negedge clk);
      // flags against model
      checks++;
      if (out_valid != (q.size() != 0) || in_ready != (q.size() < D)) begin
        failures++; $display("flags: size=%0d v=%b r=%b", q.size(), out_valid, in_ready);
      end
      if (q.size() == D) fulls++;
      if (out_valid) begin
        checks++;
        if (out_data != q[0]) begin failures++; $display("data %h exp %h", out_data, q[0]); end
      end
      // keep offered words while stalled
      if (!stalled) begin
        in_valid = ($urandom % 100) < (((cyc / 1000) % 2) != 0 ? 70 : 40);
        in_data  = W'($urandom);
      end
      out_ready = ($urandom % 100) < (((cyc / 1000) % 2) != 0 ? 30 : 80);
      @(posedge clk);
      #1;
    end
    checks++;
    if (fulls == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model update on the clock edge
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) void'(q.pop_front());
    if (in_valid && in_ready) q.push_back(in_data);
    stalled <= in_valid && !in_ready;
  end
endmodule
