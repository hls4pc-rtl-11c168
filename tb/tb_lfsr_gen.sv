// tb_lfsr_gen -- checks the URS index generator.
// For several widths it runs the LFSR through one period and checks that (a) each step
// matches a reference shift-register model, (b) the period is exactly 2^W-1 (primitive
// polynomial), (c) no index repeats within a period, and (d) restart returns to the seed.
module tb_lfsr_gen;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int   checks = 0, failures = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // widths under test
  logic restart [3];
  logic step [3];
  logic [8:0]  st9,  ix9;
  logic [5:0]  st6,  ix6;
  logic [11:0] st12, ix12;

  lfsr_gen #(.WIDTH(9))                  u9  (.clk, .rst_n, .restart(restart[0]), .step(step[0]), .state(st9),  .idx(ix9));
  lfsr_gen #(.WIDTH(6),  .SEED(6'h2A))   u6  (.clk, .rst_n, .restart(restart[1]), .step(step[1]), .state(st6),  .idx(ix6));
  lfsr_gen #(.WIDTH(12), .SEED(12'h001)) u12 (.clk, .rst_n, .restart(restart[2]), .step(step[2]), .state(st12), .idx(ix12));

  // reference: Fibonacci LFSR, shift left, feedback = XOR of taps
  function automatic logic [15:0] ref_next(input logic [15:0] s, input int w, input logic [15:0] taps);
    logic fb = ^(s & taps);
    return ((s << 1) | 16'(fb)) & ((16'(1) << w) - 1);
  endfunction

  task automatic run(input int which, input int w, input logic [15:0] taps, input logic [15:0] seed);
    logic [15:0] exp_s, cur;
    bit seen [logic [15:0]];
    int period;
    exp_s = seed;
    period = 0;
    seen.delete();
    @(negedge clk);
    forever begin
      cur = (which == 0) ? 16'(st9) : (which == 1) ? 16'(st6) : 16'(st12);
      if (period > 0 && cur == seed) break;
      checks++;
      if (cur != exp_s) begin failures++; $display("W=%0d step %0d: %h != %h", w, period, cur, exp_s); end
      if (seen.exists(cur)) begin failures++; $display("W=%0d repeat %h", w, cur); end
      seen[cur] = 1'b1;
      exp_s = ref_next(exp_s, w, taps);
      period++;
      if (period > 70000) break;
      step[which] = 1'b1;
      @(negedge clk);
    end
    step[which] = 1'b0;
    checks++;
    if (period != (1 << w) - 1) begin failures++; $display("W=%0d period %0d", w, period); end
    // restart
    @(negedge clk); step[which] = 1'b1;
    repeat (5) @(negedge clk);
    step[which] = 1'b0; restart[which] = 1'b1;
    @(negedge clk); restart[which] = 1'b0;
    cur = (which == 0) ? 16'(st9) : (which == 1) ? 16'(st6) : 16'(st12);
    checks++;
    if (cur != seed) begin failures++; $display("W=%0d restart %h", w, cur); end
  endtask

  initial begin
    for (int i = 0; i < 3; i++) begin restart[i] = 1'b0; step[i] = 1'b0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // index = state - 1
    checks++;
    if (ix9 != st9 - 9'd1) failures++;
    run(0, 9,  16'h0110, 16'h001);
    run(1, 6,  16'h0030, 16'h02A);
    run(2, 12, 16'h0829, 16'h001);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
