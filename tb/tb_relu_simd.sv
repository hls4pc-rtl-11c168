// tb_relu_simd -- random vectors through the SIMD ReLU with random stalls on both sides;
// checks every lane (negative -> 0, else unchanged) and the out_last marking every F beats.
module tb_relu_simd;
  import hls4pc_pkg::*;
  localparam int C = 12, L = 4, F = C / L;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0, stalls = 0, negs = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, out_last;
  coord_t in_data [L], out_data [L];
  coord_t q [$];
  int nout = 0, nin = 0;

  relu_simd #(.C(C), .N_SIMD(L)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      for (int l = 0; l < L; l++) q.push_back(in_data[l]);
      nin++;
    end
    if (out_valid && !out_ready) stalls++;
    if (out_valid && out_ready) begin
      checks++;
      for (int l = 0; l < L; l++) begin
        automatic coord_t e = q.pop_front();
        if (e < 0) negs++;
        if (out_data[l] != ((e < 0) ? coord_t'(0) : e)) begin
          failures++; $display("lane %0d: in %0d out %0d", l, e, out_data[l]);
        end
      end
      if (out_last != (nout % F == F-1)) begin failures++; $display("last wrong at %0d", nout); end
      nout++;
    end
  end

  initial begin
    in_valid = 0; out_ready = 0;
    for (int l = 0; l < L; l++) in_data[l] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    while (nin < 600) begin
      @(negedge clk);
      if (!(in_valid && !in_ready)) begin
        in_valid = ($urandom % 4) != 0;
        for (int l = 0; l < L; l++) in_data[l] = coord_t'($urandom);
      end
      out_ready = ($urandom % 4) != 0;
    end
    @(negedge clk); in_valid = 0; out_ready = 1;
    repeat (5) @(negedge clk);
    checks++;
    if (nout != nin || stalls == 0 || negs == 0) begin
      failures++; $display("nin=%0d nout=%0d stalls=%0d", nin, nout, stalls);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
