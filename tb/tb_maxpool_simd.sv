// tb_maxpool_simd -- groups of POOL random vectors of C channels through the SIMD max-pool
// with random stalls; each pooled vector is compared with a channel-wise reference maximum.
module tb_maxpool_simd;
  import hls4pc_pkg::*;
  localparam int C = 8, L = 2, F = C / L, P = 5, GROUPS = 60;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0, stalls = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, out_last;
  coord_t in_data [L], out_data [L];

  maxpool_simd #(.C(C), .N_SIMD(L), .POOL(P)) dut (.*);

  coord_t vecs [GROUPS][P][C];
  coord_t expv [GROUPS][C];
  int ob = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (out_valid && !out_ready) stalls++;
    if (out_valid && out_ready) begin
      automatic int g = ob / F, b = ob % F;
      checks++;
      for (int l = 0; l < L; l++)
        if (out_data[l] != expv[g][b*L + l]) begin
          failures++; $display("g=%0d ch=%0d got %0d exp %0d", g, b*L+l, out_data[l], expv[g][b*L+l]);
        end
      if (out_last != (b == F-1)) begin failures++; $display("last wrong"); end
      ob++;
    end
  end

  initial begin
    for (int g = 0; g < GROUPS; g++)
      for (int c = 0; c < C; c++) begin
        expv[g][c] = -8'sd128;
        for (int p = 0; p < P; p++) begin
          vecs[g][p][c] = coord_t'($urandom);
          if (vecs[g][p][c] > expv[g][c]) expv[g][c] = vecs[g][p][c];
        end
      end
    in_valid = 0; out_ready = 0;
    for (int l = 0; l < L; l++) in_data[l] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int g = 0; g < GROUPS; g++)
      for (int p = 0; p < P; p++)
        for (int b = 0; b < F; b++) begin
          @(negedge clk);
          while ($urandom % 5 == 0) begin
            in_valid = 0; out_ready = ($urandom % 2) == 0; @(negedge clk);
          end
          in_valid = 1;
          for (int l = 0; l < L; l++) in_data[l] = vecs[g][p][b*L + l];
          out_ready = (g % 2 == 0) ? 1'b1 : ($urandom % 2) == 0;
          @(posedge clk);
          while (!in_ready) begin
            @(negedge clk); out_ready = ($urandom % 2) == 0; @(posedge clk);
          end
        end
    @(negedge clk); in_valid = 0; out_ready = 1;
    repeat (10) @(negedge clk);
    checks++;
    if (ob != GROUPS * F || stalls == 0) begin failures++; $display("ob=%0d stalls=%0d", ob, stalls); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
