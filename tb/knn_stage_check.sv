// knn_stage_check -- testbench helper: one knn_unit at the given sizes, fed with one random
// cloud, every neighbour beat compared with a brute-force reference (LFSR model, sort on
// distance then index). Reports its counts through ports when `done` rises.
module knn_stage_check #(
  parameter int N = 64,
  parameter int NS = 32,
  parameter int K = 16,
  parameter int X = 4,
  parameter int SEL = X
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  import hls4pc_pkg::*;
  localparam int IW = $clog2(N);
  localparam int PERIOD = 2 + N / X + K * (N / SEL + 1);

  logic in_valid, in_ready, out_valid, out_ready, out_last, out_cloud_last;
  point_t in_point, out_center, out_nbr;
  logic [IW-1:0] out_sample_idx, out_nbr_idx;

  knn_unit #(.N(N), .NUM_SAMP(NS), .K(K), .X(X), .SEL(SEL)) dut (.*);

  point_t pts [N];
  int exp_s [NS];
  int exp_n [NS][K];

  function automatic int d2(point_t p, point_t q);
    int dx = int'(p.x) - int'(q.x), dy = int'(p.y) - int'(q.y), dz = int'(p.z) - int'(q.z);
    return dx*dx + dy*dy + dz*dz;
  endfunction

  initial begin : run
    automatic logic [IW-1:0] st = IW'(1);
    automatic logic [IW-1:0] taps = IW'(lfsr_taps(IW));
    automatic int s = 0, j = 0;
    automatic longint last_t = -1;
    bit used [N];
    done = 0; checks = 0; failures = 0;
    in_valid = 0; in_point = '0; out_ready = 1;
    for (int i = 0; i < N; i++) pts[i] = point_t'($urandom);
    for (int a = 0; a < NS; a++) begin
      exp_s[a] = int'(st) - 1;
      st = {st[IW-2:0], ^(st & taps)};
      for (int i = 0; i < N; i++) used[i] = 0;
      for (int b = 0; b < K; b++) begin
        automatic int bi = -1, bd = 0;
        for (int i = 0; i < N; i++) begin
          automatic int dd = d2(pts[exp_s[a]], pts[i]);
          if (!used[i] && (bi < 0 || dd < bd)) begin bi = i; bd = dd; end
        end
        used[bi] = 1;
        exp_n[a][b] = bi;
      end
    end
    @(posedge rst_n);
    @(negedge clk);
    for (int i = 0; i < N; i++) begin
      in_valid = 1; in_point = pts[i];
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      #1;
    end
    in_valid = 0;
    while (s < NS) begin
      @(posedge clk);
      if (out_valid) begin
        checks++;
        if (int'(out_sample_idx) != exp_s[s] || int'(out_nbr_idx) != exp_n[s][j] ||
            out_nbr != pts[exp_n[s][j]] || out_last != (j == K-1) ||
            out_cloud_last != (j == K-1 && s == NS-1)) begin
          failures++;
          $display("N=%0d s=%0d j=%0d: got %0d/%0d exp %0d/%0d", N, s, j,
                   out_sample_idx, out_nbr_idx, exp_s[s], exp_n[s][j]);
        end
        if (j == K-1) begin
          if (last_t >= 0) begin
            checks++;
            if ($time/10 - last_t != longint'(PERIOD)) begin
              failures++; $display("N=%0d period %0d exp %0d", N, $time/10 - last_t, PERIOD);
            end
          end
          last_t = $time/10;
          j = 0; s++;
        end else j++;
      end
      #1;
    end
    done = 1;
  end
endmodule
