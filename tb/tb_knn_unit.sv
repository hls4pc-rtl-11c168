// tb_knn_unit -- URS + KNN unit against an independent reference.
// Two clouds of random points (coordinates from a small range so that equal distances
// occur) are streamed in. The reference draws the samples with its own LFSR model and
// finds the K nearest points of each by sorting on (distance, index). Every output beat
// is compared field by field. Cloud 1 runs with out_ready held high and checks the
// per-sample period 2 + N/X + K*(N/X+1) clocks; cloud 2 applies random back-pressure.
module tb_knn_unit;
  import hls4pc_pkg::*;
  localparam int N = 64, NS = 12, K = 5, X = 4, G = N / X;
  localparam int IW = $clog2(N);
  localparam int PERIOD = 2 + G + K * (G + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0, stalls = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, out_last, out_cloud_last;
  point_t in_point, out_center, out_nbr;
  logic [IW-1:0] out_sample_idx, out_nbr_idx;

  knn_unit #(.N(N), .NUM_SAMP(NS), .K(K), .X(X)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  point_t pts [N];
  int exp_s [NS];
  int exp_n [NS][K];

  function automatic int d2(point_t p, point_t q);
    int dx = int'(p.x) - int'(q.x), dy = int'(p.y) - int'(q.y), dz = int'(p.z) - int'(q.z);
    return dx*dx + dy*dy + dz*dz;
  endfunction

  task automatic make_reference();
    logic [IW-1:0] st = IW'(1);
    logic [IW-1:0] taps = IW'(lfsr_taps(IW));
    for (int s = 0; s < NS; s++) begin
      bit used [N];
      exp_s[s] = int'(st) - 1;
      st = {st[IW-2:0], ^(st & taps)};
      for (int i = 0; i < N; i++) used[i] = 0;
      for (int j = 0; j < K; j++) begin
        int bi = -1, bd = 0;
        for (int i = 0; i < N; i++) begin
          int dd = d2(pts[exp_s[s]], pts[i]);
          if (!used[i] && (bi < 0 || dd < bd)) begin bi = i; bd = dd; end
        end
        used[bi] = 1;
        exp_n[s][j] = bi;
      end
    end
  endtask

  task automatic run_cloud(input bit backpressure);
    int s = 0, j = 0;
    longint last_t = -1;
    for (int i = 0; i < N; i++)
      pts[i] = '{x: coord_t'($urandom_range(0, 6)) - 8'sd3,
                 y: coord_t'($urandom_range(0, 6)) - 8'sd3,
                 z: coord_t'($urandom_range(0, 2) * 60)};
    make_reference();
    // load
    for (int i = 0; i < N; i++) begin
      in_valid = 1'b1; in_point = pts[i];
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      #1;
    end
    in_valid = 1'b0;
    // collect
    while (s < NS) begin
      out_ready = backpressure ? ($urandom % 3 == 0) : 1'b1;
      @(posedge clk);
      if (out_valid && !out_ready) stalls++;
      if (out_valid && out_ready) begin
        checks++;
        if (int'(out_sample_idx) != exp_s[s] || int'(out_nbr_idx) != exp_n[s][j] ||
            out_center != pts[exp_s[s]] || out_nbr != pts[exp_n[s][j]] ||
            out_last != (j == K-1) || out_cloud_last != (j == K-1 && s == NS-1)) begin
          failures++;
          $display("s=%0d j=%0d: got samp %0d nbr %0d last %b, exp samp %0d nbr %0d",
                   s, j, out_sample_idx, out_nbr_idx, out_last, exp_s[s], exp_n[s][j]);
        end
        if (j == K-1) begin
          if (!backpressure && last_t >= 0) begin
            checks++;
            if ($time/10 - last_t != longint'(PERIOD)) begin
              failures++; $display("period %0d, expected %0d", $time/10 - last_t, PERIOD);
            end
          end
          last_t = $time/10;
          j = 0; s++;
        end else j++;
      end
      #1;
    end
    out_ready = 1'b0;
  endtask

  initial begin
    in_valid = 1'b0; out_ready = 1'b0; in_point = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    run_cloud(1'b0);
    run_cloud(1'b1);
    checks++;
    if (stalls == 0) begin failures++; $display("no back-pressure seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
