// tb_hls4pc_stage_full -- end-to-end test of the point-cloud stage (all parameters at their defaults, one cloud).
// The testbench streams 1 random point cloud(s) into the stage, loads random conv
// weights and biases, and compares every pooled output beat with a reference computed
// here: LFSR sample draw, K nearest neighbours by (distance, index), relative coordinates
// saturated to 8 bits, 1x1 convolution with bias, shift and saturation, ReLU and the
// channel-wise maximum over the K neighbours. It also counts the mechanisms of the design
// and fails if one never happened: KNN output-buffer stall, convolution output stall,
// consumer back-pressure, saturation of a relative coordinate, ReLU clamping, and the
// max-pool replacing its first value. Clock count per sample is checked against the KNN
// bound 2 + N/X + K*(N/SEL+1) while the output is always ready.
module tb_hls4pc_stage_full;
  import hls4pc_pkg::*;
  localparam int N = 512, NS = 256, K = 16, X = 4, COUT = 32, NPE = 4, SH = 7;
  localparam int CLOUDS = 1;
  localparam int IW = $clog2(N), G = N / X, FOLDS = COUT / NPE;
  localparam int PERIOD = 2 + G + K * (N / 4 + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  int n_knn_stall = 0, n_conv_stall = 0, n_out_stall = 0, n_sat = 0, n_relu = 0, n_poolupd = 0;
  always #5 clk = ~clk;

  logic w_we, b_we;
  logic [$clog2(COUT*3)-1:0] w_addr;
  logic [$clog2(COUT)-1:0] b_addr;
  logic signed [7:0] w_data;
  logic signed [15:0] b_data;
  logic in_valid, in_ready, out_valid, out_ready, out_last;
  point_t in_point;
  coord_t out_data [NPE];

  hls4pc_stage dut (.*);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int W [COUT][3];
  int B [COUT];
  point_t pts [N];
  coord_t expq [$];
  bit backpressure = 0;

  function automatic int d2(point_t p, point_t q);
    int dx = int'(p.x) - int'(q.x), dy = int'(p.y) - int'(q.y), dz = int'(p.z) - int'(q.z);
    return dx*dx + dy*dy + dz*dz;
  endfunction

  function automatic int sat8(int v);
    return (v > 127) ? 127 : (v < -128) ? -128 : v;
  endfunction

  task automatic make_reference();
    logic [IW-1:0] st = IW'(1);
    logic [IW-1:0] taps = IW'(lfsr_taps(IW));
    bit used [N];
    for (int s = 0; s < NS; s++) begin
      int c = int'(st) - 1;
      int pooled [COUT];
      st = {st[IW-2:0], ^(st & taps)};
      for (int i = 0; i < N; i++) used[i] = 0;
      for (int j = 0; j < K; j++) begin
        int bi = -1, bd = 0;
        int rel [3];
        for (int i = 0; i < N; i++) begin
          int dd = d2(pts[c], pts[i]);
          if (!used[i] && (bi < 0 || dd < bd)) begin bi = i; bd = dd; end
        end
        used[bi] = 1;
        rel[0] = sat8(int'(pts[bi].x) - int'(pts[c].x));
        rel[1] = sat8(int'(pts[bi].y) - int'(pts[c].y));
        rel[2] = sat8(int'(pts[bi].z) - int'(pts[c].z));
        for (int o = 0; o < COUT; o++) begin
          int acc = B[o] + W[o][0]*rel[0] + W[o][1]*rel[1] + W[o][2]*rel[2];
          int v = sat8(acc >>> SH);
          if (v < 0) v = 0;
          if (j == 0 || v > pooled[o]) pooled[o] = v;
        end
      end
      for (int o = 0; o < COUT; o++) expq.push_back(coord_t'(pooled[o]));
    end
  endtask

  // mechanism counters
  always @(posedge clk) if (rst_n) begin
    if (dut.u_knn.fifo_in_valid && !dut.u_knn.fifo_in_ready) n_knn_stall++;
    if (dut.cv_valid && !dut.cv_ready) n_conv_stall++;
    if (out_valid && !out_ready) n_out_stall++;
    if (dut.g_valid && dut.g_ready && (dut.g_data == 127 || dut.g_data == -128)) n_sat++;
    if (dut.u_relu.in_valid && dut.u_relu.in_ready && dut.u_relu.in_data[0] < 0) n_relu++;
    if (dut.u_pool.in_valid && dut.u_pool.in_ready && dut.u_pool.vec != 0 &&
        dut.u_pool.in_data[0] > dut.u_pool.acc[dut.u_pool.beat][0]) n_poolupd++;
  end

  // output checker and per-sample timing
  int nbeat = 0;
  longint last_t = -1;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    for (int p = 0; p < NPE; p++) begin
      automatic coord_t e = expq.pop_front();
      if (out_data[p] != e) begin
        failures++;
        if (failures < 10) $display("beat %0d lane %0d: got %0d exp %0d", nbeat, p, out_data[p], e);
      end
    end
    if (out_last != (nbeat % FOLDS == FOLDS-1)) begin failures++; $display("out_last wrong"); end
    if (out_last) begin
      if (!backpressure && last_t >= 0 && (nbeat / FOLDS) % NS != 0) begin
        checks++;
        if ($time/10 - last_t != longint'(PERIOD)) begin
          failures++; $display("sample period %0d exp %0d", $time/10 - last_t, PERIOD);
        end
      end
      last_t = $time/10;
    end
    nbeat++;
  end

  initial begin
    w_we = 0; b_we = 0; w_addr = '0; b_addr = '0; w_data = '0; b_data = '0;
    in_valid = 0; in_point = '0; out_ready = 1;
    for (int o = 0; o < COUT; o++) begin
      B[o] = $urandom_range(0, 2000) - 1000;
      for (int c = 0; c < 3; c++) W[o][c] = $urandom_range(0, 255) - 128;
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int o = 0; o < COUT; o++) begin
      for (int c = 0; c < 3; c++) begin
        @(negedge clk); w_we = 1; w_addr = ($clog2(COUT*3))'(o * 3 + c); w_data = 8'(W[o][c]);
      end
      @(negedge clk); w_we = 0; b_we = 1; b_addr = ($clog2(COUT))'(o); b_data = 16'(B[o]);
    end
    @(negedge clk); b_we = 0;
    for (int cl = 0; cl < CLOUDS; cl++) begin
      backpressure = (cl % 2 == 1);
      // most points fill a corner of the cube; the first two samples the LFSR will draw are
      // moved to the opposite corner, so their neighbours lie far away and the relative
      // coordinates saturate
      for (int i = 0; i < N; i++)
        pts[i] = '{x: coord_t'($urandom_range(0, 90)) - 8'sd128,
                   y: coord_t'($urandom_range(0, 90)) - 8'sd128,
                   z: coord_t'($urandom_range(0, 90)) - 8'sd128};
      begin
        automatic logic [IW-1:0] st = IW'(1);
        for (int s = 0; s < 2; s++) begin
          pts[int'(st) - 1] = '{x: 8'sd120, y: 8'sd120, z: 8'sd120 - coord_t'(s)};
          st = {st[IW-2:0], ^(st & IW'(lfsr_taps(IW)))};
        end
      end
      make_reference();
      for (int i = 0; i < N; i++) begin
        in_valid = 1; in_point = pts[i];
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        @(negedge clk);
      end
      in_valid = 0;
      while (expq.size() != 0) begin
        @(negedge clk);
        out_ready = backpressure ? ($urandom % 256 == 0) : 1'b1;
      end
      out_ready = 1;
    end
    repeat (4) @(negedge clk);
    checks++;
    if (nbeat != CLOUDS * NS * FOLDS) begin failures++; $display("beats %0d", nbeat); end
    $display("mechanisms: knn_stall=%0d conv_stall=%0d out_stall=%0d sat=%0d relu_clamp=%0d pool_update=%0d",
             n_knn_stall, n_conv_stall, n_out_stall, n_sat, n_relu, n_poolupd);
    checks++; if (n_sat == 0) begin failures++; $display("n_sat never happened"); end
    checks++; if (n_relu == 0) begin failures++; $display("n_relu never happened"); end
    checks++; if (n_poolupd == 0) begin failures++; $display("n_poolupd never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
