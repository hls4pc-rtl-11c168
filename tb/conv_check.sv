// conv_check -- testbench helper: one conv1d_layer at the given sizes and precisions.
// It loads random weights and biases, streams SEQS random sequences and compares every
// output beat with a reference valid convolution (bias, arithmetic shift, saturation to
// A_BITS). The first half runs with input and output always ready and checks the window
// period CIN + (COUT/NPE)*(KSIZE*CIN+1); the second half adds random gaps and
// back-pressure. It also requires that back-pressure and saturation both occurred.
module conv_check #(
  parameter int CIN = 5,
  parameter int COUT = 8,
  parameter int KS = 3,
  parameter int LEN = 7,
  parameter int NPE = 2,
  parameter int AB = 8,
  parameter int WB = 8,
  parameter int SEQS = 10
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int FOLDS = COUT / NPE, SEG = KS * CIN, SH = WB - 1;
  localparam int PERIOD = CIN + FOLDS * (SEG + 1);
  localparam int NW = COUT * SEG;
  localparam int WA = (NW > 1) ? $clog2(NW) : 1, BA = (COUT > 1) ? $clog2(COUT) : 1;
  localparam longint AMAX = (longint'(1) << (AB - 1)) - 1, AMIN = -AMAX - 1;
  localparam longint WMAX = (longint'(1) << (WB - 1)) - 1;
  typedef logic signed [AB-1:0] act_t;

  int stalls = 0, sats = 0;
  logic w_we, b_we;
  logic [WA-1:0] w_addr;
  logic [BA-1:0] b_addr;
  logic signed [WB-1:0] w_data;
  logic signed [AB+WB-1:0] b_data;
  logic in_valid, in_ready, out_valid, out_ready, out_last;
  act_t in_data, out_data [NPE];

  conv1d_layer #(.CIN(CIN), .COUT(COUT), .KSIZE(KS), .LEN(LEN), .NPE(NPE),
                 .A_BITS(AB), .W_BITS(WB)) dut (.*);

  longint W [COUT][KS][CIN];
  longint B [COUT];
  longint A [SEQS][LEN][CIN];
  act_t   expq [$];
  bit     phase2 = 0;
  longint last_t = -1;
  int     nwin = 0;

  function automatic longint rnd(longint lo, longint hi);
    return lo + longint'({$urandom, $urandom} % (hi - lo + 1));
  endfunction

  function automatic act_t ref_out(int s, int p, int o);
    longint acc = B[o];
    for (int k = 0; k < KS; k++)
      for (int c = 0; c < CIN; c++) acc += W[o][k][c] * A[s][p + k][c];
    acc = acc >>> SH;
    if (acc > AMAX) return act_t'(AMAX);
    if (acc < AMIN) return act_t'(AMIN);
    return act_t'(acc);
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (out_valid && !out_ready) stalls++;
    if (out_valid && out_ready) begin
      checks++;
      for (int p = 0; p < NPE; p++) begin
        automatic act_t e = expq.pop_front();
        if (longint'(e) == AMAX || longint'(e) == AMIN) sats++;
        if (out_data[p] != e) begin
          failures++; $display("%0d/%0d lane %0d got %0d exp %0d", WB, AB, p, out_data[p], e);
        end
      end
      if (out_last) begin
        if (!phase2 && (nwin % (LEN - KS + 1)) != 0) begin
          checks++;
          if ($time/10 - last_t != longint'(PERIOD)) begin
            failures++; $display("window period %0d exp %0d", $time/10 - last_t, PERIOD);
          end
        end
        last_t = $time/10;
        nwin++;
      end
    end
  end

  initial begin
    done = 0; checks = 0; failures = 0;
    w_we = 0; b_we = 0; w_addr = '0; b_addr = '0; w_data = '0; b_data = '0;
    in_valid = 0; in_data = '0; out_ready = 1;
    for (int o = 0; o < COUT; o++) begin
      B[o] = rnd(-(longint'(1) << (AB + WB - 3)), longint'(1) << (AB + WB - 3));
      for (int k = 0; k < KS; k++)
        for (int c = 0; c < CIN; c++) W[o][k][c] = rnd(-WMAX - 1, WMAX);
    end
    for (int s = 0; s < SEQS; s++)
      for (int p = 0; p < LEN; p++)
        for (int c = 0; c < CIN; c++) A[s][p][c] = rnd(AMIN, AMAX);
    for (int s = 0; s < SEQS; s++)
      for (int p = 0; p + KS <= LEN; p++)
        for (int o = 0; o < COUT; o++) expq.push_back(ref_out(s, p, o));
    @(posedge rst_n);
    for (int o = 0; o < COUT; o++) begin
      for (int k = 0; k < KS; k++)
        for (int c = 0; c < CIN; c++) begin
          @(negedge clk);
          w_we = 1; w_addr = WA'((o * KS + k) * CIN + c); w_data = WB'(W[o][k][c]);
        end
      @(negedge clk);
      w_we = 0; b_we = 1; b_addr = BA'(o); b_data = (AB+WB)'(B[o]);
    end
    @(negedge clk); b_we = 0;
    for (int s = 0; s < SEQS; s++) begin
      if (s == SEQS / 2) phase2 = 1;
      for (int p = 0; p < LEN; p++)
        for (int c = 0; c < CIN; c++) begin
          if (phase2) while ($urandom % 3 == 0) begin in_valid = 0; @(negedge clk); end
          in_valid = 1; in_data = act_t'(A[s][p][c]);
          @(posedge clk);
          while (!in_ready) begin
            @(negedge clk);
            if (phase2) out_ready = ($urandom % 3) != 0;
            @(posedge clk);
          end
          @(negedge clk);
          if (phase2) out_ready = ($urandom % 3) != 0;
        end
    end
    in_valid = 0;
    while (expq.size() != 0) begin @(negedge clk); out_ready = ($urandom % 3) != 0; end
    checks++;
    if (stalls == 0 || sats == 0) begin failures++; $display("stalls=%0d sats=%0d", stalls, sats); end
    done = 1;
  end
endmodule
