// maxpool_simd -- max-pooling layer with N_SIMD parallel lanes.
//
// Reduces POOL consecutive feature vectors of C channels to one vector holding the maximum
// of each channel (in the point-cloud model: the K neighbour features of one local group).
// Input and output beats carry N_SIMD channels of D_BITS (default 8) bits; a vector takes F = C / N_SIMD beats. A
// buffer of C running maxima is updated in place: the first vector of a group loads it,
// later vectors keep the larger value per lane, and while the last vector streams in, each
// beat's result goes straight to the output register, so the pooled vector leaves as F
// beats with `out_last` on the F-th. Latency: one clock after the last input beat of a
// channel group. Input is stalled only while a result beat waits for the consumer.
// From the paper: SIMD parallelism of the pooling layer. The running-max buffer, the
// handshake and the beat format are this design's choices.
module maxpool_simd
  import hls4pc_pkg::*;
#(
  parameter int unsigned C      = 32,
  parameter int unsigned N_SIMD = 4,
  parameter int unsigned D_BITS = COORD_W,
  parameter int unsigned POOL   = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  output logic   in_ready,
  input  logic signed [D_BITS-1:0] in_data [N_SIMD],
  output logic   out_valid,
  input  logic   out_ready,
  output logic signed [D_BITS-1:0] out_data [N_SIMD],
  output logic   out_last
);
  localparam int unsigned F  = C / N_SIMD;
  localparam int unsigned FW = (F > 1) ? $clog2(F) : 1;
  localparam int unsigned VW = (POOL > 1) ? $clog2(POOL) : 1;

  logic signed [D_BITS-1:0] acc [F][N_SIMD];
  logic [FW-1:0] beat;
  logic [VW-1:0] vec;
  logic          last_vec;
  logic signed [D_BITS-1:0] m [N_SIMD];

  assign last_vec = (vec == VW'(POOL-1));
  assign in_ready = !last_vec || !out_valid || out_ready;

  always_comb begin
    for (int l = 0; l < N_SIMD; l++)
      m[l] = (vec == '0 || in_data[l] > acc[beat][l]) ? in_data[l] : acc[beat][l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat      <= '0;
      vec       <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      for (int l = 0; l < N_SIMD; l++) out_data[l] <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        for (int l = 0; l < N_SIMD; l++) acc[beat][l] <= m[l];
        if (last_vec) begin
          out_valid <= 1'b1;
          out_last  <= (beat == FW'(F-1));
          for (int l = 0; l < N_SIMD; l++) out_data[l] <= m[l];
        end
        if (beat == FW'(F-1)) begin
          beat <= '0;
          vec  <= last_vec ? '0 : vec + VW'(1);
        end else begin
          beat <= beat + FW'(1);
        end
      end
    end
  end

  initial assert (C % N_SIMD == 0) else $error("maxpool_simd: C must be a multiple of N_SIMD");
endmodule
