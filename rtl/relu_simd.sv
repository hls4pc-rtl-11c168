// relu_simd -- ReLU activation unit with N_SIMD parallel lanes.
//
// Each beat carries N_SIMD activations (D_BITS each, default 8) of one feature vector; every lane clamps a negative
// value to zero. A feature vector of C channels takes the folding factor F = C / N_SIMD
// beats, and the unit marks the F-th beat of each vector with `out_last`. One register
// stage: a beat appears on the output the clock after it is accepted, and the unit takes a
// new beat every clock unless the output is stalled (in_ready = !out_valid || out_ready).
// From the paper: SIMD lanes, clamping negatives to zero, F = C_in / N_SIMD. The register
// stage and the valid/ready handshake are this design's choices. The sign bit of every output
// lane is zero by construction (a ReLU output is never negative).
module relu_simd
  import hls4pc_pkg::*;
#(
  parameter int unsigned C      = 32,
  parameter int unsigned N_SIMD = 4,
  parameter int unsigned D_BITS = COORD_W
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

  logic [FW-1:0] beat;

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      beat      <= '0;
      for (int l = 0; l < N_SIMD; l++) out_data[l] <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int l = 0; l < N_SIMD; l++)
          out_data[l] <= in_data[l][D_BITS-1] ? '0 : in_data[l];
        out_last <= (beat == FW'(F-1));
        beat     <= (beat == FW'(F-1)) ? '0 : beat + FW'(1);
      end
    end
  end

  initial assert (C % N_SIMD == 0) else $error("relu_simd: C must be a multiple of N_SIMD");
endmodule
