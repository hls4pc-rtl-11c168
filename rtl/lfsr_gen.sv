// lfsr_gen -- pseudo-random index generator for uniform random sampling (URS).
//
// A WIDTH-bit Fibonacci LFSR whose feedback is the XOR of the taps of a primitive polynomial
// (hls4pc_pkg::lfsr_taps), so it walks through all 2^WIDTH-1 non-zero states before repeating.
// It replaces farthest point sampling: each step yields one sample index. With WIDTH =
// log2(N), any run of up to N-1 consecutive states is free of repeats, so the samples of one
// point cloud are distinct. The index is state-1, i.e. 0..N-2.
// Following the paper, the generator uses a primitive polynomial and always restarts from
// the same start state (SEED) so that hardware and training draw the same samples; the tap
// sets, the SEED value and the state-1 mapping are this design's choices.
//
// Interface: `restart` reloads SEED, `step` advances one state; `idx` is combinational from
// the current state and valid in the same cycle. One index per clock.
module lfsr_gen #(
  parameter int unsigned      WIDTH = 9,
  parameter logic [WIDTH-1:0] SEED  = WIDTH'(1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             restart,
  input  logic             step,
  output logic [WIDTH-1:0] state,
  output logic [WIDTH-1:0] idx
);
  import hls4pc_pkg::*;

  localparam logic [WIDTH-1:0] TAPS = lfsr_taps(WIDTH)[WIDTH-1:0];

  logic fb;
  assign fb  = ^(state & TAPS);
  assign idx = state - WIDTH'(1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        state <= SEED;
    else if (restart)  state <= SEED;
    else if (step)     state <= {state[WIDTH-2:0], fb};
  end

  initial begin
    assert (WIDTH >= 3 && WIDTH <= 16) else $error("lfsr_gen: WIDTH must be 3..16");
    assert (SEED != '0) else $error("lfsr_gen: SEED must be non-zero");
  end
endmodule
