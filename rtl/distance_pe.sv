// distance_pe -- one distance processing element of the KNN unit.
//
// Computes the squared Euclidean distance between a sample point and an input point:
// (dx^2 + dy^2 + dz^2) with 9-bit signed differences. No square root is taken: the
// ordering of neighbours is the same. The paper names these PEs and says they compute the
// distance from each point to the sample; the squared-Euclidean metric and the single
// register stage are this design's choices.
//
// Timing: one pipeline register; `distance`/`out_valid` follow `a`,`b`/`in_valid` by one clock.
module distance_pe
  import hls4pc_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  point_t a,
  input  point_t b,
  output logic   out_valid,
  output dist_t  distance
);
  logic signed [COORD_W:0] dx, dy, dz;
  dist_t d_next;

  always_comb begin
    dx = (COORD_W+1)'(a.x) - (COORD_W+1)'(b.x);
    dy = (COORD_W+1)'(a.y) - (COORD_W+1)'(b.y);
    dz = (COORD_W+1)'(a.z) - (COORD_W+1)'(b.z);
    d_next = DIST_W'(dx * dx) + DIST_W'(dy * dy) + DIST_W'(dz * dz);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      distance  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) distance <= d_next;
    end
  end
endmodule
