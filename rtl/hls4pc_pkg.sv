// hls4pc_pkg -- types and constants shared by the point-cloud accelerator blocks.
//
// Points are three signed 8-bit fixed-point coordinates (the 8/8-bit weight/activation
// precision of the compressed model). A squared Euclidean distance between two such points
// needs 19 bits: each coordinate difference is 9 bits signed, its square at most 2^16, and
// the sum of three squares stays below 2^19. The all-ones distance is the "maximum numeric
// limit" the KNN selection loop writes over an already chosen neighbour.
// lfsr_taps() returns a maximal-length (primitive polynomial) Fibonacci tap mask for widths
// 3..16; the tap sets are the standard maximal-length list, not something taken from the paper.
package hls4pc_pkg;

  localparam int unsigned COORD_W = 8;   // activation / coordinate precision
  localparam int unsigned WGT_W   = 8;   // weight precision
  localparam int unsigned DIST_W  = 19;  // squared distance of two 8-bit 3D points

  typedef logic signed [COORD_W-1:0] coord_t;
  typedef logic        [DIST_W-1:0]  dist_t;

  typedef struct packed {
    coord_t x;
    coord_t y;
    coord_t z;
  } point_t;

  localparam dist_t DIST_MAX = '1;

  // Tap mask of a maximal-length LFSR: bit (n-1) set for tap n of the polynomial.
  function automatic logic [15:0] lfsr_taps(input int unsigned width);
    case (width)
      3:       return 16'h0006;  // x^3  + x^2 + 1
      4:       return 16'h000C;  // x^4  + x^3 + 1
      5:       return 16'h0014;  // x^5  + x^3 + 1
      6:       return 16'h0030;  // x^6  + x^5 + 1
      7:       return 16'h0060;  // x^7  + x^6 + 1
      8:       return 16'h00B8;  // x^8  + x^6 + x^5 + x^4 + 1
      9:       return 16'h0110;  // x^9  + x^5 + 1
      10:      return 16'h0240;  // x^10 + x^7 + 1
      11:      return 16'h0500;  // x^11 + x^9 + 1
      12:      return 16'h0829;  // x^12 + x^6 + x^4 + x + 1
      13:      return 16'h100D;  // x^13 + x^4 + x^3 + x + 1
      14:      return 16'h2015;  // x^14 + x^5 + x^3 + x + 1
      15:      return 16'h6000;  // x^15 + x^14 + 1
      default: return 16'hD008;  // x^16 + x^15 + x^13 + x^4 + 1
    endcase
  endfunction

  // Saturate a wide signed value to COORD_W bits.
  function automatic coord_t sat_coord(input logic signed [31:0] v);
    if (v > 32'sd127)       return coord_t'(8'sd127);
    else if (v < -32'sd128) return coord_t'(-8'sd128);
    else                    return coord_t'(v[COORD_W-1:0]);
  endfunction

endpackage
