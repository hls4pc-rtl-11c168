// knn_unit -- uniform random sampling plus K-nearest-neighbour grouping of one point cloud.
//
// Structure (after the KNN architecture of the paper): a line buffer holds the N input
// points of a cloud; an LFSR generator picks NUM_SAMP sample points; X distance PEs compute,
// X points per clock, the distance of every point to the current sample into a distance
// buffer partitioned into SEL banks (SEL a multiple of X); a selection loop then runs K times: it scans the buffer
// (SEL entries per clock), finds the index of the smallest distance, sends that neighbour to
// the output buffer and overwrites its distance with the maximum value of the distance type,
// so the next pass finds the next-nearest point. The sample itself (distance 0) is always
// its own first neighbour.
//
// Operation, per cloud: LOAD accepts N points (in_valid/in_ready, one point per clock);
// then for each of NUM_SAMP samples: SAMPLE (1 clock), DIST (N/X issue clocks + 1 drain
// clock), and K x (SCAN N/SEL clocks + EMIT 1 clock). EMIT waits while the output FIFO is
// full. One sample therefore takes 2 + N/X + K*(N/SEL+1) clocks without back-pressure. After
// the last sample the unit returns to LOAD; the LFSR restarts from its seed for every cloud.
//
// Output stream: one beat per neighbour, K beats per sample, in order nearest first:
// sample index, neighbour index, sample (centre) point, neighbour point and `out_last` on
// the K-th beat of a sample. `out_cloud_last` marks the last beat of the last sample.
//
// From the paper: the structure above, K=16, X=4, NUM_SAMP=256 (first stage), repeated
// min-search with max-value overwrite. This design's choices: squared Euclidean distance,
// ties broken towards the lower point index, the selection width SEL (default X; SEL = 32
// brings a 512-point, 256-sample cloud to about 103k clocks), sample index = LFSR state - 1, sequential
// (not overlapped) distance and selection phases, FIFO depth K, the beat format.
module knn_unit
  import hls4pc_pkg::*;
#(
  parameter int unsigned N        = 512,
  parameter int unsigned NUM_SAMP = 256,
  parameter int unsigned K        = 16,
  parameter int unsigned X        = 4,
  parameter int unsigned SEL      = X,
  parameter int unsigned SEED     = 1,
  localparam int unsigned IDX_W   = $clog2(N)
) (
  input  logic             clk,
  input  logic             rst_n,
  // input point stream
  input  logic             in_valid,
  output logic             in_ready,
  input  point_t           in_point,
  // neighbour stream
  output logic             out_valid,
  input  logic             out_ready,
  output logic [IDX_W-1:0] out_sample_idx,
  output logic [IDX_W-1:0] out_nbr_idx,
  output point_t           out_center,
  output point_t           out_nbr,
  output logic             out_last,
  output logic             out_cloud_last
);
  localparam int unsigned GROUPS = N / X;
  localparam int unsigned GW     = (GROUPS > 1) ? $clog2(GROUPS) : 1;
  localparam int unsigned XW     = (X > 1) ? $clog2(X) : 1;
  localparam int unsigned ROWS   = N / SEL;
  localparam int unsigned RW     = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int unsigned LW     = (SEL > 1) ? $clog2(SEL) : 1;
  localparam int unsigned SW     = $clog2(NUM_SAMP + 1);
  localparam int unsigned KW     = $clog2(K + 1);

  typedef enum logic [2:0] {S_LOAD, S_SAMPLE, S_DIST, S_SCAN, S_EMIT} state_e;

  typedef struct packed {
    logic [IDX_W-1:0] sample_idx;
    logic [IDX_W-1:0] nbr_idx;
    point_t           center;
    point_t           nbr;
    logic             last;
    logic             cloud_last;
  } beat_t;

  state_e state;

  // line buffer (X banks so that X points are read per clock)
  point_t pts [GROUPS][X];
  // distance buffer, ROWS rows of SEL entries (SEL is a multiple of X)
  dist_t  dbuf [ROWS][SEL];

  logic [IDX_W-1:0] load_cnt;
  logic [GW-1:0]    grp;          // group being issued
  logic [RW-1:0]    row;          // distance-buffer row being scanned
  logic [SW-1:0]    samp_cnt;
  logic [KW-1:0]    nbr_cnt;
  logic [IDX_W-1:0] samp_idx;
  point_t           center;

  // distance pipeline
  logic             pe_valid_in;
  logic [X-1:0]     pe_valid_out;
  dist_t            pe_dist [X];
  logic [GW-1:0]    wr_grp;

  // running minimum of the selection loop
  dist_t            best_d;
  logic [IDX_W-1:0] best_i;
  dist_t            row_d;
  logic [IDX_W-1:0] row_i;
  logic [IDX_W-1:0] wr_base;

  // LFSR
  logic             lfsr_restart, lfsr_step;
  logic [IDX_W-1:0] lfsr_state, lfsr_idx;

  // output buffer
  beat_t            fifo_in, fifo_out;
  logic             fifo_in_valid, fifo_in_ready;

  lfsr_gen #(.WIDTH(IDX_W), .SEED(IDX_W'(SEED))) u_lfsr (
    .clk, .rst_n,
    .restart(lfsr_restart),
    .step   (lfsr_step),
    .state  (lfsr_state),
    .idx    (lfsr_idx)
  );

  // the DIST phase issues GROUPS groups and then waits one clock for the last result
  logic dist_drain;
  assign pe_valid_in = (state == S_DIST) && !dist_drain;

  for (genvar j = 0; j < X; j++) begin : g_pe
    distance_pe u_pe (
      .clk, .rst_n,
      .in_valid (pe_valid_in),
      .a        (center),
      .b        (pts[grp][j]),
      .out_valid(pe_valid_out[j]),
      .distance (pe_dist[j])
    );
  end

  // minimum of the SEL entries of the row under the scan pointer (lower index wins ties)
  always_comb begin
    row_d = dbuf[row][0];
    row_i = {row, LW'(0)};
    for (int j = 1; j < SEL; j++) begin
      if (dbuf[row][j] < row_d) begin
        row_d = dbuf[row][j];
        row_i = {row, LW'(j)};
      end
    end
  end

  // first point index of the group whose distances are being written
  assign wr_base = {wr_grp, XW'(0)};

  assign in_ready     = (state == S_LOAD);
  assign lfsr_restart = (state == S_LOAD);
  assign lfsr_step    = (state == S_SAMPLE);

  always_comb begin
    fifo_in.sample_idx = samp_idx;
    fifo_in.nbr_idx    = best_i;
    fifo_in.center     = center;
    fifo_in.nbr        = pts[best_i[IDX_W-1:XW]][best_i[XW-1:0]];
    fifo_in.last       = (nbr_cnt == KW'(K-1));
    fifo_in.cloud_last = (nbr_cnt == KW'(K-1)) && (samp_cnt == SW'(NUM_SAMP-1));
  end
  assign fifo_in_valid = (state == S_EMIT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_LOAD;
      load_cnt   <= '0;
      grp        <= '0;
      row        <= '0;
      wr_grp     <= '0;
      samp_cnt   <= '0;
      nbr_cnt    <= '0;
      samp_idx   <= '0;
      center     <= '0;
      best_d     <= DIST_MAX;
      best_i     <= '0;
      dist_drain <= 1'b0;
    end else begin
      case (state)
        S_LOAD: if (in_valid) begin
          pts[load_cnt[IDX_W-1:XW]][load_cnt[XW-1:0]] <= in_point;
          load_cnt <= load_cnt + IDX_W'(1);
          if (load_cnt == IDX_W'(N-1)) begin
            state    <= S_SAMPLE;
            samp_cnt <= '0;
          end
        end
        S_SAMPLE: begin
          samp_idx   <= lfsr_idx;
          center     <= pts[lfsr_idx[IDX_W-1:XW]][lfsr_idx[XW-1:0]];
          grp        <= '0;
          dist_drain <= 1'b0;
          state      <= S_DIST;
        end
        S_DIST: begin
          // issue side
          if (!dist_drain) begin
            wr_grp <= grp;
            if (grp == GW'(GROUPS-1)) dist_drain <= 1'b1;
            else                      grp <= grp + GW'(1);
          end
          // write-back side: results of the group issued one clock earlier
          if (pe_valid_out[0]) begin
            for (int j = 0; j < X; j++)
              dbuf[wr_base[IDX_W-1:LW]][wr_base[LW-1:0] + LW'(j)] <= pe_dist[j];
          end
          if (dist_drain) begin
            state   <= S_SCAN;
            row     <= '0;
            nbr_cnt <= '0;
            best_d  <= DIST_MAX;
            best_i  <= '0;
          end
        end
        S_SCAN: begin
          // strict compare keeps the earlier index on ties; the first group always loads
          if (row == '0 || row_d < best_d) begin
            best_d <= row_d;
            best_i <= row_i;
          end
          if (row == RW'(ROWS-1)) state <= S_EMIT;
          else                    row   <= row + RW'(1);
        end
        S_EMIT: if (fifo_in_ready) begin
          dbuf[best_i[IDX_W-1:LW]][best_i[LW-1:0]] <= DIST_MAX;
          row <= '0;
          if (nbr_cnt == KW'(K-1)) begin
            if (samp_cnt == SW'(NUM_SAMP-1)) begin
              state    <= S_LOAD;
              load_cnt <= '0;
            end else begin
              samp_cnt <= samp_cnt + SW'(1);
              state    <= S_SAMPLE;
            end
          end else begin
            nbr_cnt <= nbr_cnt + KW'(1);
            state   <= S_SCAN;
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  stream_fifo #(.WIDTH($bits(beat_t)), .DEPTH(K)) u_out_buf (
    .clk, .rst_n,
    .in_valid (fifo_in_valid),
    .in_ready (fifo_in_ready),
    .in_data  (fifo_in),
    .out_valid(out_valid),
    .out_ready(out_ready),
    .out_data (fifo_out)
  );

  assign out_sample_idx = fifo_out.sample_idx;
  assign out_nbr_idx    = fifo_out.nbr_idx;
  assign out_center     = fifo_out.center;
  assign out_nbr        = fifo_out.nbr;
  assign out_last       = fifo_out.last;
  assign out_cloud_last = fifo_out.cloud_last;

  initial begin
    assert (N % X == 0) else $error("knn_unit: N must be a multiple of X");
    assert ((1 << IDX_W) == N) else $error("knn_unit: N must be a power of two");
    assert ((1 << XW) == X) else $error("knn_unit: X must be a power of two");
    assert ((1 << LW) == SEL && SEL % X == 0 && SEL < N)
      else $error("knn_unit: SEL must be a power-of-two multiple of X below N");
    assert (NUM_SAMP < N) else $error("knn_unit: NUM_SAMP must be below N");
    assert (K <= N) else $error("knn_unit: K must not exceed N");
  end
endmodule
