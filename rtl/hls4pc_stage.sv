// hls4pc_stage -- one local-feature stage of a point-based point-cloud network, built from
// the streaming library blocks: URS sampling + KNN grouping, a 1x1 convolution (shared MLP)
// over every neighbour, ReLU, and max-pooling over the K neighbours of each sample.
//
// Dataflow (all blocks connected by valid/ready streams, each running concurrently):
//   points --> knn_unit --> grouper --> conv1d_layer --> relu_simd --> maxpool_simd --> out
// knn_unit takes the N points of a cloud, draws NUM_SAMP samples with its LFSR and emits
// the K nearest neighbours of each. The grouper turns every neighbour into CIN = 3 input
// channels for the convolution, the neighbour's coordinates relative to its sample
// (saturated to 8 bits), one channel per beat. conv1d_layer (kernel 1, LEN = K) computes
// COUT features per neighbour, NPE at a time; relu_simd and maxpool_simd work on the same
// N_SIMD = NPE lanes, and maxpool_simd keeps the channel-wise maximum over the K neighbours.
// Output: per sample, COUT/NPE beats of NPE signed 8-bit features, `out_last` on the last.
// Samples appear in the order the LFSR draws them; out_sample_idx is not carried, the
// order being fixed by the seed.
//
// The throughput is set by the KNN selection loop: about K*(N/SEL+1) clocks per sample,
// against K*(3 + COUT/NPE*(3+1)) clocks for the convolution of its K neighbours.
//
// From the paper: N = 512 input points, NUM_SAMP = 256, K = 16, X = 4 distance PEs, 8-bit
// data, URS with an LFSR, KNN by repeated minimum search, conv with batch-norm folded into
// weights and bias, SIMD ReLU and max-pooling. This design's choices: the relative
// coordinates as the features (the paper prunes the learnable affine normalisation and says
// no more), COUT = 32, NPE = 4, SEL = X (selection scan width), the weight load port and
// the stream formats.
module hls4pc_stage
  import hls4pc_pkg::*;
#(
  parameter int unsigned N        = 512,
  parameter int unsigned NUM_SAMP = 256,
  parameter int unsigned K        = 16,
  parameter int unsigned X        = 4,
  parameter int unsigned SEL      = X,
  parameter int unsigned COUT     = 32,
  parameter int unsigned NPE      = 4,
  parameter int unsigned SHIFT    = 7,
  parameter int unsigned SEED     = 1,
  localparam int unsigned CIN     = 3,
  localparam int unsigned NW      = COUT * CIN,
  localparam int unsigned WA_W    = $clog2(NW),
  localparam int unsigned BA_W    = $clog2(COUT)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // weight / bias load port of the convolution
  input  logic                    w_we,
  input  logic [WA_W-1:0]         w_addr,
  input  logic signed [WGT_W-1:0] w_data,
  input  logic                    b_we,
  input  logic [BA_W-1:0]         b_addr,
  input  logic signed [15:0]      b_data,
  // point stream in
  input  logic                    in_valid,
  output logic                    in_ready,
  input  point_t                  in_point,
  // pooled feature stream out
  output logic                    out_valid,
  input  logic                    out_ready,
  output coord_t                  out_data [NPE],
  output logic                    out_last
);
  localparam int unsigned IDX_W = $clog2(N);

  // KNN output
  logic             knn_valid, knn_ready, knn_last, knn_cloud_last;
  logic [IDX_W-1:0] knn_sidx, knn_nidx;
  point_t           knn_center, knn_nbr;

  // grouper: serialise one neighbour into CIN relative-coordinate channels
  logic [1:0]       g_ch;
  coord_t           g_data;
  logic             g_valid, g_ready;

  // conv -> relu -> maxpool
  logic             cv_valid, cv_ready, cv_last;
  coord_t           cv_data [NPE];
  logic             rl_valid, rl_ready, rl_last;
  coord_t           rl_data [NPE];

  knn_unit #(.N(N), .NUM_SAMP(NUM_SAMP), .K(K), .X(X), .SEL(SEL), .SEED(SEED)) u_knn (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_point,
    .out_valid     (knn_valid),
    .out_ready     (knn_ready),
    .out_sample_idx(knn_sidx),
    .out_nbr_idx   (knn_nidx),
    .out_center    (knn_center),
    .out_nbr       (knn_nbr),
    .out_last      (knn_last),
    .out_cloud_last(knn_cloud_last)
  );

  always_comb begin
    case (g_ch)
      2'd0:    g_data = sat_coord(32'(knn_nbr.x) - 32'(knn_center.x));
      2'd1:    g_data = sat_coord(32'(knn_nbr.y) - 32'(knn_center.y));
      default: g_data = sat_coord(32'(knn_nbr.z) - 32'(knn_center.z));
    endcase
  end
  assign g_valid   = knn_valid;
  assign knn_ready = g_ready && (g_ch == 2'd2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 g_ch <= '0;
    else if (g_valid && g_ready) g_ch <= (g_ch == 2'd2) ? 2'd0 : g_ch + 2'd1;
  end

  conv1d_layer #(
    .CIN(CIN), .COUT(COUT), .KSIZE(1), .LEN(K), .NPE(NPE), .SHIFT(SHIFT)
  ) u_conv (
    .clk, .rst_n,
    .w_we, .w_addr, .w_data, .b_we, .b_addr, .b_data,
    .in_valid (g_valid),
    .in_ready (g_ready),
    .in_data  (g_data),
    .out_valid(cv_valid),
    .out_ready(cv_ready),
    .out_data (cv_data),
    .out_last (cv_last)
  );

  relu_simd #(.C(COUT), .N_SIMD(NPE)) u_relu (
    .clk, .rst_n,
    .in_valid (cv_valid),
    .in_ready (cv_ready),
    .in_data  (cv_data),
    .out_valid(rl_valid),
    .out_ready(rl_ready),
    .out_data (rl_data),
    .out_last (rl_last)
  );

  maxpool_simd #(.C(COUT), .N_SIMD(NPE), .POOL(K)) u_pool (
    .clk, .rst_n,
    .in_valid (rl_valid),
    .in_ready (rl_ready),
    .in_data  (rl_data),
    .out_valid,
    .out_ready,
    .out_data,
    .out_last
  );
endmodule
