// conv1d_layer -- one streaming 1D-convolution (or MLP) layer with NPE parallel PEs.
//
// Input: one signed A_BITS-bit activation per beat, position-major and channel-minor (all CIN
// channels of position 0, then of position 1, ...). A sequence has LEN positions. The
// convolution generator / line buffer is a shift register of KSIZE*CIN activations: every
// accepted beat shifts it by one, so after each complete position it holds the kernel-size
// segment (oldest position first). Once KSIZE positions of the current sequence have
// arrived, the layer computes the COUT outputs of that window in COUT/NPE folds: in a fold,
// PE p computes output channel fold*NPE+p, taking weights from the on-chip weight memory,
// one MAC per clock for CIN*KSIZE clocks; the bias is then added and the result is rescaled
// (arithmetic shift right by SHIFT, round towards minus infinity) and saturated to A_BITS. The NPE
// results of a fold leave as one beat through the output buffer; a full output buffer
// stalls the layer. MLP layers are this module with KSIZE = 1.
//
// Timing per window: CIN input beats (KSIZE*CIN for the first window of a sequence), then
// COUT/NPE folds of CIN*KSIZE+1 clocks each (more if the output buffer is full). Input is
// not taken while the folds run. Valid convolution: no padding, stride 1, LEN-KSIZE+1
// outputs per sequence. Output beat: NPE lanes of A_BITS bits, lane p = channel fold*NPE+p, and
// `out_last` on the last fold of a window.
//
// Weights and biases are written through the load port (w_we / b_we) before use; address
// of weight (o, k, c) is (o*KSIZE + k)*CIN + c. The weight load port, SHIFT, ACC_W, the bias
// width, the beat formats and the non-overlapped load/compute schedule are this design's
// choices. From the paper: the convolution generator, line buffers, on-chip weights, the
// array of MAC+bias PEs, the output buffer, the compile-time PE count and compile-time
// weight/activation precisions (W_BITS/A_BITS, default 8/8; SHIFT defaults to W_BITS-1,
// i.e. weights read as fractions).
module conv1d_layer
  import hls4pc_pkg::*;
#(
  parameter int unsigned CIN     = 3,
  parameter int unsigned COUT    = 32,
  parameter int unsigned KSIZE   = 1,
  parameter int unsigned LEN     = 16,
  parameter int unsigned NPE     = 4,
  parameter int unsigned A_BITS  = COORD_W,
  parameter int unsigned W_BITS  = WGT_W,
  parameter int unsigned SHIFT   = W_BITS - 1,
  parameter int unsigned ACC_W   = A_BITS + W_BITS + 8,
  parameter int unsigned BIAS_W  = A_BITS + W_BITS,
  parameter int unsigned OUT_DEPTH = 2,
  localparam int unsigned NW     = COUT * KSIZE * CIN,
  localparam int unsigned WA_W   = (NW > 1) ? $clog2(NW) : 1,
  localparam int unsigned BA_W   = (COUT > 1) ? $clog2(COUT) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // weight / bias load port
  input  logic                     w_we,
  input  logic [WA_W-1:0]          w_addr,
  input  logic signed [W_BITS-1:0] w_data,
  input  logic                     b_we,
  input  logic [BA_W-1:0]          b_addr,
  input  logic signed [BIAS_W-1:0] b_data,
  // activation stream in
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic signed [A_BITS-1:0] in_data,
  // output stream: NPE channels per beat
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic signed [A_BITS-1:0] out_data [NPE],
  output logic                     out_last
);
  localparam int unsigned SEG    = KSIZE * CIN;
  localparam int unsigned FOLDS  = COUT / NPE;
  localparam int unsigned TW     = (SEG > 1) ? $clog2(SEG) : 1;
  localparam int unsigned CW     = (CIN > 1) ? $clog2(CIN) : 1;
  localparam int unsigned FW     = (FOLDS > 1) ? $clog2(FOLDS) : 1;
  localparam int unsigned PW     = $clog2(LEN + 1);

  typedef enum logic [1:0] {S_FILL, S_MAC, S_EMIT} state_e;

  typedef struct packed {
    logic [NPE-1:0][A_BITS-1:0]  lanes;
    logic                        last;
  } obeat_t;

  state_e state;

  typedef logic signed [A_BITS-1:0] act_t;

  logic signed [W_BITS-1:0] wmem [COUT][SEG];    // on-chip weights
  logic signed [BIAS_W-1:0] bmem [COUT];         // biases
  act_t                     win  [SEG];          // line buffer: kernel-size segment

  // rescale a partial sum and saturate it to the activation width
  localparam logic signed [ACC_W-1:0] AMAX = ACC_W'((1 << (A_BITS - 1)) - 1);
  localparam logic signed [ACC_W-1:0] AMIN = -AMAX - ACC_W'(1);
  function automatic act_t requant(input logic signed [ACC_W-1:0] v);
    logic signed [ACC_W-1:0] r = v >>> SHIFT;
    if (r > AMAX)      return act_t'(AMAX);
    else if (r < AMIN) return act_t'(AMIN);
    else               return act_t'(r);
  endfunction

  logic [CW-1:0] ch_cnt;     // channel of the next input beat
  logic [PW-1:0] pos_cnt;    // positions received in this sequence
  logic [TW-1:0] tap;        // MAC step within a fold
  logic [FW-1:0] fold;

  logic signed [ACC_W-1:0] psum [NPE];
  obeat_t ob_in, ob_out;
  logic   ob_ready;

  always_ff @(posedge clk) begin
    if (w_we) wmem[BA_W'(w_addr / WA_W'(SEG))][TW'(w_addr % WA_W'(SEG))] <= w_data;
    if (b_we) bmem[b_addr] <= b_data;
  end

  assign in_ready = (state == S_FILL);

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    conv_pe #(.A_BITS(A_BITS), .W_BITS(W_BITS), .ACC_W(ACC_W), .BIAS_W(BIAS_W)) u_pe (
      .clk, .rst_n,
      .mac_en(state == S_MAC),
      .first (tap == '0),
      .act   (win[tap]),
      .wgt   (wmem[fold*NPE + p][tap]),
      .bias  (bmem[fold*NPE + p]),
      .psum  (psum[p])
    );
    assign ob_in.lanes[p] = requant(psum[p]);
    assign out_data[p]    = act_t'(ob_out.lanes[p]);
  end
  assign ob_in.last = (fold == FW'(FOLDS-1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_FILL;
      ch_cnt  <= '0;
      pos_cnt <= '0;
      tap     <= '0;
      fold    <= '0;
      for (int i = 0; i < SEG; i++) win[i] <= '0;
    end else begin
      case (state)
        S_FILL: if (in_valid) begin
          for (int i = 0; i < SEG - 1; i++) win[i] <= win[i+1];
          win[SEG-1] <= in_data;
          if (ch_cnt == CW'(CIN-1)) begin
            ch_cnt <= '0;
            if (pos_cnt == PW'(LEN-1)) pos_cnt <= '0;
            else                       pos_cnt <= pos_cnt + PW'(1);
            if (32'(pos_cnt) + 1 >= KSIZE) begin
              state <= S_MAC;
              tap   <= '0;
              fold  <= '0;
            end
          end else begin
            ch_cnt <= ch_cnt + CW'(1);
          end
        end
        S_MAC: begin
          if (tap == TW'(SEG-1)) state <= S_EMIT;
          else                   tap   <= tap + TW'(1);
        end
        S_EMIT: if (ob_ready) begin
          tap <= '0;
          if (fold == FW'(FOLDS-1)) state <= S_FILL;
          else begin
            fold  <= fold + FW'(1);
            state <= S_MAC;
          end
        end
        default: state <= S_FILL;
      endcase
    end
  end

  stream_fifo #(.WIDTH($bits(obeat_t)), .DEPTH(OUT_DEPTH)) u_out_buf (
    .clk, .rst_n,
    .in_valid (state == S_EMIT),
    .in_ready (ob_ready),
    .in_data  (ob_in),
    .out_valid(out_valid),
    .out_ready(out_ready),
    .out_data (ob_out)
  );
  assign out_last = ob_out.last;

  initial begin
    assert (COUT % NPE == 0) else $error("conv1d_layer: COUT must be a multiple of NPE");
    assert (LEN >= KSIZE) else $error("conv1d_layer: LEN must be at least KSIZE");
  end
endmodule
