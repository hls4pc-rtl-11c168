// stream_fifo -- synchronous FIFO used as the output buffer of the KNN unit and of the
// convolution layer.
//
// Valid/ready streaming on both sides: a word is written when in_valid && in_ready and read
// when out_valid && out_ready. in_ready is low when the FIFO is full, which stalls the
// producer. Storage is a DEPTH-entry array with wrap-around pointers and an occupancy
// counter; out_data shows the oldest word whenever out_valid is high (first-word fall-through).
// The paper names the output buffers; depth, handshake and fall-through behaviour are this
// design's choices.
module stream_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic [AW:0]      count;
  logic             push, pop;

  assign in_ready  = (count < (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  // A producer may not withdraw or change a word it offers before it is taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n) (in_valid && !in_ready) |=> in_valid;
  endproperty
  a_hold: assert property (p_hold) else $error("stream_fifo: in_valid dropped while stalled");
endmodule
