// stream_fifo: the on-chip streaming channel between two dataflow stages.
//
// It plays the role of an HLS stream: a first-in first-out queue with a
// valid/ready handshake on both sides. A word is written when in_valid and
// in_ready are both high at a clock edge and read when out_valid and
// out_ready are both high. The queue is a register array with read and write
// pointers; it accepts a word every cycle while it is not full and delivers
// one every cycle while it is not empty, so a chain of stages joined by these
// FIFOs keeps an initiation interval of one. Latency from input to output is
// one cycle. The depth is this design's choice (the paper only names the
// channels); DEPTH must be a power of two.
module stream_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic             push, pop;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= wptr + 1'b1;
      if (pop)  rptr <= rptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // Handshake rule: data offered must stay put until it is taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (out_valid && !out_ready) |=> (out_valid && $stable(out_data));
  endproperty
  a_hold: assert property (p_hold);

endmodule
