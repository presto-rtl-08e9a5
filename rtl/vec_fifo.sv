// vec_fifo: synchronous FIFO of W-bit words, used for the round-constant FIFO
// and the noise FIFO between the samplers and the datapath.
//
// The paper's point is that, once sampling runs concurrently with the rounds,
// this FIFO only has to absorb short-term rate differences, so it can be
// shallow; DEPTH is this design's choice (the paper gives no depth for its
// decoupled design, only 188/1504 for the non-decoupled baseline).
//
// Interface: push when in_valid && in_ready (in_ready = not full); the head is
// on out_data whenever out_valid (= not empty); pop with out_ready. A word
// pushed in cycle t is visible at the head in cycle t+1. Both ends may be
// used in the same cycle, also when full (the pop makes room).
module vec_fifo #(
  parameter int W     = 200,
  parameter int DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rptr, wptr;
  logic          push, pop;

  assign out_valid = (count != 0);
  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]) || out_ready;
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rptr];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rptr  <= '0;
      wptr  <= '0;
      count <= '0;
    end else if (clear) begin
      rptr  <= '0;
      wptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= inc(wptr);
      if (pop)  rptr <= inc(rptr);
      count <= count + $bits(count)'(push) - $bits(count)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= in_data;
  end

  // a pop from an empty FIFO or a push into a full one cannot happen
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    int'(count) <= DEPTH) else $error("vec_fifo: count overflow");

endmodule
