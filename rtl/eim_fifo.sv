// eim_fifo: EIM_FIFO_I / EIM_FIFO_W, the queue of effective indexes between
// a PE's index matching unit and its MAC.
//
// A synchronous FIFO with a first-word-fall-through head: dout is the oldest
// entry whenever empty is low, and pop removes it at the clock edge. Push and
// pop may happen in the same cycle. The FIFO's role is the source design's;
// depth and head style are this implementation's choices. Pushing into a full
// FIFO or popping an empty one is a protocol error caught by assertions.
module eim_fifo #(
  parameter int unsigned WIDTH = 10,
  parameter int unsigned DEPTH = 8,
  localparam int unsigned PW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             empty,
  output logic             full
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    rd_q, wr_q;
  logic [PW:0]      cnt_q;

  assign empty = (cnt_q == '0);
  assign full  = (cnt_q == (PW+1)'(DEPTH));
  assign dout  = mem[rd_q];

  always_ff @(posedge clk) if (push) mem[wr_q] <= din;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q <= '0; wr_q <= '0; cnt_q <= '0;
    end else if (clear) begin
      rd_q <= '0; wr_q <= '0; cnt_q <= '0;
    end else begin
      if (push) wr_q <= (wr_q == PW'(DEPTH-1)) ? '0 : wr_q + 1'b1;
      if (pop)  rd_q <= (rd_q == PW'(DEPTH-1)) ? '0 : rd_q + 1'b1;
      cnt_q <= cnt_q + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule
