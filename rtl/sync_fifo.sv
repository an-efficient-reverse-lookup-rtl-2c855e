// sync_fifo: synchronous first-in first-out queue with valid/ready handshakes.
//
// Used as the per-core invalidation message queue between the coherent
// memory controller and the two reverse lookup tables, and as the request
// queues in front of the MMU (so that write-throughs of write hits do not
// stall the cache). Circular buffer of DEPTH entries with read and write
// pointers and an occupancy counter.
//
// Interface: in_valid/in_ready/in_data push when both are high; out_valid/
// out_ready/out_data pop when both are high. out_data is the oldest entry.
// Timing: an entry pushed at one edge is visible at out_* after that edge
// (one cycle fall-through); push and pop can happen in the same cycle, also
// when the queue is full (the pop frees the slot). The queue depth is this
// design's choice; the paper does not give one.
module sync_fifo #(
  parameter int unsigned WIDTH = 36,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned PW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
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

  logic [WIDTH-1:0] buf_q [DEPTH];
  logic [PW-1:0]    rd_q, wr_q;
  logic [PW:0]      cnt_q;
  logic             push, pop;

  assign out_valid = (cnt_q != '0);
  assign in_ready  = (cnt_q != (PW+1)'(DEPTH)) || out_ready;
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = buf_q[rd_q];

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push) wr_q <= inc(wr_q);
      if (pop)  rd_q <= inc(rd_q);
      cnt_q <= cnt_q + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) buf_q[wr_q] <= in_data;
  end

  assert property (@(posedge clk) disable iff (!rst_n) cnt_q <= (PW+1)'(DEPTH));

endmodule
