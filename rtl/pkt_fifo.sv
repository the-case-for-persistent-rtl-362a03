// pkt_fifo: synchronous first-in first-out packet buffer.
//
// Used for the switch's per-port input buffers, its per-port output buffers
// and the PBC Output (PO) buffer that carries the persist-buffer
// controller's packets back into the switch. The paper draws these as plain
// buffers; their depth and the valid/ready style are this design's choice.
//
// Interface: push/push_pkt write at the tail when not full; the head is
// visible on head_pkt whenever empty is low and pop removes it. A packet
// pushed in cycle t is visible at the head in cycle t+1. Push and pop may
// happen in the same cycle, also when the buffer is full (a pop frees the
// slot the push takes). free_cnt is the number of free slots.
module pkt_fifo
  import pcs_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  pkt_t                     push_pkt,
  input  logic                     pop,
  output pkt_t                     head_pkt,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH+1)-1:0] free_cnt
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  pkt_t                       mem [DEPTH];
  logic [PW-1:0]              rd_ptr, wr_ptr;
  logic [$clog2(DEPTH+1)-1:0] count;

  logic do_push, do_pop;
  assign do_pop  = pop && (count != 0);
  assign do_push = push && ((count != DEPTH[$clog2(DEPTH+1)-1:0]) || do_pop);

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= inc(wr_ptr);
      if (do_pop)  rd_ptr <= inc(rd_ptr);
      if (do_push && !do_pop)      count <= count + 1'b1;
      else if (do_pop && !do_push) count <= count - 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= push_pkt;
  end

  assign head_pkt = mem[rd_ptr];
  assign empty    = (count == 0);
  assign full     = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign free_cnt = DEPTH[$clog2(DEPTH+1)-1:0] - count;

  // A push into a full buffer without a pop is a flow-control error.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  !(push && full && !pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
                                   !(pop && empty));
endmodule
