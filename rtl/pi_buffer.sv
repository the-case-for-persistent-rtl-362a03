// pi_buffer: the PBC Input (PI) buffer, the switch output that feeds the
// persist-buffer controller.
//
// It holds two classes of packet. Write acknowledgments (CMP) coming back
// from persistent memory are kept apart from read/write requests and are
// always handed to the controller first, so that an acknowledgment the
// controller is waiting for (to free a Drain entry) can never sit behind a
// write request that is itself waiting for a free entry - the deadlock the
// paper describes. Within each class the order is first in, first out.
// The two-queue structure is this design's way of "placing the
// acknowledgment in front of all existing requests".
//
// Interface: push/push_pkt from the switch's traversal stage; the class is
// taken from the opcode. ack_free / req_free tell the switch allocator how
// much room each class has. The controller sees head_pkt/head_valid and
// pops with pop. Push-to-head latency is one cycle.
module pi_buffer
  import pcs_pkg::*;
#(
  parameter int unsigned ACK_DEPTH = 4,
  parameter int unsigned REQ_DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  pkt_t push_pkt,
  output logic [$clog2(ACK_DEPTH+1)-1:0] ack_free,
  output logic [$clog2(REQ_DEPTH+1)-1:0] req_free,
  input  logic pop,
  output pkt_t head_pkt,
  output logic head_valid,
  output logic head_is_ack_bypass  // an ack is served while requests wait
);
  logic is_ack;
  assign is_ack = (push_pkt.hdr.op == OP_CMP);

  pkt_t ack_head, req_head;
  logic ack_empty, req_empty;

  pkt_fifo #(.DEPTH(ACK_DEPTH)) u_ackq (
    .clk, .rst_n,
    .push(push && is_ack), .push_pkt,
    .pop(pop && !ack_empty),
    .head_pkt(ack_head), .empty(ack_empty), .full(), .free_cnt(ack_free));

  pkt_fifo #(.DEPTH(REQ_DEPTH)) u_reqq (
    .clk, .rst_n,
    .push(push && !is_ack), .push_pkt,
    .pop(pop && ack_empty),
    .head_pkt(req_head), .empty(req_empty), .full(), .free_cnt(req_free));

  assign head_valid         = !ack_empty || !req_empty;
  assign head_pkt           = !ack_empty ? ack_head : req_head;
  assign head_is_ack_bypass = !ack_empty && !req_empty;
endmodule
