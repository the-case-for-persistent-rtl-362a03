// pm_model: behavioural model of a CXL-attached persistent-memory device,
// for simulation only (not synthesizable).
//
// It answers MEM_RD with MEM_DATA after RD_LAT cycles and MEM_WR with a
// write acknowledgment (CMP, carrying the line address) after WR_LAT
// cycles; CXL.io packets get an IO completion after RD_LAT cycles. Replies
// leave in arrival order. Contents live in an associative array; lines
// never written read as zero. The default latencies are 100 ns and 200 ns
// at a 1 GHz switch clock. Counters report how many writes the device saw,
// and peek() returns a line, so that tests can check what reached it.
module pm_model
  import pcs_pkg::*;
#(
  parameter int unsigned RD_LAT = 100,
  parameter int unsigned WR_LAT = 200
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  pkt_t in_pkt,
  output logic in_ready,
  output logic out_valid,
  output pkt_t out_pkt,
  input  logic out_ready
);
  logic [DATA_W-1:0] mem [logic [TAG_W-1:0]];
  pkt_t    rq_pkt [$];
  longint  rq_due [$];
  longint  now;
  int      n_writes;
  int      n_reads;

  function automatic logic [DATA_W-1:0] peek(input logic [ADDR_W-1:0] a);
    if (mem.exists(line_tag(a))) return mem[line_tag(a)];
    return '0;
  endfunction

  assign in_ready  = 1'b1;
  assign out_valid = (rq_pkt.size() > 0) && (rq_due[0] <= now);
  assign out_pkt   = (rq_pkt.size() > 0) ? rq_pkt[0] : '0;

  always @(posedge clk) begin
    if (!rst_n) begin
      now <= 0;
      rq_pkt.delete();
      rq_due.delete();
    end else begin
      now <= now + 1;
      if (out_valid && out_ready) begin
        void'(rq_pkt.pop_front());
        void'(rq_due.pop_front());
      end
      if (in_valid) begin
        pkt_t r;
        longint due;
        r = '0;
        r.hdr.src  = in_pkt.hdr.dst;
        r.hdr.dst  = in_pkt.hdr.src;
        r.hdr.rtag = in_pkt.hdr.rtag;
        r.hdr.addr = in_pkt.hdr.addr;
        due = now + RD_LAT;
        case (in_pkt.hdr.op)
          OP_MEM_WR: begin
            mem[line_tag(in_pkt.hdr.addr)] = in_pkt.data;
            n_writes++;
            r.hdr.op = OP_CMP;
            due = now + WR_LAT;
          end
          OP_MEM_RD: begin
            n_reads++;
            r.hdr.op = OP_MEM_DATA;
            r.data   = peek(in_pkt.hdr.addr);
          end
          default: begin
            r.hdr.op = OP_IO;
            r.data   = in_pkt.data;
          end
        endcase
        if (rq_due.size() > 0 && rq_due[rq_due.size()-1] > due)
          due = rq_due[rq_due.size()-1];
        rq_pkt.push_back(r);
        rq_due.push_back(due);
      end
    end
  end
endmodule
