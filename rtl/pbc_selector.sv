// pbc_selector: Persist Buffer Controller Selector (PBCS).
//
// Looks at the packet at the head of one switch input buffer, in parallel
// with route computation, and decides whether the packet must be diverted
// to the persist-buffer controller (PBC) instead of being routed normally.
// The decision is purely combinational, so it is ready before the switch
// allocation stage, which gives it priority over the routing result.
//
// Rules (paper, working-principle section):
//   write request to a PM address            -> divert (always)
//   read request whose line is in the buffer
//     in state Dirty or Drain                  -> divert
//   write acknowledgment whose line is in the
//     buffer in state Drain                    -> divert (PBC is the receiver)
//   anything else (CXL.io, CXL.cache, reads with no live entry, volatile
//   traffic)                                   -> route normally
// The PM address window [PM_BASE, PM_LIMIT] is this design's stand-in for
// "address mapped to PM"; the paper does not say how that is decided.
//
// Interface: hdr_valid/hdr from the input buffer head; pb_tag/pb_state are
// the tag and state tables of the persist buffer (read-only); to_pbc is the
// decision, hit_state the state that was found (for statistics/tests).
module pbc_selector
  import pcs_pkg::*;
#(
  parameter int unsigned          N_PBE    = 16,
  parameter logic [ADDR_W-1:0]    PM_BASE  = 64'h0000_0001_0000_0000,
  parameter logic [ADDR_W-1:0]    PM_LIMIT = 64'h0000_0001_FFFF_FFFF
) (
  input  logic        hdr_valid,
  input  hdr_t        hdr,
  input  logic [TAG_W-1:0] pb_tag [N_PBE],
  input  pbe_state_e  pb_state [N_PBE],
  output logic        to_pbc,
  output pbe_state_e  hit_state
);
  logic in_pm;
  logic hit;

  assign in_pm = (hdr.addr >= PM_BASE) && (hdr.addr <= PM_LIMIT);

  always_comb begin
    hit       = 1'b0;
    hit_state = PBE_EMPTY;
    for (int i = 0; i < int'(N_PBE); i++) begin
      if (pb_state[i] != PBE_EMPTY && pb_tag[i] == line_tag(hdr.addr)) begin
        hit       = 1'b1;
        hit_state = pb_state[i];
      end
    end
  end

  always_comb begin
    to_pbc = 1'b0;
    if (hdr_valid) begin
      unique case (hdr.op)
        OP_MEM_WR: to_pbc = in_pm;
        OP_MEM_RD: to_pbc = in_pm && hit;
        OP_CMP:    to_pbc = hit && (hit_state == PBE_DRAIN);
        default:   to_pbc = 1'b0;
      endcase
    end
  end
endmodule
