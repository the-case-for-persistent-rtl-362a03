// persist_buffer: the Persistent Buffer (PB) storage of the switch.
//
// A fully associative, cache-like structure of N_PBE entries (PBEs). Each
// entry has a row in three tables: the Tag Address Table (58-bit line tag),
// the Data Table (64-byte block plus the 16-byte request header) and the
// State Table (2-bit state plus an LRU counter of $clog2(N_PBE) bits, 4 bits
// for the paper's 16 entries). The tables are built from persistent cells
// (or battery-backed ones) in the real part, so they are NOT cleared by the
// switch's reset: only `format` (first power-up) initialises them. A crash
// is a reset of the rest of the switch; the tables keep their contents.
//
// LRU: the counters hold a permutation of 0..N_PBE-1, 0 being the most
// recently used. `touch` of entry k sets its counter to 0 and increments
// every counter that was below k's old value, so the ranking stays exact.
// The controller picks victims as the largest counter among candidates.
//
// Write ports (all take effect at the clock edge):
//   fill_*   writes tag, data and header of one entry
//   sa_*     state port A (controller request processing)
//   sb_*     state port B (drain engine); A and B never name the same entry
//   touch_*  LRU update
//   recover  turns every Drain entry back to Dirty (after a crash the
//            acknowledgments in flight are lost, so the entries must be
//            drained again)
// Read: tables are visible in full (tag_o/state_o/cnt_o) for the associative
// lookups; rd_idx selects the data/header row on rd_data/rd_hdr, same cycle.
module persist_buffer
  import pcs_pkg::*;
#(
  parameter int unsigned N_PBE = 16,
  localparam int unsigned IW   = $clog2(N_PBE)
) (
  input  logic              clk,
  input  logic              format,
  input  logic              recover,
  input  logic              fill_en,
  input  logic [IW-1:0]     fill_idx,
  input  logic [TAG_W-1:0]  fill_tag,
  input  hdr_t              fill_hdr,
  input  logic [DATA_W-1:0] fill_data,
  input  logic              sa_en,
  input  logic [IW-1:0]     sa_idx,
  input  pbe_state_e        sa_state,
  input  logic              sb_en,
  input  logic [IW-1:0]     sb_idx,
  input  pbe_state_e        sb_state,
  input  logic              touch_en,
  input  logic [IW-1:0]     touch_idx,
  input  logic [IW-1:0]     rd_idx,
  output logic [DATA_W-1:0] rd_data,
  output hdr_t              rd_hdr,
  output logic [TAG_W-1:0]  tag_o   [N_PBE],
  output pbe_state_e        state_o [N_PBE],
  output logic [IW-1:0]     cnt_o   [N_PBE]
);
  // Tag Address Table, Data Table (block + header), State Table.
  logic [TAG_W-1:0]  tat    [N_PBE];
  logic [DATA_W-1:0] dt_blk [N_PBE];
  hdr_t              dt_hdr [N_PBE];
  pbe_state_e        st_state [N_PBE];
  logic [IW-1:0]     st_cnt   [N_PBE];

  always_ff @(posedge clk) begin
    if (fill_en) begin
      tat[fill_idx]    <= fill_tag;
      dt_blk[fill_idx] <= fill_data;
      dt_hdr[fill_idx] <= fill_hdr;
    end
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < int'(N_PBE); i++) begin
      if (format) begin
        st_state[i] <= PBE_EMPTY;
        st_cnt[i]   <= IW'(i);
      end else begin
        if (recover && st_state[i] == PBE_DRAIN)
          st_state[i] <= PBE_DIRTY;
        else if (sa_en && sa_idx == IW'(i))
          st_state[i] <= sa_state;
        else if (sb_en && sb_idx == IW'(i))
          st_state[i] <= sb_state;
        if (touch_en) begin
          if (touch_idx == IW'(i))
            st_cnt[i] <= '0;
          else if (st_cnt[i] < st_cnt[touch_idx])
            st_cnt[i] <= st_cnt[i] + 1'b1;
        end
      end
    end
  end

  assign rd_data = dt_blk[rd_idx];
  assign rd_hdr  = dt_hdr[rd_idx];
  assign tag_o   = tat;
  assign state_o = st_state;
  assign cnt_o   = st_cnt;

  a_ports_disjoint: assert property (@(posedge clk) disable iff (format)
                                     !(sa_en && sb_en && sa_idx == sb_idx));
endmodule
