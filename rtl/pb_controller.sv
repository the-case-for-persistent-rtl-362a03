// pb_controller: Persist Buffer Controller (PBC).
//
// Serves the packets the selector diverted to it, one at a time and in
// order, from the head of the PI buffer, and writes its own packets (write
// acknowledgments to the host, read responses, forwarded reads, drain
// writes towards PM) into the PO buffer, at most one per cycle.
//
//  Write request: if the line already has a Dirty entry the new data is
//    merged into it (write coalescing); if it has a Drain entry the write
//    waits until PM acknowledges that drain (so two versions of one line
//    are never in flight); otherwise the least recently used Empty entry is
//    filled and becomes Dirty. The host is then acknowledged: the persist
//    is complete. If no entry is Empty, the LRU Dirty entry is drained as a
//    victim and the write waits (stall); if every entry is Drain it waits
//    for acknowledgments.
//  Write acknowledgment from PM: the matching Drain entry becomes Empty.
//  Read request: a Dirty or Drain entry of the line answers it with its
//    data (read forwarding); if the entry is gone the original read is
//    passed on towards PM behind any drain write already in PO, which keeps
//    write-read order.
//  Draining (Dirty -> Drain, write packet into PO): in PB mode (rf_mode=0)
//    every Dirty entry is drained as soon as possible. In read-forwarding
//    mode (rf_mode=1) nothing is drained until the Dirty count reaches
//    DRAIN_HI_PCT percent of the entries; then LRU Dirty entries are drained
//    until the count is down to PRESET_PCT percent.
//  Crash recovery: after reset (a crash of the volatile switch logic) the
//    controller first turns every Drain entry back to Dirty (their
//    acknowledgments may have been lost), then drains every Dirty entry and
//    only then accepts requests again; acknowledgments are served meanwhile.
//
// Arbitration of the single PO slot per cycle: a drain, when one is wanted,
// goes first; acknowledgments that free an entry need no PO slot and are
// served in the same cycle. Waiting for a drain-matching ack instead of
// allocating a second entry, LRU on reads, and the drain-first arbitration
// are this design's choices. Blocks and most header fields pass through
// unchanged (PI head into the tables, tables into PO), so many output bits
// are wired straight to inputs: the controller moves data, it does not
// compute on it.
module pb_controller
  import pcs_pkg::*;
#(
  parameter int unsigned N_PBE        = 16,
  parameter int unsigned DRAIN_HI_PCT = 80,
  parameter int unsigned PRESET_PCT   = 60,
  localparam int unsigned IW          = $clog2(N_PBE),
  localparam int unsigned CW          = $clog2(N_PBE + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rf_mode,
  // PI buffer head
  input  logic              pi_valid,
  input  pkt_t              pi_pkt,
  output logic              pi_pop,
  // PO buffer tail
  input  logic              po_full,
  output logic              po_push,
  output pkt_t              po_pkt,
  // persist buffer tables
  input  logic [TAG_W-1:0]  pb_tag   [N_PBE],
  input  pbe_state_e        pb_state [N_PBE],
  input  logic [IW-1:0]     pb_cnt   [N_PBE],
  input  logic [DATA_W-1:0] pb_rd_data,
  input  hdr_t              pb_rd_hdr,
  output logic [IW-1:0]     pb_rd_idx,
  output logic              pb_recover,
  output logic              pb_fill_en,
  output logic [IW-1:0]     pb_fill_idx,
  output logic [TAG_W-1:0]  pb_fill_tag,
  output hdr_t              pb_fill_hdr,
  output logic [DATA_W-1:0] pb_fill_data,
  output logic              pb_sa_en,
  output logic [IW-1:0]     pb_sa_idx,
  output pbe_state_e        pb_sa_state,
  output logic              pb_sb_en,
  output logic [IW-1:0]     pb_sb_idx,
  output pbe_state_e        pb_sb_state,
  output logic              pb_touch_en,
  output logic [IW-1:0]     pb_touch_idx,
  // status
  output logic              recovering,
  output logic [CW-1:0]     dirty_count,
  output pbc_events_t       ev
);
  localparam int unsigned DRAIN_HI = (N_PBE * DRAIN_HI_PCT) / 100;
  localparam int unsigned PRESET   = (N_PBE * PRESET_PCT) / 100;

  typedef enum logic [1:0] {S_MARK, S_RECOVER, S_RUN} fsm_e;
  fsm_e fsm_q;
  logic rf_burst_q;

  // ---------------------------------------------------------------- lookup
  hdr_t             head;
  logic [TAG_W-1:0] htag;
  logic             hit;
  logic [IW-1:0]    hit_idx;
  pbe_state_e       hit_state;
  logic             any_empty, any_dirty, any_drain;
  logic [IW-1:0]    lru_empty_idx, lru_dirty_idx;
  logic [IW-1:0]    best_e_cnt, best_d_cnt;

  assign head = pi_pkt.hdr;
  assign htag = line_tag(head.addr);

  always_comb begin
    hit = 1'b0; hit_idx = '0; hit_state = PBE_EMPTY;
    any_empty = 1'b0; any_dirty = 1'b0; any_drain = 1'b0;
    lru_empty_idx = '0; lru_dirty_idx = '0;
    best_e_cnt = '0; best_d_cnt = '0;
    dirty_count = '0;
    for (int i = 0; i < int'(N_PBE); i++) begin
      if (pb_state[i] != PBE_EMPTY && pb_tag[i] == htag) begin
        hit = 1'b1; hit_idx = IW'(i); hit_state = pb_state[i];
      end
      if (pb_state[i] == PBE_EMPTY) begin
        if (!any_empty || pb_cnt[i] > best_e_cnt) begin
          lru_empty_idx = IW'(i); best_e_cnt = pb_cnt[i];
        end
        any_empty = 1'b1;
      end
      if (pb_state[i] == PBE_DIRTY) begin
        if (!any_dirty || pb_cnt[i] > best_d_cnt) begin
          lru_dirty_idx = IW'(i); best_d_cnt = pb_cnt[i];
        end
        any_dirty   = 1'b1;
        dirty_count = dirty_count + 1'b1;
      end
      if (pb_state[i] == PBE_DRAIN) any_drain = 1'b1;
    end
  end

  // ----------------------------------------------------------------- drain
  logic serving;        // controller past the recovery marking cycle
  logic forced_need;    // head write finds no entry at all
  logic drain_want, do_drain;

  assign serving     = (fsm_q != S_MARK);
  assign recovering  = (fsm_q != S_RUN);
  assign forced_need = pi_valid && (head.op == OP_MEM_WR) && !recovering &&
                       !hit && !any_empty;
  assign drain_want  = (fsm_q == S_RECOVER) || !rf_mode ||
                       (rf_burst_q && dirty_count > CW'(PRESET)) ||
                       (forced_need && !any_drain);
  assign do_drain    = serving && drain_want && any_dirty && !po_full;

  // ------------------------------------------------------------- responses
  pkt_t ack_pkt, rsp_pkt, drain_pkt;
  always_comb begin
    ack_pkt          = '0;
    ack_pkt.hdr.op   = OP_CMP;
    ack_pkt.hdr.src  = head.dst;
    ack_pkt.hdr.dst  = head.src;
    ack_pkt.hdr.rtag = head.rtag;
    ack_pkt.hdr.addr = head.addr;
    rsp_pkt          = ack_pkt;
    rsp_pkt.hdr.op   = OP_MEM_DATA;
    rsp_pkt.data     = pb_rd_data;
    drain_pkt.hdr    = pb_rd_hdr;
    drain_pkt.data   = pb_rd_data;
  end

  // ------------------------------------------------------- head processing
  logic po_slot;
  assign po_slot   = !po_full && !do_drain;
  assign pb_rd_idx = do_drain ? lru_dirty_idx : hit_idx;

  always_comb begin
    pi_pop       = 1'b0;
    po_push      = do_drain;
    po_pkt       = drain_pkt;
    pb_fill_en   = 1'b0;
    pb_fill_idx  = hit_idx;
    pb_fill_tag  = htag;
    pb_fill_hdr  = head;
    pb_fill_data = pi_pkt.data;
    pb_sa_en     = 1'b0;
    pb_sa_idx    = hit_idx;
    pb_sa_state  = PBE_DIRTY;
    pb_sb_en     = do_drain;
    pb_sb_idx    = lru_dirty_idx;
    pb_sb_state  = PBE_DRAIN;
    pb_touch_en  = 1'b0;
    pb_touch_idx = hit_idx;
    ev           = '0;
    ev.drain     = do_drain;
    ev.victim    = do_drain && forced_need && !any_drain;
    ev.rf_burst  = rf_mode && !rf_burst_q && dirty_count >= CW'(DRAIN_HI) &&
                   (fsm_q == S_RUN);
    ev.recover   = (fsm_q == S_MARK);

    if (pi_valid && serving) begin
      unique case (head.op)
        OP_CMP: begin
          if (hit && hit_state == PBE_DRAIN) begin
            pi_pop      = 1'b1;
            pb_sa_en    = 1'b1;
            pb_sa_state = PBE_EMPTY;
            ev.ack_done = 1'b1;
          end else if (po_slot) begin   // not ours after all: pass it on
            pi_pop  = 1'b1;
            po_push = 1'b1;
            po_pkt  = pi_pkt;
          end
        end
        OP_MEM_RD: begin
          if (!recovering && po_slot) begin
            pi_pop  = 1'b1;
            po_push = 1'b1;
            if (hit) begin
              po_pkt        = rsp_pkt;
              pb_touch_en   = 1'b1;
              ev.rd_forward = 1'b1;
            end else begin
              po_pkt      = pi_pkt;
              ev.rd_to_pm = 1'b1;
            end
          end
        end
        OP_MEM_WR: begin
          if (!recovering && po_slot) begin
            if (hit && hit_state == PBE_DIRTY) begin
              pi_pop         = 1'b1;
              po_push        = 1'b1;
              po_pkt         = ack_pkt;
              pb_fill_en     = 1'b1;
              pb_touch_en    = 1'b1;
              ev.wr_coalesce = 1'b1;
            end else if (!hit && any_empty) begin
              pi_pop       = 1'b1;
              po_push      = 1'b1;
              po_pkt       = ack_pkt;
              pb_fill_en   = 1'b1;
              pb_fill_idx  = lru_empty_idx;
              pb_sa_en     = 1'b1;
              pb_sa_idx    = lru_empty_idx;
              pb_sa_state  = PBE_DIRTY;
              pb_touch_en  = 1'b1;
              pb_touch_idx = lru_empty_idx;
              ev.wr_alloc  = 1'b1;
            end
          end
        end
        default: begin
          if (po_slot) begin
            pi_pop  = 1'b1;
            po_push = 1'b1;
            po_pkt  = pi_pkt;
          end
        end
      endcase
    end
    // resource stall: a write that finds no entry it may use
    ev.stall = pi_valid && (head.op == OP_MEM_WR) && !pi_pop &&
               (fsm_q == S_RUN) && (hit ? (hit_state == PBE_DRAIN) : !any_empty);
  end

  // ------------------------------------------------------------- sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fsm_q      <= S_MARK;
      rf_burst_q <= 1'b0;
    end else begin
      unique case (fsm_q)
        S_MARK:    fsm_q <= S_RECOVER;
        S_RECOVER: if (!any_dirty) fsm_q <= S_RUN;
        default:   fsm_q <= S_RUN;
      endcase
      if (!rf_mode)
        rf_burst_q <= 1'b0;
      else if (!rf_burst_q && dirty_count >= CW'(DRAIN_HI))
        rf_burst_q <= 1'b1;
      else if (rf_burst_q && dirty_count <= CW'(PRESET))
        rf_burst_q <= 1'b0;
    end
  end

  assign pb_recover = (fsm_q == S_MARK);

  // At most one live (Dirty or Drain) entry per line.
  logic dup_live;
  always_comb begin
    dup_live = 1'b0;
    for (int i = 0; i < int'(N_PBE); i++)
      for (int j = i + 1; j < int'(N_PBE); j++)
        if (pb_state[i] != PBE_EMPTY && pb_state[j] != PBE_EMPTY &&
            pb_tag[i] == pb_tag[j])
          dup_live = 1'b1;
  end
  a_one_live_copy: assert property (@(posedge clk) disable iff (!rst_n) !dup_live);
  a_po_flow: assert property (@(posedge clk) disable iff (!rst_n) !(po_push && po_full));
endmodule
