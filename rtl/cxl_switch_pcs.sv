// cxl_switch_pcs: a persistent CXL switch (PCS) - a CXL switch that owns a
// persistent buffer, so that a persist (a flushed, fenced store to
// persistent memory) is complete as soon as it reaches the switch instead
// of after the round trip to the persistent-memory device.
//
// Structure (one module per block):
//   NP external ports, each with an input buffer and an output buffer;
//   one internal port pair for the persist-buffer controller: PBC Output
//   (PO, an input of the crossbar) and PBC Input (PI, an output);
//   a four-stage pipeline R (route computation) - VA (virtual-channel
//   allocation) - SA (switch allocation) - ST (switch traversal);
//   one PBC selector (PBCS) per external input, working on the input
//   buffer head in parallel with R, whose decision overrides routing in SA;
//   the persistent buffer (PB) tables and their controller (PBC).
// Port numbering: external ports 0..NP-1; index NP is PO on the input side
// and PI on the output side.
//
// Pipeline timing with no contention: a packet accepted on in_* at clock
// edge t is latched by R at t+1, by VA at t+2, wins SA and enters ST at
// t+3 and is written into its output buffer at t+4, so out_valid rises
// four cycles after the packet was taken. A packet diverted to the
// controller reaches the head of PI at the same point; a packet the
// controller emits re-enters through PO and takes the pipeline again, so a
// persist is acknowledged nine cycles after the write entered an idle
// switch.
//
// Routing uses the header's dst field (route computation proper is outside
// what the paper describes). VA chooses the virtual channel: at PI,
// acknowledgments use their own class so they overtake queued requests;
// elsewhere one class is used. Buffer depths, the dst-based routing, the
// PM address window and the single class on external ports are this
// design's choices; the four stages, the selector override, the PI/PO
// pair and the PB/PBC behaviour follow the paper.
//
// Resets: rst_n is the volatile reset (a crash); it clears buffers and the
// pipeline but not the PB tables, after which the controller runs its
// recovery drain. pb_format initialises the PB tables once, at first
// power-up, and must be held for at least one clock edge.
module cxl_switch_pcs
  import pcs_pkg::*;
#(
  parameter int unsigned       NP           = 2,
  parameter int unsigned       IB_DEPTH     = 4,
  parameter int unsigned       OB_DEPTH     = 4,
  parameter int unsigned       PI_DEPTH     = 4,
  parameter int unsigned       PO_DEPTH     = 4,
  parameter int unsigned       N_PBE        = 16,
  parameter int unsigned       DRAIN_HI_PCT = 80,
  parameter int unsigned       PRESET_PCT   = 60,
  parameter logic [ADDR_W-1:0] PM_BASE      = 64'h0000_0001_0000_0000,
  parameter logic [ADDR_W-1:0] PM_LIMIT     = 64'h0000_0001_FFFF_FFFF,
  localparam int unsigned      NI           = NP + 1,
  localparam int unsigned      PW           = $clog2(NI),
  localparam int unsigned      IW           = $clog2(N_PBE),
  localparam int unsigned      CW           = $clog2(N_PBE + 1)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        pb_format,
  input  logic        rf_mode,
  input  logic        in_valid  [NP],
  input  pkt_t        in_pkt    [NP],
  output logic        in_ready  [NP],
  output logic        out_valid [NP],
  output pkt_t        out_pkt   [NP],
  input  logic        out_ready [NP],
  output pbc_events_t pbc_ev,
  output logic        pi_ack_bypass,
  output logic        pbcs_divert [NP],
  output logic        recovering,
  output logic [CW-1:0] pb_dirty_count
);
  // ----------------------------------------------------------- PB tables
  logic [TAG_W-1:0]  pb_tag   [N_PBE];
  pbe_state_e        pb_state [N_PBE];
  logic [IW-1:0]     pb_cnt   [N_PBE];
  logic [DATA_W-1:0] pb_rd_data;
  hdr_t              pb_rd_hdr;
  logic [IW-1:0]     pb_rd_idx;
  logic              pb_recover, pb_fill_en, pb_sa_en, pb_sb_en, pb_touch_en;
  logic [IW-1:0]     pb_fill_idx, pb_sa_idx, pb_sb_idx, pb_touch_idx;
  logic [TAG_W-1:0]  pb_fill_tag;
  hdr_t              pb_fill_hdr;
  logic [DATA_W-1:0] pb_fill_data;
  pbe_state_e        pb_sa_state, pb_sb_state;

  // ------------------------------------------------------- input buffers
  pkt_t fh_pkt   [NI];
  logic fh_valid [NI];
  logic fh_pop   [NI];
  logic po_push, po_full;
  pkt_t po_pkt;

  for (genvar i = 0; i < int'(NP); i++) begin : g_ib
    logic ib_empty, ib_full;
    pkt_fifo #(.DEPTH(IB_DEPTH)) u_ib (
      .clk, .rst_n,
      .push(in_valid[i] && !ib_full), .push_pkt(in_pkt[i]),
      .pop(fh_pop[i]), .head_pkt(fh_pkt[i]),
      .empty(ib_empty), .full(ib_full), .free_cnt());
    assign in_ready[i] = !ib_full;
    assign fh_valid[i] = !ib_empty;
  end

  // PBC Output buffer: the controller's packets enter the crossbar here.
  logic po_empty;
  pkt_fifo #(.DEPTH(PO_DEPTH)) u_po (
    .clk, .rst_n,
    .push(po_push), .push_pkt(po_pkt),
    .pop(fh_pop[NP]), .head_pkt(fh_pkt[NP]),
    .empty(po_empty), .full(po_full), .free_cnt());
  assign fh_valid[NP] = !po_empty;

  // ---------------------------------------------------------- selectors
  logic       sel_now [NI];
  for (genvar i = 0; i < int'(NP); i++) begin : g_pbcs
    pbc_selector #(.N_PBE(N_PBE), .PM_BASE(PM_BASE), .PM_LIMIT(PM_LIMIT)) u_pbcs (
      .hdr_valid(fh_valid[i]), .hdr(fh_pkt[i].hdr),
      .pb_tag, .pb_state,
      .to_pbc(sel_now[i]), .hit_state());
  end
  assign sel_now[NP] = 1'b0;   // controller output is never re-diverted

  // ------------------------------------------------ R and VA stage registers
  logic          r_v [NI], va_v [NI];
  pkt_t          r_pkt [NI], va_pkt [NI];
  logic [PW-1:0] r_port [NI], va_port [NI];
  logic          r_sel [NI], va_sel [NI];
  logic          va_vc [NI];
  logic          sa_grant [NI];
  logic [PW-1:0] sa_port  [NI];
  logic          va_adv [NI], r_adv [NI];

  for (genvar i = 0; i < int'(NI); i++) begin : g_pipe
    assign va_adv[i] = !va_v[i] || sa_grant[i];      // VA register frees
    assign r_adv[i]  = !r_v[i] || va_adv[i];         // R register frees
    assign fh_pop[i] = fh_valid[i] && r_adv[i];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        r_v[i]  <= 1'b0;
        va_v[i] <= 1'b0;
      end else begin
        if (r_adv[i]) r_v[i] <= fh_valid[i];
        if (va_adv[i]) va_v[i] <= r_v[i];
      end
    end

    always_ff @(posedge clk) begin
      if (r_adv[i]) begin
        // R: route computation, with the selector's decision latched beside it
        r_pkt[i]  <= fh_pkt[i];
        r_port[i] <= (int'(fh_pkt[i].hdr.dst) < int'(NP)) ? PW'(fh_pkt[i].hdr.dst) : '0;
        r_sel[i]  <= sel_now[i];
      end
      if (va_adv[i]) begin
        // VA: class at the target output (acks to the controller: class 1)
        va_pkt[i]  <= r_pkt[i];
        va_port[i] <= r_port[i];
        va_sel[i]  <= r_sel[i];
        va_vc[i]   <= r_sel[i] && (r_pkt[i].hdr.op == OP_CMP);
      end
    end
  end

  // ------------------------------------------------------------------ SA
  logic [$clog2(OB_DEPTH+1)-1:0] ob_free [NP];
  logic [$clog2(PI_DEPTH+1)-1:0] pi_ack_free, pi_req_free;
  logic can_take [NI][2];
  logic          st_v   [NI];
  pkt_t          st_pkt [NI];
  logic          st_vc  [NI];

  always_comb begin
    for (int o = 0; o < int'(NP); o++) begin
      can_take[o][0] = int'(ob_free[o]) > (st_v[o] ? 1 : 0);
      can_take[o][1] = 1'b0;
    end
    can_take[NP][0] = int'(pi_req_free) > ((st_v[NP] && !st_vc[NP]) ? 1 : 0);
    can_take[NP][1] = int'(pi_ack_free) > ((st_v[NP] &&  st_vc[NP]) ? 1 : 0);
  end

  switch_allocator #(.NI(NI), .NO(NI)) u_sa (
    .clk, .rst_n,
    .valid(va_v), .pbcs_sel(va_sel), .rc_port(va_port), .vc(va_vc),
    .can_take, .grant(sa_grant), .grant_port(sa_port));

  // ------------------------------------------------------------------ ST
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < int'(NI); o++) st_v[o] <= 1'b0;
    end else begin
      for (int o = 0; o < int'(NI); o++) begin
        st_v[o] <= 1'b0;
        for (int i = 0; i < int'(NI); i++)
          if (sa_grant[i] && int'(sa_port[i]) == o) st_v[o] <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < int'(NI); i++)
      if (sa_grant[i]) begin
        st_pkt[sa_port[i]] <= va_pkt[i];
        st_vc[sa_port[i]]  <= va_vc[i];
      end
  end

  // ------------------------------------------------------ output buffers
  for (genvar o = 0; o < int'(NP); o++) begin : g_ob
    logic ob_empty;
    pkt_fifo #(.DEPTH(OB_DEPTH)) u_ob (
      .clk, .rst_n,
      .push(st_v[o]), .push_pkt(st_pkt[o]),
      .pop(out_ready[o] && !ob_empty), .head_pkt(out_pkt[o]),
      .empty(ob_empty), .full(), .free_cnt(ob_free[o]));
    assign out_valid[o] = !ob_empty;
  end

  // PBC Input buffer
  logic pi_valid, pi_pop;
  pkt_t pi_head;
  pi_buffer #(.ACK_DEPTH(PI_DEPTH), .REQ_DEPTH(PI_DEPTH)) u_pi (
    .clk, .rst_n,
    .push(st_v[NP]), .push_pkt(st_pkt[NP]),
    .ack_free(pi_ack_free), .req_free(pi_req_free),
    .pop(pi_pop), .head_pkt(pi_head), .head_valid(pi_valid),
    .head_is_ack_bypass(pi_ack_bypass));

  // ------------------------------------------------------------ PB + PBC
  persist_buffer #(.N_PBE(N_PBE)) u_pb (
    .clk, .format(pb_format), .recover(pb_recover),
    .fill_en(pb_fill_en), .fill_idx(pb_fill_idx), .fill_tag(pb_fill_tag),
    .fill_hdr(pb_fill_hdr), .fill_data(pb_fill_data),
    .sa_en(pb_sa_en), .sa_idx(pb_sa_idx), .sa_state(pb_sa_state),
    .sb_en(pb_sb_en), .sb_idx(pb_sb_idx), .sb_state(pb_sb_state),
    .touch_en(pb_touch_en), .touch_idx(pb_touch_idx),
    .rd_idx(pb_rd_idx), .rd_data(pb_rd_data), .rd_hdr(pb_rd_hdr),
    .tag_o(pb_tag), .state_o(pb_state), .cnt_o(pb_cnt));

  pb_controller #(.N_PBE(N_PBE), .DRAIN_HI_PCT(DRAIN_HI_PCT), .PRESET_PCT(PRESET_PCT)) u_pbc (
    .clk, .rst_n, .rf_mode,
    .pi_valid, .pi_pkt(pi_head), .pi_pop,
    .po_full, .po_push, .po_pkt,
    .pb_tag, .pb_state, .pb_cnt, .pb_rd_data, .pb_rd_hdr, .pb_rd_idx,
    .pb_recover, .pb_fill_en, .pb_fill_idx, .pb_fill_tag, .pb_fill_hdr, .pb_fill_data,
    .pb_sa_en, .pb_sa_idx, .pb_sa_state, .pb_sb_en, .pb_sb_idx, .pb_sb_state,
    .pb_touch_en, .pb_touch_idx,
    .recovering, .dirty_count(pb_dirty_count), .ev(pbc_ev));

  for (genvar i = 0; i < int'(NP); i++) begin : g_div
    assign pbcs_divert[i] = va_v[i] && va_sel[i] && sa_grant[i];
  end

  // The header slot must stay exactly 16 bytes: it is what an entry stores.
  if ($bits(hdr_t) != HDR_W) begin : g_hdr_size_check
    $error("hdr_t is %0d bits, expected %0d", $bits(hdr_t), HDR_W);
  end

  a_dst_valid: assert property (@(posedge clk) disable iff (!rst_n)
    fh_pop[0] |-> int'(fh_pkt[0].hdr.dst) < int'(NP));
endmodule
