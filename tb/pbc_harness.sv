// pbc_harness: the persist-buffer controller together with its tables,
// for the controller's unit test. It only wires pb_controller to
// persist_buffer and exposes the controller's PI/PO sides and the table
// states.
module pbc_harness
  import pcs_pkg::*;
#(
  parameter int unsigned N_PBE        = 4,
  parameter int unsigned DRAIN_HI_PCT = 80,
  parameter int unsigned PRESET_PCT   = 60
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        format,
  input  logic        rf_mode,
  input  logic        pi_valid,
  input  pkt_t        pi_pkt,
  output logic        pi_pop,
  input  logic        po_full,
  output logic        po_push,
  output pkt_t        po_pkt,
  output pbc_events_t ev,
  output logic [$clog2(N_PBE+1)-1:0] dirty_count,
  output logic        recovering,
  output pbe_state_e  state_o [N_PBE],
  output logic [TAG_W-1:0] tag_o [N_PBE]
);
  localparam int unsigned IW = $clog2(N_PBE);
  logic [IW-1:0]     cnt [N_PBE];
  logic [DATA_W-1:0] rd_data, fill_data;
  hdr_t              rd_hdr, fill_hdr;
  logic [IW-1:0]     rd_idx, fill_idx, sa_idx, sb_idx, touch_idx;
  logic              recover, fill_en, sa_en, sb_en, touch_en;
  logic [TAG_W-1:0]  fill_tag;
  pbe_state_e        sa_state, sb_state;

  persist_buffer #(.N_PBE(N_PBE)) u_pb (
    .clk, .format, .recover, .fill_en, .fill_idx, .fill_tag, .fill_hdr, .fill_data,
    .sa_en, .sa_idx, .sa_state, .sb_en, .sb_idx, .sb_state, .touch_en, .touch_idx,
    .rd_idx, .rd_data, .rd_hdr, .tag_o, .state_o, .cnt_o(cnt));

  pb_controller #(.N_PBE(N_PBE), .DRAIN_HI_PCT(DRAIN_HI_PCT), .PRESET_PCT(PRESET_PCT)) u_pbc (
    .clk, .rst_n, .rf_mode, .pi_valid, .pi_pkt, .pi_pop, .po_full, .po_push, .po_pkt,
    .pb_tag(tag_o), .pb_state(state_o), .pb_cnt(cnt), .pb_rd_data(rd_data), .pb_rd_hdr(rd_hdr),
    .pb_rd_idx(rd_idx), .pb_recover(recover), .pb_fill_en(fill_en), .pb_fill_idx(fill_idx),
    .pb_fill_tag(fill_tag), .pb_fill_hdr(fill_hdr), .pb_fill_data(fill_data),
    .pb_sa_en(sa_en), .pb_sa_idx(sa_idx), .pb_sa_state(sa_state),
    .pb_sb_en(sb_en), .pb_sb_idx(sb_idx), .pb_sb_state(sb_state),
    .pb_touch_en(touch_en), .pb_touch_idx(touch_idx),
    .recovering, .dirty_count, .ev);
endmodule
