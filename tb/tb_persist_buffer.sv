// tb_persist_buffer: checks the persist-buffer tables. Format empties every
// entry and ranks the LRU counters; fills and the two state ports write
// the rows they name; recover turns only Drain entries back to Dirty; and
// under random touches the counters always equal each entry's position in
// an independently kept most-recently-used list.
`timescale 1ns/1ps
module tb_persist_buffer;
  import pcs_pkg::*;
  localparam int N = 16;
  logic clk = 1'b0;
  always #0.5 clk = ~clk;
  logic format, recover, fill_en, sa_en, sb_en, touch_en;
  logic [3:0] fill_idx, sa_idx, sb_idx, touch_idx, rd_idx;
  logic [TAG_W-1:0] fill_tag;
  hdr_t fill_hdr, rd_hdr;
  logic [DATA_W-1:0] fill_data, rd_data;
  pbe_state_e sa_state, sb_state;
  logic [TAG_W-1:0] tag_o [N];
  pbe_state_e state_o [N];
  logic [3:0] cnt_o [N];
  int checks = 0, failures = 0;

  persist_buffer #(.N_PBE(N)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int mru [$];   // entry indices, most recently used first
  task automatic model_touch(input int k);
    foreach (mru[j]) if (mru[j] == k) begin mru.delete(j); break; end
    mru.push_front(k);
  endtask

  task automatic idle();
    fill_en = 0; sa_en = 0; sb_en = 0; touch_en = 0; recover = 0; format = 0;
  endtask

  initial begin
    idle();
    fill_idx = 0; sa_idx = 0; sb_idx = 0; touch_idx = 0; rd_idx = 0;
    fill_tag = 0; fill_hdr = '0; fill_data = 0; sa_state = PBE_EMPTY; sb_state = PBE_EMPTY;
    @(negedge clk); format = 1; @(negedge clk); idle();
    for (int i = 0; i < N; i++) begin
      check(state_o[i] == PBE_EMPTY, "Empty after format");
      check(int'(cnt_o[i]) == i, "counter rank after format");
    end
    // initial LRU ranking: entry 0 is most recent
    for (int i = 0; i < N; i++) mru.push_back(i);
    // fill every entry, mark Dirty through port A
    for (int i = 0; i < N; i++) begin
      fill_en = 1; fill_idx = 4'(i); fill_tag = TAG_W'(1000 + i);
      fill_hdr = '0; fill_hdr.addr = 64'(i) << 6; fill_hdr.rtag = 13'(i);
      fill_data = {16{32'(i * 3 + 1)}};
      sa_en = 1; sa_idx = 4'(i); sa_state = PBE_DIRTY;
      @(negedge clk); idle();
    end
    for (int i = 0; i < N; i++) begin
      rd_idx = 4'(i); #0.1;
      check(tag_o[i] == TAG_W'(1000 + i) && state_o[i] == PBE_DIRTY, "fill tag/state");
      check(rd_data == {16{32'(i * 3 + 1)}} && rd_hdr.rtag == 13'(i), "data/header read");
    end
    // port B drains 0..5, port A frees 0,1 in the same cycles as B drains 4,5
    for (int i = 0; i < 4; i++) begin
      sb_en = 1; sb_idx = 4'(i); sb_state = PBE_DRAIN; @(negedge clk); idle();
    end
    sb_en = 1; sb_idx = 4; sb_state = PBE_DRAIN; sa_en = 1; sa_idx = 0; sa_state = PBE_EMPTY;
    @(negedge clk); idle();
    sb_en = 1; sb_idx = 5; sb_state = PBE_DRAIN; sa_en = 1; sa_idx = 1; sa_state = PBE_EMPTY;
    @(negedge clk); idle();
    check(state_o[0] == PBE_EMPTY && state_o[1] == PBE_EMPTY, "port A frees");
    check(state_o[2] == PBE_DRAIN && state_o[5] == PBE_DRAIN, "port B drains");
    check(state_o[6] == PBE_DIRTY, "untouched entry unchanged");
    // recover: Drain -> Dirty, Empty stays
    recover = 1; @(negedge clk); idle();
    check(state_o[0] == PBE_EMPTY && state_o[1] == PBE_EMPTY, "recover keeps Empty");
    for (int i = 2; i < 6; i++) check(state_o[i] == PBE_DIRTY, "recover Drain->Dirty");
    // tables are persistent: no reset, only format clears them
    repeat (5) @(negedge clk);
    check(tag_o[9] == TAG_W'(1009), "contents retained");
    // random LRU touches against the MRU-list model
    for (int k = 0; k < 3000; k++) begin
      touch_en = $urandom_range(0, 3) != 0;
      touch_idx = 4'($urandom_range(0, N - 1));
      @(negedge clk);
      if (touch_en) model_touch(int'(touch_idx));
      idle();
      foreach (mru[j]) check(int'(cnt_o[mru[j]]) == j, $sformatf("LRU rank step %0d", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
