// tb_pb_controller: unit test of the persist-buffer controller, driven
// through its PI and PO sides with its tables attached (pbc_harness).
//
// Instance A (4 entries, drain threshold 80% = 3 Dirty, preset 60% = 2):
//   PB mode: a write is acknowledged in the cycle it is taken and drained
//   in the next one; a read of the Drain line is answered from the buffer;
//   the PM acknowledgment frees the entry; a later read is passed on to PM
//   unchanged; a write to a line in Drain waits for its acknowledgment.
//   RF mode: no drain below the threshold, coalescing into a Dirty entry,
//   the threshold burst drains the LRU Dirty entry down to the preset.
//   Crash: Drain entries return to Dirty, every Dirty entry is drained and
//   requests wait until recovery ends; acks are served meanwhile.
// Instance B (4 entries, threshold above capacity): with every entry Dirty
//   a new write forces the LRU Dirty entry out as a victim and stalls
//   until the acknowledgment frees it.
// Expected packets are built from the stimulus, not taken from the design.
`timescale 1ns/1ps
module tb_pb_controller;
  import pcs_pkg::*;
  localparam logic [63:0] BASE = 64'h0000_0001_0000_0000;
  logic clk = 1'b0;
  always #0.5 clk = ~clk;

  logic rst_n, format, rf_mode [2];
  logic pi_valid [2], pi_pop [2], po_full [2], po_push [2], recovering [2];
  pkt_t pi_pkt [2], po_pkt [2];
  pbc_events_t ev [2];
  logic [2:0] dirty [2];
  pbe_state_e st [2][4];
  logic [TAG_W-1:0] tg [2][4];
  int checks = 0, failures = 0;

  pbc_harness #(.N_PBE(4), .DRAIN_HI_PCT(80), .PRESET_PCT(60)) u_a (
    .clk, .rst_n, .format, .rf_mode(rf_mode[0]), .pi_valid(pi_valid[0]), .pi_pkt(pi_pkt[0]),
    .pi_pop(pi_pop[0]), .po_full(po_full[0]), .po_push(po_push[0]), .po_pkt(po_pkt[0]),
    .ev(ev[0]), .dirty_count(dirty[0]), .recovering(recovering[0]), .state_o(st[0]), .tag_o(tg[0]));
  pbc_harness #(.N_PBE(4), .DRAIN_HI_PCT(125), .PRESET_PCT(60)) u_b (
    .clk, .rst_n, .format, .rf_mode(rf_mode[1]), .pi_valid(pi_valid[1]), .pi_pkt(pi_pkt[1]),
    .pi_pop(pi_pop[1]), .po_full(po_full[1]), .po_push(po_push[1]), .po_pkt(po_pkt[1]),
    .ev(ev[1]), .dirty_count(dirty[1]), .recovering(recovering[1]), .state_o(st[1]), .tag_o(tg[1]));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // PO capture with the cycle each packet left
  pkt_t po_q [2][$];
  int   cyc = 0;
  int   po_cyc [2][$];
  int   n_victim = 0, n_stall = 0, n_burst = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int u = 0; u < 2; u++)
      if (rst_n && po_push[u]) begin po_q[u].push_back(po_pkt[u]); po_cyc[u].push_back(cyc); end
    if (rst_n) begin
      n_victim += int'(ev[1].victim);
      n_stall  += int'(ev[1].stall);
      n_burst  += int'(ev[0].rf_burst);
    end
  end

  function automatic pkt_t mk(input opcode_e op, input int line, input int v);
    pkt_t p = '0;
    p.hdr.op = op; p.hdr.src = 4'd0; p.hdr.dst = 4'd1;
    p.hdr.rtag = 13'(line * 16 + v);
    p.hdr.addr = BASE + (64'(line) << 6);
    if (op == OP_MEM_WR) p.data = {16{32'(line * 1000 + v)}};
    return p;
  endfunction

  // present one packet on PI; returns the cycle it was taken
  task automatic give(input int u, input pkt_t p, output int t);
    pi_pkt[u] <= p; pi_valid[u] <= 1'b1;
    @(posedge clk);
    while (!pi_pop[u]) @(posedge clk);
    t = cyc - 1;
    pi_valid[u] <= 1'b0;
    @(negedge clk);
  endtask

  task automatic expect_po(input int u, input opcode_e op, input int line,
                           input logic [DATA_W-1:0] d, input bit chk_d, input string what);
    int g = 0;
    while (po_q[u].size() == 0 && g < 50) begin @(negedge clk); g++; end
    if (po_q[u].size() == 0) begin check(0, {what, ": nothing in PO"}); return; end
    begin
      pkt_t p = po_q[u].pop_front();
      if (!(p.hdr.op == op && p.hdr.addr == BASE + (64'(line) << 6))) $display("got op %0d line %0d", p.hdr.op, (p.hdr.addr - BASE) >> 6);
      void'(po_cyc[u].pop_front());
      check(p.hdr.op == op && p.hdr.addr == BASE + (64'(line) << 6) &&
            (!chk_d || p.data == d), what);
    end
  endtask

  // keep the packet on PI until the controller takes it at a clock edge
  task automatic hold_until_pop(input int u);
    do @(posedge clk); while (!pi_pop[u]);
    pi_valid[u] <= 1'b0;
    @(negedge clk);
  endtask

  function automatic int state_of(input int u, input int line);
    for (int i = 0; i < 4; i++)
      if (st[u][i] != PBE_EMPTY && tg[u][i] == (BASE >> 6) + TAG_W'(line)) return int'(st[u][i]);
    return int'(PBE_EMPTY);
  endfunction

  initial begin
    int t;
    pkt_t w;
    rst_n = 0; format = 1;
    for (int u = 0; u < 2; u++) begin
      pi_valid[u] = 0; pi_pkt[u] = '0; po_full[u] = 0; rf_mode[u] = 0;
    end
    repeat (3) @(posedge clk);
    format <= 0; rst_n <= 1;
    repeat (4) @(negedge clk);
    check(!recovering[0] && dirty[0] == 0, "A idle after power-up");

    // ---------------- A, PB mode
    give(0, mk(OP_MEM_WR, 1, 1), t);
    expect_po(0, OP_CMP, 1, '0, 0, "write acknowledged");
    check(po_cyc[0].size() == 0, "");
    @(negedge clk);
    expect_po(0, OP_MEM_WR, 1, mk(OP_MEM_WR, 1, 1).data, 1, "entry drained to PM");
    check(state_of(0, 1) == int'(PBE_DRAIN), "entry in Drain");
    give(0, mk(OP_MEM_RD, 1, 2), t);
    expect_po(0, OP_MEM_DATA, 1, mk(OP_MEM_WR, 1, 1).data, 1, "read of Drain entry forwarded");
    // write to the same line while in Drain waits for the ack
    pi_pkt[0] <= mk(OP_MEM_WR, 1, 3); pi_valid[0] <= 1;
    repeat (5) @(negedge clk);
    check(pi_valid[0] && !pi_pop[0] && po_q[0].size() == 0, "write to Drain line waits");
    // the ack is pushed in front (the PI buffer would do this): swap in the ack
    pi_valid[0] <= 0; @(negedge clk);
    give(0, mk(OP_CMP, 1, 0), t);
    check(state_of(0, 1) == int'(PBE_EMPTY) && po_q[0].size() == 0, "ack frees the entry, no PO packet");
    give(0, mk(OP_MEM_WR, 1, 3), t);
    expect_po(0, OP_CMP, 1, '0, 0, "waiting write now accepted");
    @(negedge clk);
    expect_po(0, OP_MEM_WR, 1, mk(OP_MEM_WR, 1, 3).data, 1, "second version drained");
    give(0, mk(OP_CMP, 1, 0), t);
    w = mk(OP_MEM_RD, 7, 1);
    give(0, w, t);
    begin
      automatic int g = 0;
      while (po_q[0].size() == 0 && g < 10) begin @(negedge clk); g++; end
      check(po_q[0].size() > 0 && po_q[0][0] == w, "read with no entry passed on unchanged");
      if (po_q[0].size() > 0) begin void'(po_q[0].pop_front()); void'(po_cyc[0].pop_front()); end
    end
    // PO full blocks everything that needs a PO slot
    po_full[0] <= 1;
    pi_pkt[0] <= mk(OP_MEM_WR, 2, 1); pi_valid[0] <= 1;
    repeat (4) @(negedge clk);
    check(!pi_pop[0] && po_q[0].size() == 0, "PO full stalls the controller");
    po_full[0] <= 0;
    hold_until_pop(0);
    expect_po(0, OP_CMP, 2, '0, 0, "write after PO frees");
    expect_po(0, OP_MEM_WR, 2, '0, 0, "drain after PO frees");
    give(0, mk(OP_CMP, 2, 0), t);

    // ---------------- A, RF mode
    rf_mode[0] <= 1; @(negedge clk);
    give(0, mk(OP_MEM_WR, 3, 1), t); expect_po(0, OP_CMP, 3, '0, 0, "RF write 3");
    give(0, mk(OP_MEM_WR, 4, 1), t); expect_po(0, OP_CMP, 4, '0, 0, "RF write 4");
    repeat (5) @(negedge clk);
    check(po_q[0].size() == 0 && dirty[0] == 2, "no drain below threshold");
    give(0, mk(OP_MEM_WR, 3, 2), t); expect_po(0, OP_CMP, 3, '0, 0, "coalesced write acked");
    check(dirty[0] == 2, "coalescing took no entry");
    give(0, mk(OP_MEM_RD, 3, 5), t);
    expect_po(0, OP_MEM_DATA, 3, mk(OP_MEM_WR, 3, 2).data, 1, "forwarded read sees the coalesced data");
    give(0, mk(OP_MEM_WR, 5, 1), t); expect_po(0, OP_CMP, 5, '0, 0, "RF write 5");
    // 3 Dirty = threshold: drain the LRU (line 4) down to 2
    repeat (6) @(negedge clk);
    expect_po(0, OP_MEM_WR, 4, mk(OP_MEM_WR, 4, 1).data, 1, "burst drains LRU line 4");
    check(po_q[0].size() == 0 && dirty[0] == 2, "burst stops at preset");
    check(n_burst == 1, "one burst");

    // ---------------- A, crash while 2 Dirty + 1 Drain
    rst_n <= 0; @(negedge clk); rst_n <= 1;
    pi_pkt[0] <= mk(OP_MEM_WR, 6, 1); pi_valid[0] <= 1;
    @(negedge clk);
    check(recovering[0], "recovering after crash");
    begin
      automatic int g = 0;
      while (po_q[0].size() < 3 && g < 20) begin
        check(!pi_pop[0], "requests wait during recovery");
        @(negedge clk); g++;
      end
    end
    check(po_q[0].size() >= 3, "three recovery drains");
    for (int k = 0; k < 3; k++) begin
      automatic pkt_t p = po_q[0].pop_front(); void'(po_cyc[0].pop_front());
      check(p.hdr.op == OP_MEM_WR, "recovery drain is a PM write");
    end
    hold_until_pop(0);
    check(!recovering[0], "recovery over");
    expect_po(0, OP_CMP, 6, '0, 0, "write served after recovery");

    // ---------------- B, victim
    rf_mode[1] <= 1; @(negedge clk);
    for (int l = 10; l < 14; l++) begin
      give(1, mk(OP_MEM_WR, l, 1), t);
      expect_po(1, OP_CMP, l, '0, 0, "B fill");
    end
    give(1, mk(OP_MEM_RD, 10, 1), t);  // line 10 becomes most recent
    expect_po(1, OP_MEM_DATA, 10, mk(OP_MEM_WR, 10, 1).data, 1, "B read");
    check(dirty[1] == 4, "B all Dirty");
    pi_pkt[1] <= mk(OP_MEM_WR, 14, 1); pi_valid[1] <= 1;
    repeat (4) @(negedge clk);
    check(n_victim == 1, "exactly one victim drained");
    expect_po(1, OP_MEM_WR, 11, mk(OP_MEM_WR, 11, 1).data, 1, "victim is LRU line 11");
    check(!pi_pop[1] && n_stall > 0, "write stalls while victim drains");
    pi_valid[1] <= 0; @(negedge clk);
    give(1, mk(OP_CMP, 11, 0), t);
    give(1, mk(OP_MEM_WR, 14, 1), t);
    expect_po(1, OP_CMP, 14, '0, 0, "write takes the freed entry");
    check(state_of(1, 14) == int'(PBE_DIRTY), "new line Dirty");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
