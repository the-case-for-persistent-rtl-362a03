// tb_cxl_switch_pcs: end-to-end test of the persistent CXL switch at its
// default size (two external ports, 16 persist-buffer entries).
//
// Port 0 is a host that issues persists (write, then wait for the
// acknowledgment, as a flush + fence would), reads and CXL.io packets;
// port 1 is a persistent-memory model with 100/200-cycle read/write
// latency. A reference memory holds, per line, the last acknowledged
// value; every read must return it, and after all buffers have drained the
// memory model must hold it too.
//
// Phases: (1) PB mode: pass-through of CXL.io, persist latency, read after
// drain, a burst that fills every entry so that a write stalls while PM
// acknowledgments overtake it in the PI buffer and a read diverted to the
// controller finds its entry gone; (2) read-forwarding mode: forwarded
// reads, write coalescing, the drain-threshold burst with LRU victim order;
// (3) a crash (volatile reset) with Dirty entries and the recovery drain;
// (4) random traffic in both modes. Every mechanism is counted and one
// that never happened is a failure.
`timescale 1ns/1ps
module tb_cxl_switch_pcs;
  import pcs_pkg::*;

  localparam logic [ADDR_W-1:0] PM_BASE = 64'h0000_0001_0000_0000;
  localparam int HOST = 0;
  localparam int PMP  = 1;
  // Clock edges from the switch accepting a packet on one port to the
  // receiver taking it from another: R, VA, SA/ST, output-buffer write,
  // then the receiver's pop. The controller's turnaround is folded into
  // the PI pop, so a persist answered by the switch takes 2*LEG.
  localparam int LEG    = 5;
  localparam int RD_LAT = 100;

  logic clk = 1'b0;
  always #0.5 clk = ~clk;

  logic rst_n, pb_format, rf_mode;
  logic in_valid [2];  pkt_t in_pkt [2];  logic in_ready [2];
  logic out_valid [2]; pkt_t out_pkt [2]; logic out_ready [2];
  pbc_events_t ev;
  logic pi_ack_bypass, recovering;
  logic pbcs_divert [2];
  logic [4:0] dirty_count;

  cxl_switch_pcs dut (
    .clk, .rst_n, .pb_format, .rf_mode,
    .in_valid, .in_pkt, .in_ready, .out_valid, .out_pkt, .out_ready,
    .pbc_ev(ev), .pi_ack_bypass, .pbcs_divert, .recovering,
    .pb_dirty_count(dirty_count));

  pm_model u_pm (
    .clk, .rst_n,
    .in_valid(out_valid[PMP]), .in_pkt(out_pkt[PMP]), .in_ready(out_ready[PMP]),
    .out_valid(in_valid[PMP]), .out_pkt(in_pkt[PMP]), .out_ready(in_ready[PMP]));

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // --------------------------------------------------------- event counters
  int n_alloc, n_coal, n_fwd, n_rd_pm, n_ack, n_drain, n_victim, n_stall;
  int n_burst, n_recover, n_bypass, n_divert, n_io;
  always @(posedge clk) if (rst_n) begin
    n_alloc   += int'(ev.wr_alloc);
    n_coal    += int'(ev.wr_coalesce);
    n_fwd     += int'(ev.rd_forward);
    n_rd_pm   += int'(ev.rd_to_pm);
    n_ack     += int'(ev.ack_done);
    n_drain   += int'(ev.drain);
    n_victim  += int'(ev.victim);
    n_stall   += int'(ev.stall);
    n_burst   += int'(ev.rf_burst);
    n_recover += int'(ev.recover);
    n_bypass  += int'(pi_ack_bypass && dut.pi_pop);
    n_divert  += int'(pbcs_divert[0]) + int'(pbcs_divert[1]);
  end

  // addresses of the writes the switch sends to PM, in order
  logic [ADDR_W-1:0] pm_wr_addr [$];
  always @(posedge clk)
    if (rst_n && out_valid[PMP] && out_pkt[PMP].hdr.op == OP_MEM_WR)
      pm_wr_addr.push_back(out_pkt[PMP].hdr.addr);

  // ------------------------------------------------------------ host side
  pkt_t   rx [logic [RTAG_W-1:0]];
  longint rx_cyc [logic [RTAG_W-1:0]];
  assign out_ready[HOST] = 1'b1;
  always @(posedge clk) begin
    if (rst_n && out_valid[HOST]) begin
      rx[out_pkt[HOST].hdr.rtag]     = out_pkt[HOST];
      rx_cyc[out_pkt[HOST].hdr.rtag] = cyc;
    end
  end

  logic [DATA_W-1:0] ref_mem [logic [TAG_W-1:0]];
  logic [RTAG_W-1:0] next_tag = 1;

  function automatic logic [DATA_W-1:0] ref_rd(input logic [ADDR_W-1:0] a);
    if (ref_mem.exists(line_tag(a))) return ref_mem[line_tag(a)];
    return '0;
  endfunction

  function automatic logic [ADDR_W-1:0] line_addr(input int n);
    return PM_BASE + (ADDR_W'(n) << LINE_OFS);
  endfunction

  function automatic logic [DATA_W-1:0] pattern(input int n, input int v);
    logic [DATA_W-1:0] d;
    for (int w = 0; w < DATA_W / 32; w++) d[w*32 +: 32] = 32'(n * 7919 + v * 104729 + w);
    return d;
  endfunction

  // Send one packet from the host; returns the cycle it was accepted.
  task automatic send(input opcode_e op, input logic [ADDR_W-1:0] a,
                      input logic [DATA_W-1:0] d, output logic [RTAG_W-1:0] tg,
                      output longint t_acc);
    tg = next_tag;
    next_tag = (next_tag == '1) ? 1 : next_tag + 1'b1;
    in_pkt[HOST]          <= '0;
    in_pkt[HOST].hdr.op   <= op;
    in_pkt[HOST].hdr.src  <= 4'(HOST);
    in_pkt[HOST].hdr.dst  <= 4'(PMP);
    in_pkt[HOST].hdr.rtag <= tg;
    in_pkt[HOST].hdr.addr <= a;
    in_pkt[HOST].data     <= d;
    in_valid[HOST]        <= 1'b1;
    @(posedge clk);
    while (!in_ready[HOST]) @(posedge clk);
    t_acc = cyc;
    in_valid[HOST] <= 1'b0;
  endtask

  task automatic wait_rsp(input logic [RTAG_W-1:0] tg, output pkt_t p, output longint t_rx);
    int guard = 0;
    while (!rx.exists(tg) && guard < 20000) begin @(posedge clk); guard++; end
    if (!rx.exists(tg)) begin
      check(0, $sformatf("no response for tag %0d", tg));
      p = '0; t_rx = cyc;
    end else begin
      p = rx[tg]; t_rx = rx_cyc[tg];
      rx.delete(tg); rx_cyc.delete(tg);
    end
  endtask

  // persist: write + wait for acknowledgment; returns its latency
  task automatic persist(input int n, input logic [DATA_W-1:0] d, output longint lat);
    logic [RTAG_W-1:0] tg; longint t0, t1; pkt_t p;
    send(OP_MEM_WR, line_addr(n), d, tg, t0);
    wait_rsp(tg, p, t1);
    check(p.hdr.op == OP_CMP && p.hdr.addr == line_addr(n),
          $sformatf("persist ack for line %0d", n));
    ref_mem[line_tag(line_addr(n))] = d;
    lat = t1 - t0;
  endtask

  task automatic read_chk(input int n, output longint lat);
    logic [RTAG_W-1:0] tg; longint t0, t1; pkt_t p;
    send(OP_MEM_RD, line_addr(n), '0, tg, t0);
    wait_rsp(tg, p, t1);
    check(p.hdr.op == OP_MEM_DATA && p.data == ref_rd(line_addr(n)),
          $sformatf("read data of line %0d", n));
    lat = t1 - t0;
  endtask

  task automatic wait_quiet();   // every entry Empty, nothing in flight
    int guard = 0;
    do begin @(posedge clk); guard++; end
    while ((dut.u_pbc.any_dirty || dut.u_pbc.any_drain || u_pm.rq_pkt.size() != 0)
           && guard < 20000);
    repeat (20) @(posedge clk);
  endtask

  task automatic pm_matches_ref(input string when);
    foreach (ref_mem[t]) begin
      check(u_pm.peek({t, 6'b0}) == ref_mem[t], $sformatf("PM holds line %h (%s)", t, when));
    end
  endtask

  // ------------------------------------------------------------- watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------ test
  initial begin
    longint lat, t0, t1;
    logic [RTAG_W-1:0] tg, tgs [17], rtg;
    pkt_t p;
    int drains0, fwd0, coal0, w0, mode_switches;

    rst_n = 1'b0; pb_format = 1'b1; rf_mode = 1'b0; mode_switches = 0;
    in_valid[HOST] = 1'b0; in_pkt[HOST] = '0;
    repeat (4) @(posedge clk);
    pb_format <= 1'b0; rst_n <= 1'b1;
    repeat (4) @(posedge clk);

    // ---- (1) PB mode
    // CXL.io passes straight through, not diverted, 4-stage pipeline each way
    send(OP_IO, 64'h10, pattern(1, 1), tg, t0);
    wait_rsp(tg, p, t1);
    check(p.hdr.op == OP_IO && p.data == pattern(1, 1), "CXL.io round trip");
    check(t1 - t0 == 2 * LEG + RD_LAT, $sformatf("CXL.io latency %0d", t1 - t0));
    n_io++;
    check(n_divert == 0, "CXL.io not diverted");

    // a persist completes at the switch: 9 cycles instead of a PM round trip
    persist(1, pattern(1, 10), lat);
    check(lat == 2 * LEG, $sformatf("persist latency %0d, expected %0d", lat, 2 * LEG));
    wait_quiet();
    check(u_pm.peek(line_addr(1)) == pattern(1, 10), "drained line reached PM");
    // the entry is Empty now: the read goes to PM without diversion
    begin
      int d0;
      d0 = n_divert;
      read_chk(1, lat);
      check(n_divert == d0, "read of drained line not diverted");
      check(lat == 2 * LEG + RD_LAT, $sformatf("PM read latency %0d", lat));
    end

    // burst: 16 writes fill every entry, all end up Drain; write 17 stalls.
    for (int i = 0; i < 17; i++) send(OP_MEM_WR, line_addr(100 + i), pattern(100 + i, 1), tgs[i], t0);
    // read of line 100 (its entry is Drain): diverted, queued behind write 17
    send(OP_MEM_RD, line_addr(100), '0, rtg, t0);
    for (int i = 0; i < 17; i++) begin
      wait_rsp(tgs[i], p, t1);
      check(p.hdr.op == OP_CMP, $sformatf("burst ack %0d", i));
      ref_mem[line_tag(line_addr(100 + i))] = pattern(100 + i, 1);
    end
    wait_rsp(rtg, p, t1);
    check(p.hdr.op == OP_MEM_DATA && p.data == pattern(100, 1), "read behind stalled write");
    check(n_stall > 0, "burst caused a stall");
    check(n_bypass > 0, "ack overtook a queued request in PI");
    wait_quiet();
    pm_matches_ref("after PB burst");

    // ---- (2) read-forwarding mode
    rf_mode <= 1'b1; mode_switches++;
    @(posedge clk);
    drains0 = n_drain;
    for (int i = 0; i < 11; i++) persist(200 + i, pattern(200 + i, 1), lat);
    repeat (20) @(posedge clk);
    check(n_drain == drains0, "no drain below the threshold");
    check(dirty_count == 11, $sformatf("11 Dirty entries, got %0d", dirty_count));
    fwd0 = n_fwd;
    w0 = u_pm.n_reads;
    for (int i = 0; i < 11; i++) begin
      read_chk(200 + i, lat);
      check(lat == 2 * LEG, $sformatf("forwarded read latency %0d", lat));
    end
    check(n_fwd - fwd0 == 11, "all 11 reads forwarded");
    check(u_pm.n_reads == w0, "forwarded reads never reached PM");
    coal0 = n_coal;
    for (int i = 0; i < 4; i++) persist(200 + i, pattern(200 + i, 2), lat);
    check(n_coal - coal0 == 4, "4 writes coalesced");
    check(dirty_count == 11, "coalescing takes no new entry");
    for (int i = 0; i < 4; i++) read_chk(200 + i, lat);
    // 12th Dirty entry reaches the 80% threshold: drain the 3 LRU entries
    w0 = u_pm.n_writes;
    persist(211, pattern(211, 1), lat);
    repeat (400) @(posedge clk);
    check(n_burst >= 1, "drain threshold burst started");
    check(n_drain - drains0 == 3, $sformatf("burst drained %0d entries, expected 3", n_drain - drains0));
    check(dirty_count == 9, $sformatf("preset level 9 Dirty, got %0d", dirty_count));
    check(u_pm.n_writes - w0 == 3, "3 lines written to PM");
    if (pm_wr_addr.size() >= 3) begin
      automatic int s = pm_wr_addr.size();
      $display("burst drained %0d %0d %0d", (pm_wr_addr[s-3]-PM_BASE)>>6, (pm_wr_addr[s-2]-PM_BASE)>>6, (pm_wr_addr[s-1]-PM_BASE)>>6);
      check(pm_wr_addr[s-3] == line_addr(204) && pm_wr_addr[s-2] == line_addr(205) &&
            pm_wr_addr[s-1] == line_addr(206), "LRU order of burst drain");
    end else check(0, "burst drain writes seen");

    // ---- (3) crash with 9 Dirty entries, then recovery drain
    rst_n <= 1'b0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    check(recovering, "controller recovering after crash");
    wait_quiet();
    check(n_recover >= 1, "recovery pass ran");
    pm_matches_ref("after recovery");
    for (int i = 0; i < 12; i++) read_chk(200 + i, lat);

    // ---- (4) random traffic, both modes, one persist/read at a time
    for (int m = 0; m < 2; m++) begin
      rf_mode <= 1'(m); mode_switches++;
      for (int k = 0; k < 300; k++) begin
        automatic int n = 300 + int'($urandom_range(0, 23));
        automatic int r = int'($urandom_range(0, 9));
        if (r < 5) persist(n, pattern(n, k + 1000 * m), lat);
        else if (r < 9) read_chk(n, lat);
        else begin
          send(OP_IO, 64'h20, pattern(k, 3), tg, t0);
          wait_rsp(tg, p, t1);
          check(p.hdr.op == OP_IO && p.data == pattern(k, 3), "CXL.io in traffic");
          n_io++;
        end
      end
      rf_mode <= 1'b0;
      wait_quiet();
      pm_matches_ref($sformatf("after random mode %0d", m));
    end

    // ---- mechanism coverage
    $display("mechanisms: alloc=%0d coalesce=%0d rd_forward=%0d rd_to_pm=%0d ack=%0d drain=%0d",
             n_alloc, n_coal, n_fwd, n_rd_pm, n_ack, n_drain);
    $display("            stall=%0d victim=%0d rf_burst=%0d recover=%0d ack_bypass=%0d divert=%0d io=%0d modes=%0d",
             n_stall, n_victim, n_burst, n_recover, n_bypass, n_divert, n_io, mode_switches);
    check(n_alloc > 0, "write allocation happened");
    check(n_coal > 0, "write coalescing happened");
    check(n_fwd > 0, "read forwarding happened");
    check(n_rd_pm > 0, "diverted read passed on to PM happened");
    check(n_ack > 0, "PM acknowledgments consumed");
    check(n_drain > 0, "drains happened");
    check(n_stall > 0, "stall happened");
    check(n_burst > 0, "threshold burst happened");
    check(n_recover > 0, "crash recovery happened");
    check(n_bypass > 0, "ack priority in PI happened");
    check(n_divert > 0, "selector diversion happened");
    check(n_io > 0, "CXL.io pass-through happened");
    check(mode_switches > 1, "mode switch happened");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
