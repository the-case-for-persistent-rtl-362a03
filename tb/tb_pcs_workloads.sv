// tb_pcs_workloads: synthetic persist/read streams on several switches side
// by side, to check the trends the persistent switch is meant to show.
//
// Streams (same seed, 50% persists): "hot" sends 90% of operations to 40
// lines (high temporal locality), "cold" sends 5% there and the rest to
// 4096 lines. Switches: a volatile baseline (empty PM window, nothing is
// buffered), PB mode with 16 entries, and read-forwarding mode with 8,
// 16, 32 and 64 entries (the entry counts of the sensitivity study).
// Checked: every read returns the last persisted value; buffering cuts the
// average persist latency below the baseline's; with locality, read
// forwarding answers reads and merges writes in the switch and lowers the
// average read latency below PB mode; its forwarding rate is higher on the
// hot stream than on the cold one and does not fall as entries are added.
// These are synthetic streams, not the benchmark programs themselves.
`timescale 1ns/1ps
module tb_pcs_workloads;
  localparam int NB = 9;
  localparam logic [63:0] NONE_BASE = 64'hFFFF_FFFF_FFFF_0000;
  localparam logic [63:0] NONE_LIM  = 64'h0;
  logic clk = 1'b0;
  always #0.5 clk = ~clk;

  logic   done [NB];
  int     errors [NB], n_persist [NB], n_read [NB], n_fwd [NB], n_coal [NB];
  longint p_cyc [NB], r_cyc [NB];
  int checks = 0, failures = 0;
  string names [NB] = '{"base hot", "PB16 hot", "RF8 hot", "RF16 hot", "RF32 hot",
                        "RF64 hot", "base cold", "PB16 cold", "RF16 cold"};

`define BENCH(I, NPBE, RFM, BASE, LIM, HOTP) \
  stream_bench #(.N_PBE(NPBE), .RF(RFM), .PM_BASE(BASE), .PM_LIMIT(LIM), .HOT_PCT(HOTP)) u_b``I ( \
    .clk, .done(done[I]), .errors(errors[I]), .persist_cycles(p_cyc[I]), .n_persist(n_persist[I]), \
    .read_cycles(r_cyc[I]), .n_read(n_read[I]), .n_forward(n_fwd[I]), .n_coalesce(n_coal[I]));

  `BENCH(0, 16, 1'b0, NONE_BASE, NONE_LIM, 90)
  `BENCH(1, 16, 1'b0, 64'h1_0000_0000, 64'h1_FFFF_FFFF, 90)
  `BENCH(2,  8, 1'b1, 64'h1_0000_0000, 64'h1_FFFF_FFFF, 90)
  `BENCH(3, 16, 1'b1, 64'h1_0000_0000, 64'h1_FFFF_FFFF, 90)
  `BENCH(4, 32, 1'b1, 64'h1_0000_0000, 64'h1_FFFF_FFFF, 90)
  `BENCH(5, 64, 1'b1, 64'h1_0000_0000, 64'h1_FFFF_FFFF, 90)
  `BENCH(6, 16, 1'b0, NONE_BASE, NONE_LIM, 5)
  `BENCH(7, 16, 1'b0, 64'h1_0000_0000, 64'h1_FFFF_FFFF, 5)
  `BENCH(8, 16, 1'b1, 64'h1_0000_0000, 64'h1_FFFF_FFFF, 5)

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic real avg(input longint s, input int n);
    return (n == 0) ? 0.0 : real'(s) / real'(n);
  endfunction
  function automatic real rate(input int a, input int n);
    return (n == 0) ? 0.0 : 100.0 * real'(a) / real'(n);
  endfunction

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all;
    do begin
      @(posedge clk);
      all = 1;
      for (int i = 0; i < NB; i++) all &= done[i];
    end while (!all);
    $display("switch       persist(avg cyc)  read(avg cyc)  read fwd %%  coalesced %%");
    for (int i = 0; i < NB; i++) begin
      $display("%-10s %12.1f %14.1f %11.1f %12.1f", names[i], avg(p_cyc[i], n_persist[i]),
               avg(r_cyc[i], n_read[i]), rate(n_fwd[i], n_read[i]), rate(n_coal[i], n_persist[i]));
      check(errors[i] == 0, $sformatf("%s: reads return the last persisted data", names[i]));
      check(n_persist[i] > 0 && n_read[i] > 0, $sformatf("%s: stream ran", names[i]));
    end
    check(avg(p_cyc[1], n_persist[1]) < 0.5 * avg(p_cyc[0], n_persist[0]), "PB halves persist latency (hot)");
    check(avg(p_cyc[7], n_persist[7]) < 0.5 * avg(p_cyc[6], n_persist[6]), "PB halves persist latency (cold)");
    check(n_fwd[0] == 0 && n_coal[0] == 0, "baseline buffers nothing");
    check(n_fwd[3] > 0 && n_coal[3] > 0, "RF forwards reads and coalesces writes (hot)");
    check(avg(r_cyc[3], n_read[3]) < avg(r_cyc[1], n_read[1]), "RF lowers read latency below PB (hot)");
    check(rate(n_fwd[3], n_read[3]) > rate(n_fwd[8], n_read[8]), "forwarding higher with locality");
    check(n_fwd[2] <= n_fwd[3] && n_fwd[3] <= n_fwd[4] && n_fwd[4] <= n_fwd[5],
          "forwarding does not fall as entries are added");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
