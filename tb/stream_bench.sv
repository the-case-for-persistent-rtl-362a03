// stream_bench: one persistent CXL switch, a persistent-memory model and a
// host that runs a synthetic stream of persists and reads, for the
// workload test. The host keeps one operation outstanding (a persist is a
// write followed by a fence, so it waits for the acknowledgment) and
// checks every read against its own reference copy.
//
// The stream: N_OPS operations; WR_PCT percent are persists, the rest
// reads; HOT_PCT percent of them touch one of HOT_LINES lines, the rest
// one of 4096 cold lines. A 32-bit linear congruential generator seeded
// with SEED (x <- 1664525 x + 1013904223) makes every bench with the same
// seed see the same stream. With PM_BASE > PM_LIMIT nothing is diverted
// and the switch behaves as a volatile switch (the baseline).
`timescale 1ns/1ps
module stream_bench
  import pcs_pkg::*;
#(
  parameter int unsigned       N_PBE     = 16,
  parameter bit                RF        = 1'b0,
  parameter logic [ADDR_W-1:0] PM_BASE   = 64'h0000_0001_0000_0000,
  parameter logic [ADDR_W-1:0] PM_LIMIT  = 64'h0000_0001_FFFF_FFFF,
  parameter int unsigned       HOT_LINES = 40,
  parameter int unsigned       HOT_PCT   = 90,
  parameter int unsigned       WR_PCT    = 50,
  parameter int unsigned       N_OPS     = 2000,
  parameter int unsigned       SEED      = 1
) (
  input  logic   clk,
  output logic   done,
  output int     errors,
  output longint persist_cycles,
  output int     n_persist,
  output longint read_cycles,
  output int     n_read,
  output int     n_forward,
  output int     n_coalesce
);
  localparam logic [ADDR_W-1:0] LINE_BASE = 64'h0000_0001_0000_0000;

  logic rst_n, pb_format, rf_mode;
  logic in_valid [2];  pkt_t in_pkt [2];  logic in_ready [2];
  logic out_valid [2]; pkt_t out_pkt [2]; logic out_ready [2];
  pbc_events_t ev;
  logic ack_bypass, recovering;
  logic divert [2];
  logic [$clog2(N_PBE+1)-1:0] dirty;

  cxl_switch_pcs #(.N_PBE(N_PBE), .PM_BASE(PM_BASE), .PM_LIMIT(PM_LIMIT)) u_sw (
    .clk, .rst_n, .pb_format, .rf_mode,
    .in_valid, .in_pkt, .in_ready, .out_valid, .out_pkt, .out_ready,
    .pbc_ev(ev), .pi_ack_bypass(ack_bypass), .pbcs_divert(divert), .recovering,
    .pb_dirty_count(dirty));

  pm_model u_pm (
    .clk, .rst_n,
    .in_valid(out_valid[1]), .in_pkt(out_pkt[1]), .in_ready(out_ready[1]),
    .out_valid(in_valid[1]), .out_pkt(in_pkt[1]), .out_ready(in_ready[1]));

  assign out_ready[0] = 1'b1;

  always @(posedge clk) if (rst_n) begin
    n_forward  <= n_forward + int'(ev.rd_forward);
    n_coalesce <= n_coalesce + int'(ev.wr_coalesce);
  end

  logic [DATA_W-1:0] ref_mem [int];
  logic [31:0] lcg;

  function automatic logic [31:0] step(input logic [31:0] x);
    return x * 32'd1664525 + 32'd1013904223;
  endfunction

  // one request and its reply; returns the reply and the cycles it took
  task automatic xact(input opcode_e op, input int line, input logic [DATA_W-1:0] d,
                      input logic [RTAG_W-1:0] tag, output pkt_t rsp, output int cycles);
    int c = 0;
    in_pkt[0]          <= '0;
    in_pkt[0].hdr.op   <= op;
    in_pkt[0].hdr.src  <= 4'd0;
    in_pkt[0].hdr.dst  <= 4'd1;
    in_pkt[0].hdr.rtag <= tag;
    in_pkt[0].hdr.addr <= LINE_BASE + (ADDR_W'(line) << LINE_OFS);
    in_pkt[0].data     <= d;
    in_valid[0]        <= 1'b1;
    do begin @(posedge clk); c++; end while (!in_ready[0]);
    in_valid[0] <= 1'b0;
    c = 0;
    do begin @(posedge clk); c++; end while (!(out_valid[0] && out_pkt[0].hdr.rtag == tag) && c < 5000);
    rsp = out_pkt[0];
    cycles = c;
  endtask

  initial begin
    pkt_t rsp;
    int cyc;
    done = 1'b0; errors = 0; persist_cycles = 0; n_persist = 0; read_cycles = 0; n_read = 0;
    n_forward = 0; n_coalesce = 0;
    rst_n = 1'b0; pb_format = 1'b1; rf_mode = RF; in_valid[0] = 1'b0; in_pkt[0] = '0;
    lcg = SEED;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1; pb_format <= 1'b0;
    repeat (4) @(posedge clk);
    for (int k = 0; k < int'(N_OPS); k++) begin
      automatic int line, is_wr;
      lcg = step(lcg); is_wr = (int'(lcg[31:16]) % 100) < int'(WR_PCT);
      lcg = step(lcg);
      if ((int'(lcg[31:16]) % 100) < int'(HOT_PCT)) begin
        lcg = step(lcg); line = int'(lcg[31:16]) % int'(HOT_LINES);
      end else begin
        lcg = step(lcg); line = int'(HOT_LINES) + int'(lcg[31:16]) % 4096;
      end
      if (is_wr != 0) begin
        automatic logic [DATA_W-1:0] d = {16{32'(k * 2654435761 + line)}};
        xact(OP_MEM_WR, line, d, RTAG_W'(k), rsp, cyc);
        if (rsp.hdr.op != OP_CMP) errors++;
        ref_mem[line] = d;
        persist_cycles += cyc; n_persist++;
      end else begin
        xact(OP_MEM_RD, line, '0, RTAG_W'(k), rsp, cyc);
        if (rsp.hdr.op != OP_MEM_DATA ||
            rsp.data != (ref_mem.exists(line) ? ref_mem[line] : '0)) errors++;
        read_cycles += cyc; n_read++;
      end
    end
    done = 1'b1;
  end
endmodule
