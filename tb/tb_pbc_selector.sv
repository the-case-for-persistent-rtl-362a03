// tb_pbc_selector: drives random headers against random tag/state tables
// and compares the selector's divert decision with an independent model of
// the rules: PM writes always, reads whose line is Dirty or Drain, acks
// whose line is Drain; nothing else (CXL.io, non-PM addresses, Empty or
// absent lines). Directed cases cover each rule first.
`timescale 1ns/1ps
module tb_pbc_selector;
  import pcs_pkg::*;
  localparam int N = 16;
  localparam logic [63:0] BASE = 64'h0000_0001_0000_0000;
  localparam logic [63:0] LIM  = 64'h0000_0001_FFFF_FFFF;
  logic hdr_valid, to_pbc;
  hdr_t hdr;
  logic [TAG_W-1:0] pb_tag [N];
  pbe_state_e pb_state [N];
  pbe_state_e hit_state;
  int checks = 0, failures = 0;

  pbc_selector #(.N_PBE(N), .PM_BASE(BASE), .PM_LIMIT(LIM)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic bit expect_div();
    bit in_pm = hdr.addr >= BASE && hdr.addr <= LIM;
    bit dirty = 0, drain = 0;
    for (int i = 0; i < N; i++)
      if (pb_tag[i] == hdr.addr[63:6]) begin
        if (pb_state[i] == PBE_DIRTY) dirty = 1;
        if (pb_state[i] == PBE_DRAIN) drain = 1;
      end
    if (!hdr_valid) return 0;
    if (hdr.op == OP_MEM_WR) return in_pm;
    if (hdr.op == OP_MEM_RD) return in_pm && (dirty || drain);
    if (hdr.op == OP_CMP)    return drain;
    return 0;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input opcode_e op, input logic [63:0] a, input bit exp, input string what);
    hdr = '0; hdr.op = op; hdr.addr = a; hdr_valid = 1;
    #1;
    check(to_pbc == exp, what);
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin pb_tag[i] = TAG_W'(i); pb_state[i] = PBE_EMPTY; end
    pb_tag[3] = (BASE + 64'h40) >> 6; pb_state[3] = PBE_DIRTY;
    pb_tag[7] = (BASE + 64'h80) >> 6; pb_state[7] = PBE_DRAIN;
    pb_tag[9] = (BASE + 64'hC0) >> 6; pb_state[9] = PBE_EMPTY;
    one(OP_MEM_WR, BASE + 64'h1000, 1, "PM write diverted");
    one(OP_MEM_WR, 64'h1000,        0, "DRAM write not diverted");
    one(OP_MEM_RD, BASE + 64'h40,   1, "read of Dirty line diverted");
    one(OP_MEM_RD, BASE + 64'h80,   1, "read of Drain line diverted");
    one(OP_MEM_RD, BASE + 64'hC0,   0, "read of Empty line not diverted");
    one(OP_MEM_RD, BASE + 64'h2000, 0, "read of absent line not diverted");
    one(OP_CMP,    BASE + 64'h80,   1, "ack of Drain line diverted");
    one(OP_CMP,    BASE + 64'h40,   0, "ack of Dirty line not diverted");
    one(OP_IO,     BASE + 64'h80,   0, "CXL.io not diverted");
    one(OP_CACHE,  BASE + 64'h40,   0, "CXL.cache not diverted");
    check(hit_state == PBE_DIRTY, "hit state reported");
    hdr_valid = 0; #1; check(to_pbc == 0, "idle input");
    for (int k = 0; k < 5000; k++) begin
      // distinct tags, as the buffer never holds two live copies of a line
      automatic int r = int'($urandom_range(0, 31));
      for (int i = 0; i < N; i++) begin
        pb_tag[i]   = (BASE >> 6) + TAG_W'((2 * i + r) % 32);
        pb_state[i] = pbe_state_e'($urandom_range(0, 2));
      end
      hdr = '0;
      hdr.op = opcode_e'($urandom_range(1, 6));
      hdr.addr = ($urandom_range(0, 7) == 0) ? 64'h40 * $urandom_range(0, 31)
                                             : BASE + 64'h40 * $urandom_range(0, 31);
      hdr_valid = $urandom_range(0, 9) != 0;
      #1;
      check(to_pbc == expect_div(), $sformatf("random case %0d", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
