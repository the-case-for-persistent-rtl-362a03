// tb_pi_buffer: checks that the PBC Input buffer hands write
// acknowledgments to the controller before any queued request, keeps each
// class in order, reports per-class free space, and flags an ack that
// overtakes waiting requests.
`timescale 1ns/1ps
module tb_pi_buffer;
  import pcs_pkg::*;
  logic clk = 1'b0;
  always #0.5 clk = ~clk;
  logic rst_n, push, pop, head_valid, head_is_ack_bypass;
  pkt_t push_pkt, head_pkt;
  logic [2:0] ack_free, req_free;
  int checks = 0, failures = 0;

  pi_buffer #(.ACK_DEPTH(4), .REQ_DEPTH(4)) dut (.*);

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

  task automatic put(input opcode_e op, input int id);
    push_pkt = '0; push_pkt.hdr.op = op; push_pkt.hdr.rtag = 13'(id);
    push = 1;
    @(negedge clk);
    push = 0;
  endtask

  pkt_t ackq [$], reqq [$];
  initial begin
    rst_n = 0; push = 0; pop = 0; push_pkt = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!head_valid && ack_free == 4 && req_free == 4, "empty after reset");
    put(OP_MEM_WR, 1); put(OP_MEM_RD, 2); put(OP_MEM_WR, 3);
    check(head_valid && head_pkt.hdr.rtag == 1 && !head_is_ack_bypass, "request at head");
    check(req_free == 1 && ack_free == 4, "request class space");
    put(OP_CMP, 10);
    check(head_pkt.hdr.op == OP_CMP && head_pkt.hdr.rtag == 10, "ack jumps ahead of requests");
    check(head_is_ack_bypass, "bypass flagged");
    check(ack_free == 3, "ack class space");
    put(OP_CMP, 11);
    // pop order: 10, 11, 1, 2, 3
    begin
      automatic int exp [5] = '{10, 11, 1, 2, 3};
      for (int k = 0; k < 5; k++) begin
        check(head_valid && int'(head_pkt.hdr.rtag) == exp[k], $sformatf("pop order %0d", k));
        pop = 1; @(negedge clk); pop = 0;
      end
    end
    check(!head_valid, "empty again");
    // random traffic against a two-queue model
    for (int k = 0; k < 2000; k++) begin
      automatic bit is_ack = $urandom_range(0, 2) == 0;
      push = $urandom_range(0, 1);
      pop  = $urandom_range(0, 1) && head_valid;
      push_pkt = '0;
      push_pkt.hdr.op = is_ack ? OP_CMP : ($urandom_range(0, 1) ? OP_MEM_WR : OP_MEM_RD);
      push_pkt.hdr.rtag = 13'(k);
      if (is_ack && ack_free == 0) push = 0;
      if (!is_ack && req_free == 0) push = 0;
      @(posedge clk); #0.1;
      if (pop) begin
        if (ackq.size() > 0) void'(ackq.pop_front()); else void'(reqq.pop_front());
      end
      if (push) begin
        if (is_ack) ackq.push_back(push_pkt); else reqq.push_back(push_pkt);
      end
      @(negedge clk);
      check(head_valid == (ackq.size() + reqq.size() > 0), "valid");
      if (ackq.size() > 0) check(head_pkt == ackq[0], "ack head");
      else if (reqq.size() > 0) check(head_pkt == reqq[0], "req head");
      check(int'(ack_free) == 4 - ackq.size() && int'(req_free) == 4 - reqq.size(), "free counts");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
