// tb_pkt_fifo: checks the packet FIFO against a queue model under random
// push/pop traffic: head contents and order, empty/full/free_cnt, a push
// into a full buffer together with a pop, and the one-cycle push-to-head
// latency.
`timescale 1ns/1ps
module tb_pkt_fifo;
  import pcs_pkg::*;
  localparam int DEPTH = 4;
  logic clk = 1'b0;
  always #0.5 clk = ~clk;
  logic rst_n, push, pop, empty, full;
  pkt_t push_pkt, head_pkt;
  logic [2:0] free_cnt;
  int checks = 0, failures = 0;

  pkt_fifo #(.DEPTH(DEPTH)) dut (.*);

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

  pkt_t model [$];
  initial begin
    rst_n = 0; push = 0; pop = 0; push_pkt = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(empty && !full && free_cnt == 3'(DEPTH), "empty after reset");
    // push one and see it at the head one cycle later
    push = 1; push_pkt = '0; push_pkt.hdr.addr = 64'h1234; push_pkt.data = 512'hABCD;
    @(negedge clk);
    push = 0;
    check(!empty && head_pkt.hdr.addr == 64'h1234 && head_pkt.data == 512'hABCD, "head after push");
    model.push_back(head_pkt);
    for (int k = 0; k < 3000; k++) begin
      push = ($urandom_range(0, 99) < 55);
      pop  = ($urandom_range(0, 99) < 45);
      push_pkt = '0;
      push_pkt.hdr.addr = {$urandom, $urandom};
      push_pkt.hdr.rtag = 13'(k);
      push_pkt.data = {16{$urandom}};
      if (full && !pop) push = 0;   // respect flow control
      if (empty) pop = 0;
      @(posedge clk);
      #0.1;
      if (pop) void'(model.pop_front());
      if (push) model.push_back(push_pkt);
      @(negedge clk);
      check(empty == (model.size() == 0), "empty flag");
      check(full == (model.size() == DEPTH), "full flag");
      check(free_cnt == 3'(DEPTH - model.size()), "free count");
      if (model.size() > 0) check(head_pkt == model[0], $sformatf("head order at %0d", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
