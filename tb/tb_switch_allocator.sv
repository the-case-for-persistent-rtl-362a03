// tb_switch_allocator: random requests against a model of the allocator:
// the selector flag overrides the routed output with the controller port,
// a request counts only if its output has room in its class, each output
// grants at most one input per cycle, round robin after its last winner.
`timescale 1ns/1ps
module tb_switch_allocator;
  localparam int NI = 3, NO = 3;
  logic clk = 1'b0;
  always #0.5 clk = ~clk;
  logic rst_n;
  logic valid [NI], pbcs_sel [NI], vc [NI], grant [NI];
  logic [1:0] rc_port [NI], grant_port [NI];
  logic can_take [NO][2];
  int checks = 0, failures = 0;

  switch_allocator #(.NI(NI), .NO(NO)) dut (.*);

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

  int last [NO];
  initial begin
    int n_override = 0;
    rst_n = 0;
    for (int i = 0; i < NI; i++) begin valid[i] = 0; pbcs_sel[i] = 0; vc[i] = 0; rc_port[i] = 0; end
    for (int o = 0; o < NO; o++) begin can_take[o][0] = 1; can_take[o][1] = 1; last[o] = NI - 1; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // directed: all inputs want output 0, selector sends input 1 to port 2
    for (int i = 0; i < NI; i++) begin valid[i] = 1; rc_port[i] = 0; end
    pbcs_sel[1] = 1;
    #0.1;
    check(grant[0] && !grant[2] && grant[1] && grant_port[1] == 2, "override + one grant per output");
    @(negedge clk);
    for (int i = 0; i < NI; i++) pbcs_sel[i] = 0;
    last[0] = 0; last[2] = 1;
    for (int k = 0; k < 4000; k++) begin
      int want [NI];
      int exp_win [NO];
      for (int i = 0; i < NI; i++) begin
        valid[i]    = $urandom_range(0, 3) != 0;
        pbcs_sel[i] = $urandom_range(0, 3) == 0;
        rc_port[i]  = 2'($urandom_range(0, NO - 2));
        vc[i]       = pbcs_sel[i] && $urandom_range(0, 1);
        want[i]     = pbcs_sel[i] ? NO - 1 : int'(rc_port[i]);
      end
      for (int o = 0; o < NO; o++) begin
        can_take[o][0] = $urandom_range(0, 4) != 0;
        can_take[o][1] = $urandom_range(0, 4) != 0;
      end
      for (int o = 0; o < NO; o++) begin
        exp_win[o] = -1;
        for (int s = 1; s <= NI; s++) begin
          automatic int i = (last[o] + s) % NI;
          if (exp_win[o] < 0 && valid[i] && want[i] == o && can_take[o][vc[i]]) exp_win[o] = i;
        end
      end
      #0.1;
      for (int i = 0; i < NI; i++) begin
        automatic bit eg = 0;
        for (int o = 0; o < NO; o++) if (exp_win[o] == i) eg = 1;
        check(grant[i] == eg, $sformatf("grant of input %0d step %0d", i, k));
        if (grant[i]) check(int'(grant_port[i]) == want[i], "grant port");
        if (grant[i] && pbcs_sel[i]) n_override++;
      end
      @(negedge clk);
      for (int o = 0; o < NO; o++) if (exp_win[o] >= 0) last[o] = exp_win[o];
    end
    check(n_override > 0, "selector overrides seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
