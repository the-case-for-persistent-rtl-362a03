// switch_allocator: switch allocation (SA) stage of the switch pipeline.
//
// Each input that holds a packet names one output: normally the output its
// route computation chose, but the output of the persist-buffer controller
// (PBC Input, the last output) whenever the selector (PBCS) flagged the
// packet - the selector's decision takes priority over routing, as the
// paper requires. A request counts only if the output has room in the
// virtual channel (class) the packet uses: class 1 is the acknowledgment
// queue of the PBC Input buffer, class 0 everything else.
// Each output grants one requester per cycle, round robin, starting after
// the input it granted last. The paper gives only the stage's name and the
// selector override; the round-robin policy is this design's choice.
//
// Interface: all inputs are sampled combinationally; grant/grant_port are
// valid in the same cycle; the round-robin pointers advance at the clock
// edge on a grant.
module switch_allocator #(
  parameter int unsigned NI = 3,
  parameter int unsigned NO = 3,
  localparam int unsigned PW = (NO > 1) ? $clog2(NO) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          valid    [NI],
  input  logic          pbcs_sel [NI],
  input  logic [PW-1:0] rc_port  [NI],
  input  logic          vc       [NI],
  input  logic          can_take [NO][2],
  output logic          grant      [NI],
  output logic [PW-1:0] grant_port [NI]
);
  localparam int unsigned IW = (NI > 1) ? $clog2(NI) : 1;

  logic [PW-1:0] want [NI];
  logic [IW-1:0] rr_q [NO];
  logic          out_busy [NO];
  logic [IW-1:0] winner   [NO];

  always_comb begin
    for (int i = 0; i < int'(NI); i++)
      want[i] = pbcs_sel[i] ? PW'(NO - 1) : rc_port[i];
  end

  always_comb begin
    for (int i = 0; i < int'(NI); i++) begin
      grant[i]      = 1'b0;
      grant_port[i] = want[i];
    end
    for (int o = 0; o < int'(NO); o++) begin
      out_busy[o] = 1'b0;
      winner[o]   = '0;
      for (int k = 0; k < int'(NI); k++) begin
        automatic int i = (int'(rr_q[o]) + k) % int'(NI);
        if (!out_busy[o] && valid[i] && int'(want[i]) == o && can_take[o][vc[i]]) begin
          out_busy[o] = 1'b1;
          winner[o]   = IW'(i);
          grant[i]    = 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < int'(NO); o++) rr_q[o] <= '0;
    end else begin
      for (int o = 0; o < int'(NO); o++)
        if (out_busy[o])
          rr_q[o] <= (int'(winner[o]) == int'(NI) - 1) ? '0 : winner[o] + 1'b1;
    end
  end
endmodule
