// switch_allocator: per-output round-robin arbitration of a router.
//
// Every input port with a head flit requests the one output port its route
// computation chose (port_req). For each output that is not stopped by the
// downstream receiver, the allocator grants one requesting input in
// round-robin order, starting after the input granted last (sw_grant). An
// input requests a single output, so grants never collide on the input side.
// The granted input pops its head flit in the same cycle. The switch
// allocator block and its request/grant signals follow the router drawing; the
// round-robin policy is this design's choice.
module switch_allocator
  import snn_pkg::*;
#(
  parameter int NP = 7
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [NP-1:0]            i_req,      // head flit present
  input  port_e                    i_route [NP],
  input  logic [NP-1:0]            i_out_stop, // downstream stop per output
  output logic [NP-1:0][NP-1:0]    o_grant,    // [output][input]
  output logic [NP-1:0]            o_pop       // per input
);
  localparam int PW = $clog2(NP);
  logic [PW-1:0] last [NP];
  logic [PW-1:0] idx;
  logic          found;

  always_comb begin
    o_grant = '0;
    for (int o = 0; o < NP; o++) begin
      found = 1'b0;
      for (int k = 1; k <= NP; k++) begin
        idx = PW'((int'(last[o]) + k) % NP);
        if (!i_out_stop[o] && !found && i_req[idx] && i_route[idx] == port_e'(o)) begin
          o_grant[o][idx] = 1'b1;
          found           = 1'b1;
        end
      end
    end
  end

  always_comb begin
    for (int i = 0; i < NP; i++) begin
      o_pop[i] = 1'b0;
      for (int o = 0; o < NP; o++) o_pop[i] = o_pop[i] | o_grant[o][i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NP; o++) last[o] <= PW'(NP-1);
    end else begin
      for (int o = 0; o < NP; o++)
        for (int i = 0; i < NP; i++)
          if (o_grant[o][i]) last[o] <= PW'(i);
    end
  end
endmodule
