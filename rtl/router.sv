// router: seven-port router of the 3D mesh (Local, North, East, West, South,
// Up, Down).
//
// Each input port buffers flits and computes the output port from the flit's
// destination field; the switch allocator grants at most one input per output
// per cycle; the crossbar moves the granted head flits to the outputs in the
// same cycle, so a flit spends one cycle per hop plus its time in the buffer.
// Links use stop/go flow control: a flit moves when valid is high and the
// receiver's stop is low; stop depends only on the receiver's buffer state.
// Port order in the arrays: L, N, E, W, S, U, D (snn_pkg::port_e).
// The seven ports, input buffers, switch allocator and crossbar follow the
// router drawing; timing and arbitration are this design's choices.
module router
  import snn_pkg::*;
#(
  parameter int       DEPTH     = 4,
  parameter pe_addr_t HOST_ADDR = 9'h1FF
) (
  input  logic     clk,
  input  logic     rst_n,
  input  pe_addr_t i_my_addr,
  input  flit_t    i_flit  [N_PORTS],
  input  logic [N_PORTS-1:0] i_valid,
  output logic [N_PORTS-1:0] o_stop,
  output flit_t    o_flit  [N_PORTS],
  output logic [N_PORTS-1:0] o_valid,
  input  logic [N_PORTS-1:0] i_stop
);
  flit_t  head  [N_PORTS];
  port_e  route [N_PORTS];
  logic [N_PORTS-1:0] head_v, pop;
  logic [N_PORTS-1:0][N_PORTS-1:0] grant;

  for (genvar p = 0; p < N_PORTS; p++) begin : g_in
    router_input_port #(.DEPTH(DEPTH), .HOST_ADDR(HOST_ADDR)) u_ip (
      .clk, .rst_n, .i_my_addr,
      .i_flit(i_flit[p]), .i_valid(i_valid[p]), .o_stop(o_stop[p]),
      .i_pop(pop[p]), .o_head(head[p]), .o_head_valid(head_v[p]), .o_route(route[p]));
  end

  switch_allocator #(.NP(N_PORTS)) u_sa (
    .clk, .rst_n, .i_req(head_v), .i_route(route), .i_out_stop(i_stop),
    .o_grant(grant), .o_pop(pop));

  router_crossbar #(.NP(N_PORTS)) u_xb (
    .i_flit(head), .i_grant(grant), .o_flit(o_flit), .o_valid(o_valid));

  // a flit is never offered to a stopped receiver
  a_stop_go: assert property (@(posedge clk) disable iff (!rst_n)
    (o_valid & i_stop) == '0);
endmodule
