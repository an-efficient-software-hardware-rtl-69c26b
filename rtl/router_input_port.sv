// router_input_port: input buffer and route computation of one router port.
//
// Incoming flits are queued in a DEPTH-entry FIFO. The head flit's destination
// (X, Y, Z fields) is compared with this router's address and the output port
// is chosen by dimension-order routing: X first (East for larger X, West for
// smaller), then Y (North larger, South smaller), then Z (Up larger, Down
// smaller), and the Local port when all three match. Flits addressed to the
// host address HOST_ADDR are routed towards PE (0,0,0) and leave there through
// the West port, where the host is attached. o_stop (the "stop" of the stop/go
// link) is high while the FIFO is full; i_pop removes the head when the switch
// allocator grants it.
// The buffered input port and routing on the destination field follow the
// paper; the FIFO depth of 4 is read from the four slots drawn in the input
// port; the routing order, the port directions and the host rule are this
// design's choices. The fault detection and correction units drawn in the
// input port (statistical detector, TSV fault tolerance) are not built.
module router_input_port
  import snn_pkg::*;
#(
  parameter int       DEPTH     = 4,
  parameter pe_addr_t HOST_ADDR = 9'h1FF
) (
  input  logic     clk,
  input  logic     rst_n,
  input  pe_addr_t i_my_addr,
  input  flit_t    i_flit,
  input  logic     i_valid,
  output logic     o_stop,
  input  logic     i_pop,
  output flit_t    o_head,
  output logic     o_head_valid,
  output port_e    o_route
);
  localparam int PW = $clog2(DEPTH);

  flit_t         fifo [DEPTH];
  logic [PW-1:0] rd_ptr, wr_ptr;
  logic [PW:0]   count;
  logic          push;

  assign o_stop       = (count == (PW+1)'(DEPTH));
  assign push         = i_valid && !o_stop;
  assign o_head       = fifo[rd_ptr];
  assign o_head_valid = (count != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= wr_ptr + 1'b1;
      if (i_pop && o_head_valid) rd_ptr <= rd_ptr + 1'b1;
      count <= count + (PW+1)'(push) - (PW+1)'(i_pop && o_head_valid);
    end
  end

  // buffer storage, not reset
  always_ff @(posedge clk) if (push) fifo[wr_ptr] <= i_flit;

  // dimension-order route computation
  pe_addr_t dst;
  logic     to_host;
  always_comb begin
    to_host = (f_dest(o_head) == HOST_ADDR);
    dst     = to_host ? pe_addr_t'(0) : f_dest(o_head);
    if      (a_x(dst) > a_x(i_my_addr)) o_route = P_E;
    else if (a_x(dst) < a_x(i_my_addr)) o_route = P_W;
    else if (a_y(dst) > a_y(i_my_addr)) o_route = P_N;
    else if (a_y(dst) < a_y(i_my_addr)) o_route = P_S;
    else if (a_z(dst) > a_z(i_my_addr)) o_route = P_U;
    else if (a_z(dst) < a_z(i_my_addr)) o_route = P_D;
    else                                o_route = to_host ? P_W : P_L;
  end
endmodule
