// snn_top: the spiking-network chip, a 3D mesh of processing elements.
//
// MX x MY x MZ nodes; each node is a seven-port router with a processing
// element (256 LIF neurons, 65,536 learnable synapses) on its local port.
// Routers are linked to their X, Y and Z neighbours (East/West, North/South,
// Up/Down; Up/Down are the inter-layer through-silicon-via links). All traffic
// is single-flit: spikes in address-event form (source PE, neuron ID) and
// memory-access flits that load weights, thresholds and tables. A host is
// attached to the West port of node (0,0,0) and is addressed as HOST_ADDR;
// it injects input spikes and configuration and receives output spikes and
// read replies. i_tick starts a time step in every PE; o_all_done is high
// when every PE has finished its step (the network may still be carrying its
// last spikes). Node (x,y,z) has the address {z, y, x}, 3 bits each.
// The mesh of routers and PEs follows the system drawing; the default
// 3 x 4 x 3 size is read from the node labels of the 3D network-on-chip
// drawing; the host attachment is this design's choice.
module snn_top
  import snn_pkg::*;
#(
  parameter int       MX        = 3,
  parameter int       MY        = 4,
  parameter int       MZ        = 3,
  parameter int       N         = 256,
  parameter int       N_PRE     = 256,
  parameter int       DEPTH     = 8,
  parameter int       WIN       = 2,
  parameter int       BUF_DEPTH = 4,
  parameter pe_addr_t HOST_ADDR = 9'h1FF
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  i_tick,
  output logic  o_all_done,
  output logic  o_parity_err,
  // host link at the West port of node (0,0,0)
  input  flit_t i_host_flit,
  input  logic  i_host_valid,
  output logic  o_host_stop,
  output flit_t o_host_flit,
  output logic  o_host_valid,
  input  logic  i_host_stop
);
  localparam int NN = MX * MY * MZ;

  flit_t              rin_flit  [NN][N_PORTS];
  flit_t              rout_flit [NN][N_PORTS];
  logic [N_PORTS-1:0] rin_valid [NN], rout_valid [NN], rin_stop [NN], rout_stop [NN];
  logic [NN-1:0]      done, perr;

  function automatic int idx(int x, int y, int z);
    return x + MX * (y + MY * z);
  endfunction

  for (genvar z = 0; z < MZ; z++) begin : g_z
    for (genvar y = 0; y < MY; y++) begin : g_y
      for (genvar x = 0; x < MX; x++) begin : g_x
        localparam int R = x + MX * (y + MY * z);
        localparam pe_addr_t A = pe_addr_t'({3'(z), 3'(y), 3'(x)});
        logic [N-1:0] spikes;

        router #(.DEPTH(BUF_DEPTH), .HOST_ADDR(HOST_ADDR)) u_router (
          .clk, .rst_n, .i_my_addr(A),
          .i_flit(rin_flit[R]), .i_valid(rin_valid[R]), .o_stop(rout_stop[R]),
          .o_flit(rout_flit[R]), .o_valid(rout_valid[R]), .i_stop(rin_stop[R]));

        pe #(.N(N), .N_PRE(N_PRE), .DEPTH(DEPTH), .WIN(WIN)) u_pe (
          .clk, .rst_n, .i_my_addr(A), .i_tick, .o_done(done[R]),
          .i_flit(rout_flit[R][P_L]), .i_flit_valid(rout_valid[R][P_L]), .o_stop(rin_stop[R][P_L]),
          .o_flit(rin_flit[R][P_L]), .o_flit_valid(rin_valid[R][P_L]), .i_stop(rout_stop[R][P_L]),
          .o_parity_err(perr[R]), .o_spike_out(spikes));

        // East / West
        if (x + 1 < MX) begin : g_e
          assign rin_flit[R][P_E]  = rout_flit[idx(x+1,y,z)][P_W];
          assign rin_valid[R][P_E] = rout_valid[idx(x+1,y,z)][P_W];
          assign rin_stop[R][P_E]  = rout_stop[idx(x+1,y,z)][P_W];
        end else begin : g_e_edge
          assign rin_flit[R][P_E]  = '0;
          assign rin_valid[R][P_E] = 1'b0;
          assign rin_stop[R][P_E]  = 1'b1;
        end
        if (x > 0) begin : g_w
          assign rin_flit[R][P_W]  = rout_flit[idx(x-1,y,z)][P_E];
          assign rin_valid[R][P_W] = rout_valid[idx(x-1,y,z)][P_E];
          assign rin_stop[R][P_W]  = rout_stop[idx(x-1,y,z)][P_E];
        end else if (R == 0) begin : g_host
          assign rin_flit[R][P_W]  = i_host_flit;
          assign rin_valid[R][P_W] = i_host_valid;
          assign rin_stop[R][P_W]  = i_host_stop;
        end else begin : g_w_edge
          assign rin_flit[R][P_W]  = '0;
          assign rin_valid[R][P_W] = 1'b0;
          assign rin_stop[R][P_W]  = 1'b1;
        end
        // North / South
        if (y + 1 < MY) begin : g_n
          assign rin_flit[R][P_N]  = rout_flit[idx(x,y+1,z)][P_S];
          assign rin_valid[R][P_N] = rout_valid[idx(x,y+1,z)][P_S];
          assign rin_stop[R][P_N]  = rout_stop[idx(x,y+1,z)][P_S];
        end else begin : g_n_edge
          assign rin_flit[R][P_N]  = '0;
          assign rin_valid[R][P_N] = 1'b0;
          assign rin_stop[R][P_N]  = 1'b1;
        end
        if (y > 0) begin : g_s
          assign rin_flit[R][P_S]  = rout_flit[idx(x,y-1,z)][P_N];
          assign rin_valid[R][P_S] = rout_valid[idx(x,y-1,z)][P_N];
          assign rin_stop[R][P_S]  = rout_stop[idx(x,y-1,z)][P_N];
        end else begin : g_s_edge
          assign rin_flit[R][P_S]  = '0;
          assign rin_valid[R][P_S] = 1'b0;
          assign rin_stop[R][P_S]  = 1'b1;
        end
        // Up / Down (through-silicon vias)
        if (z + 1 < MZ) begin : g_u
          assign rin_flit[R][P_U]  = rout_flit[idx(x,y,z+1)][P_D];
          assign rin_valid[R][P_U] = rout_valid[idx(x,y,z+1)][P_D];
          assign rin_stop[R][P_U]  = rout_stop[idx(x,y,z+1)][P_D];
        end else begin : g_u_edge
          assign rin_flit[R][P_U]  = '0;
          assign rin_valid[R][P_U] = 1'b0;
          assign rin_stop[R][P_U]  = 1'b1;
        end
        if (z > 0) begin : g_d
          assign rin_flit[R][P_D]  = rout_flit[idx(x,y,z-1)][P_U];
          assign rin_valid[R][P_D] = rout_valid[idx(x,y,z-1)][P_U];
          assign rin_stop[R][P_D]  = rout_stop[idx(x,y,z-1)][P_U];
        end else begin : g_d_edge
          assign rin_flit[R][P_D]  = '0;
          assign rin_valid[R][P_D] = 1'b0;
          assign rin_stop[R][P_D]  = 1'b1;
        end
      end
    end
  end

  assign o_host_stop  = rout_stop[0][P_W];
  assign o_host_flit  = rout_flit[0][P_W];
  assign o_host_valid = rout_valid[0][P_W];
  assign o_all_done   = &done;
  assign o_parity_err = |perr;
endmodule
