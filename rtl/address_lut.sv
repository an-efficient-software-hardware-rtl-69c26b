// address_lut: address translation tables of the network interface.
//
// Incoming spikes carry (source PE, neuron ID). Table 1, indexed by the 9-bit
// source PE address, says whether that PE feeds this core, whether it belongs
// to the same layer (a recurrent source) and which of the 2^CPE_W connected
// PEs it is. Table 2 gives each connected PE a base row in the weight memory;
// the pre-synaptic index is base + neuron ID (the "adding a base value"
// conversion for dense connections). Outgoing spikes use the destination
// table: up to N_DEST PE addresses that this core's spikes are copied to.
// All three tables are written one entry at a time from the network; lookups
// are combinational. The two input tables follow the paper; their widths
// (CPE_W, N_DEST) and the destination table's form are this design's choices.
// The optional CAM for sparse connections is not built.
module address_lut #(
  parameter int PE_AW  = 9,
  parameter int CPE_W  = 2,
  parameter int IW     = 8,
  parameter int NID_W  = 13,
  parameter int N_DEST = 4,
  parameter int DW     = $clog2(N_DEST)
) (
  input  logic               clk,
  input  logic               rst_n,
  // table 1 write: source PE -> {valid, recurrent, connected-PE index}
  input  logic               i_t1_we,
  input  logic [PE_AW-1:0]   i_t1_src,
  input  logic               i_t1_valid,
  input  logic               i_t1_rec,
  input  logic [CPE_W-1:0]   i_t1_conn,
  // table 2 write: connected-PE index -> base row
  input  logic               i_t2_we,
  input  logic [CPE_W-1:0]   i_t2_conn,
  input  logic [IW-1:0]      i_t2_base,
  // destination table write
  input  logic               i_d_we,
  input  logic [DW-1:0]      i_d_idx,
  input  logic               i_d_valid,
  input  logic [PE_AW-1:0]   i_d_addr,
  // incoming lookup
  input  logic [PE_AW-1:0]   i_src,
  input  logic [NID_W-1:0]   i_nid,
  output logic               o_hit,
  output logic               o_rec,
  output logic [IW-1:0]      o_index,
  // outgoing table
  output logic [N_DEST-1:0]  o_dest_valid,
  output logic [N_DEST-1:0][PE_AW-1:0] o_dest
);
  typedef struct packed {
    logic             valid;
    logic             rec;
    logic [CPE_W-1:0] conn;
  } t1_t;

  t1_t          t1 [2**PE_AW];
  logic [IW-1:0] t2 [2**CPE_W];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 2**PE_AW; i++) t1[i] <= '0;
      for (int i = 0; i < 2**CPE_W; i++) t2[i] <= '0;
      o_dest_valid <= '0;
      o_dest       <= '0;
    end else begin
      if (i_t1_we) t1[i_t1_src] <= '{valid: i_t1_valid, rec: i_t1_rec, conn: i_t1_conn};
      if (i_t2_we) t2[i_t2_conn] <= i_t2_base;
      if (i_d_we) begin
        o_dest_valid[i_d_idx] <= i_d_valid;
        o_dest[i_d_idx]       <= i_d_addr;
      end
    end
  end

  t1_t e;
  assign e       = t1[i_src];
  assign o_hit   = e.valid;
  assign o_rec   = e.rec;
  assign o_index = t2[e.conn] + i_nid[IW-1:0];
endmodule
