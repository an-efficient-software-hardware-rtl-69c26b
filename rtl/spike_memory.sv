// spike_memory: a small ring of spike arrays, one slot per time step.
//
// Each slot is an N-bit spike array (bit i = neuron i spiked). Incoming
// address events are folded in one at a time with i_set (Spike_in |= 1 << idx,
// the AER-to-array conversion); a whole array can be written with i_wr (the
// core's output spikes), and i_clr empties a slot before it is reused. Two
// combinational read ports serve the core and the learning block, which looks
// back over several past steps. Keeping arrays rather than lists of addresses
// bounds the storage at N bits per step whatever the spike count, which is the
// point the paper makes for spike arrays. DEPTH (the number of steps kept) is
// this design's choice: the learning window needs 2*WIN+1 past steps plus the
// one being filled. When clear, set and write hit one slot in the same cycle,
// write wins over set, and set wins over clear.
module spike_memory #(
  parameter int N     = 256,
  parameter int DEPTH = 8,
  parameter int IW    = $clog2(N),
  parameter int SW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          i_clr,
  input  logic [SW-1:0] i_clr_slot,
  input  logic          i_set,
  input  logic [SW-1:0] i_set_slot,
  input  logic [IW-1:0] i_set_idx,
  input  logic          i_wr,
  input  logic [SW-1:0] i_wr_slot,
  input  logic [N-1:0]  i_wr_data,
  input  logic [SW-1:0] i_rda_slot,
  output logic [N-1:0]  o_rda_data,
  input  logic [SW-1:0] i_rdb_slot,
  output logic [N-1:0]  o_rdb_data
);
  logic [N-1:0] mem [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < DEPTH; s++) mem[s] <= '0;
    end else begin
      if (i_clr) mem[i_clr_slot] <= '0;
      if (i_set) mem[i_set_slot][i_set_idx] <= 1'b1;
      if (i_wr)  mem[i_wr_slot] <= i_wr_data;
    end
  end

  assign o_rda_data = mem[i_rda_slot];
  assign o_rdb_data = mem[i_rdb_slot];
endmodule
