// weight_sram: synaptic weight storage of one core (the "crossbar").
//
// ROWS pre-synaptic inputs by N post-synaptic neurons, W bits per weight
// (256 x 256 x 8 bits = 65,536 synapses). All neurons read the same row at the
// same time, so the per-neuron memories share one address and are merged into
// one wide word per pre-synaptic input: row r holds the weights w[r][0..N-1].
// Port A reads a whole row for the forward pass. Port B reads one weight
// ({row, neuron} address) for learning and the network interface; the write
// port updates one weight. Both reads are synchronous: data appear the cycle
// after the address. A write and a read of the same weight in one cycle return
// the old value. The shared address and the word merging follow the paper; the
// single-weight side port is this design's way of serving the learning block
// and the serial memory access from the network. The contents are not reset,
// as in an SRAM or register-file macro; they are loaded over the network.
module weight_sram #(
  parameter int ROWS = 256,
  parameter int N    = 256,
  parameter int W    = 8,
  parameter int RW   = $clog2(ROWS),
  parameter int CW   = $clog2(N)
) (
  input  logic                 clk,
  // port A: row read
  input  logic                 i_rd_en,
  input  logic [RW-1:0]        i_rd_row,
  output logic [N-1:0][W-1:0]  o_rd_data,
  // port B: single-weight read
  input  logic                 i_b_en,
  input  logic [RW+CW-1:0]     i_b_addr,    // {row, neuron}
  output logic [W-1:0]         o_b_data,
  // single-weight write
  input  logic                 i_w_en,
  input  logic [RW+CW-1:0]     i_w_addr,    // {row, neuron}
  input  logic [W-1:0]         i_w_data
);
  logic [N-1:0][W-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (i_rd_en) o_rd_data <= mem[i_rd_row];
    if (i_b_en)  o_b_data  <= mem[i_b_addr[RW+CW-1:CW]][i_b_addr[CW-1:0]];
    if (i_w_en)  mem[i_w_addr[RW+CW-1:CW]][i_w_addr[CW-1:0]] <= i_w_data;
  end
endmodule
