// spike_decoder: turns a spike array into the indices of its set bits, one per cycle.
//
// i_load copies i_spike_array into the working register (the input multiplexer
// of the decoder drawing). Each cycle in which i_ready is high, the lowest set
// bit is isolated as a one-hot word (x & -x), encoded to its index (o_index)
// and erased from the register by XOR-ing the one-hot word back in. The OR of
// the register is the read enable of the downstream memory (o_valid); o_valid_q
// is that enable delayed by one flip-flop, which lines up with the data of a
// synchronous memory read at o_index. Indices come out in ascending order: an
// array "1010" (bit 3 and bit 1 set) gives 1 then 3 in two cycles.
// Lowest-index-first, the XOR erase and the delayed valid follow the paper;
// the i_ready stall input is this design's addition so that a busy consumer
// (for example the network interface) can hold the decoder.
module spike_decoder #(
  parameter int N  = 256,
  parameter int IW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          i_load,        // load a new spike array
  input  logic [N-1:0]  i_spike_array,
  input  logic          i_ready,       // consumer takes o_index this cycle
  output logic [IW-1:0] o_index,       // index of the lowest remaining spike
  output logic          o_valid,       // o_index is valid (read enable)
  output logic          o_valid_q,     // o_valid delayed by one cycle
  output logic          o_empty        // nothing left to send
);
  logic [N-1:0] arr_q;
  logic [N-1:0] onehot;

  assign onehot  = arr_q & (~arr_q + N'(1));
  assign o_valid = |arr_q;
  assign o_empty = ~o_valid;

  always_comb begin
    o_index = '0;
    for (int i = 0; i < N; i++)
      if (onehot[i]) o_index = IW'(i);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arr_q     <= '0;
      o_valid_q <= 1'b0;
    end else begin
      o_valid_q <= o_valid & i_ready & ~i_load;
      if (i_load)
        arr_q <= i_spike_array;
      else if (i_ready)
        arr_q <= arr_q ^ onehot;
    end
  end
endmodule
