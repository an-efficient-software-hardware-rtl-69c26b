// recurrent_crossbar: fixed negative-weight lateral connections of a core.
//
// A spike index from the recurrent decoder is applied to every neuron of the
// core at once with the same fixed weight W_REC (a negative constant), so no
// weight memory is needed; this replaces the separate inhibitory layer of the
// classic STDP network. A spike from this core (i_local = 1) inhibits every
// neuron except the one that fired; a recurrent spike from another core of the
// same layer (i_local = 0) inhibits all of them. Combinational. The fixed
// negative weight without RAM follows the paper; the value of W_REC and the
// self-exclusion are this design's choices.
// o_weight is the constant W_REC by design (its bits are tied), which is the
// point of a fixed-weight crossbar.
module recurrent_crossbar #(
  parameter int N     = 256,
  parameter int W     = 8,
  parameter int W_REC = -16,
  parameter int IW    = $clog2(N)
) (
  input  logic                        i_valid,
  input  logic                        i_local,
  input  logic [IW-1:0]               i_index,
  output logic [N-1:0]                o_valid,   // per neuron: weight applies
  output logic signed [W-1:0]         o_weight   // the fixed weight
);
  always_comb begin
    for (int j = 0; j < N; j++)
      o_valid[j] = i_valid && !(i_local && (i_index == IW'(j)));
  end
  assign o_weight = W'(W_REC);
endmodule
