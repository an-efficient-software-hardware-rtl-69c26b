// router_crossbar: the multiplexers that connect granted inputs to outputs.
//
// For each output port the flit of the granted input (one-hot grant row from
// the switch allocator) is selected; the output is valid when any input is
// granted. Combinational. A crossbar of multiplexers follows the paper; the
// encoders drawn on the vertical outputs belong to the fault-tolerance scheme
// and are not built.
module router_crossbar
  import snn_pkg::*;
#(
  parameter int NP = 7
) (
  input  flit_t                  i_flit [NP],
  input  logic [NP-1:0][NP-1:0]  i_grant,   // [output][input]
  output flit_t                  o_flit [NP],
  output logic [NP-1:0]          o_valid
);
  always_comb begin
    for (int o = 0; o < NP; o++) begin
      o_flit[o]  = '0;
      o_valid[o] = |i_grant[o];
      for (int i = 0; i < NP; i++)
        if (i_grant[o][i]) o_flit[o] = i_flit[i];
    end
  end
endmodule
