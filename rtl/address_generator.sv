// address_generator: serial address source for burst memory access.
//
// Memory-access flits carry no address: the weight memory is read and written
// in a burst, one word after another. This block holds the running address.
// i_set loads a start address (sent as an "other register" write); every
// i_step (one access) advances it by one, wrapping at 2^AW. The serial, address-
// free access follows the paper; the explicit start-address register is this
// design's choice. o_addr is the address of the next access.
module address_generator #(
  parameter int AW = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          i_set,
  input  logic [AW-1:0] i_set_addr,
  input  logic          i_step,
  output logic [AW-1:0] o_addr
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      o_addr <= '0;
    else if (i_set)  o_addr <= i_set_addr;
    else if (i_step) o_addr <= o_addr + 1'b1;
  end
endmodule
