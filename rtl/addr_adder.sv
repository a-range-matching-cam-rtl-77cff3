// Address adder (Adder 0 for rows, Adder 1 for columns).
//
// Adds the placement vector read from the two-columns ROM to the primary
// address, giving the mapped address. A zero vector leaves the address as it
// is. The sum wraps modulo 2**ADDR_W, so a vector can also move a cluster
// towards lower addresses (two's complement offset); the wrap is this
// design's choice. Purely combinational.
module addr_adder #(
  parameter int unsigned ADDR_W = 6
) (
  input  logic [ADDR_W-1:0] addr,
  input  logic [ADDR_W-1:0] vec,
  output logic [ADDR_W-1:0] mapped
);

  assign mapped = addr + vec;

endmodule
