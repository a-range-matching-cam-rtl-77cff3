// Inherent (voterless) TMR majority.
//
// The three column bits each drive an inverter; the three inverter outputs
// are tied to one common node, where the two inverters that agree overpower
// the third, so the node carries the inverse of the majority. A final
// inverter restores the true value. This is a ratioed analog effect; its
// logic function, modelled here, is the majority of the three inputs.
// Purely combinational.
module inherent_voter (
  input  logic [2:0] bits,        // data from columns i, j, k
  output logic       recovered    // majority of the three
);

  logic common_node;   // the shared node of the three inverters

  assign common_node = ~((bits[0] & bits[1]) | (bits[1] & bits[2]) | (bits[0] & bits[2]));
  assign recovered   = ~common_node;

endmodule
