// One entry (word) of the range-matching CAM.
//
// ADDR_W cells are chained from the most significant bit to the least
// significant one, each cell's pout driving the next cell's pin; the first
// cell's pin is tied high. All cells share the OUT line, which is precharged
// and discharged by any cell whose pull_down is active, so out is the NOR of
// all pull_down signals. A lower entry therefore reports key >= bound and an
// upper entry key <= bound. The chain and shared OUT line follow the drawn
// entry (five cells); the width is a parameter here.
//
// The last cell's pout (prop[0]) has nowhere to go, as in the drawn entry;
// the lint tool reports it as an unused bit.
//
// Purely combinational: the evaluation phase is applied by the array.
module rmcam_entry #(
  parameter int unsigned ADDR_W = 6,
  parameter bit          UPPER  = 1'b0
) (
  input  logic [ADDR_W-1:0] key,    // search key (A)
  input  logic [ADDR_W-1:0] bound,  // stored bound (B)
  output logic              out     // match line OUT
);

  logic [ADDR_W:0]   prop;   // prop[ADDR_W] is the first cell's pin
  logic [ADDR_W-1:0] pd;

  assign prop[ADDR_W] = 1'b1;

  for (genvar i = ADDR_W - 1; i >= 0; i--) begin : g_cell
    rmcam_cell #(.UPPER(UPPER)) u_cell (
      .a        (key[i]),
      .b        (bound[i]),
      .pin      (prop[i+1]),
      .pout     (prop[i]),
      .pull_down(pd[i])
    );
  end

  assign out = ~|pd;

endmodule
