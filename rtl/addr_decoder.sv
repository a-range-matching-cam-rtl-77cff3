// Address decoder (DEC 0 for RAM word lines, DEC 1 for the three-columns
// ROM word lines).
//
// Each output is one decoder cell: a dynamic AND of the true or inverted
// address bits in series with an evaluation transistor on phi3, precharged
// high while phi3 is low, followed by an output inverter. Output k is high
// when the address equals k. The drawn cell has two select inputs; here each
// cell takes all ADDR_W address bits, which is this design's generalisation.
// The one-hot result is captured on the edge that ends the eval phase (phi3)
// and held for the following phases.
module addr_decoder #(
  parameter int unsigned ADDR_W = 6,
  localparam int unsigned LINES = 1 << ADDR_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              eval,   // phi3
  input  logic [ADDR_W-1:0] addr,
  output logic [LINES-1:0]  lines
);

  logic [LINES-1:0] dec;

  always_comb begin
    for (int k = 0; k < LINES; k++) dec[k] = (addr == ADDR_W'(k));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    lines <= '0;
    else if (eval) lines <= dec;
  end

endmodule
