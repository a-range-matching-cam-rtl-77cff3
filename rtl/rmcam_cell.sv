// One bit cell of the range-matching CAM (lower or upper bound).
//
// The search bit a is compared with the stored bit b. The cell's gate 1 is a
// three-input AND whose output drives the discharge transistor N2 of the
// shared, precharged Result (match) line: for the lower cell its inputs are
// ~a, b and pin, for the upper cell a, ~b and pin. pin says that all more
// significant bits of key and bound are equal, so the cell discharges Result
// exactly when this is the most significant differing bit and the key lies on
// the wrong side of the bound (lower: key < bound; upper: key > bound).
// Gate 3 (XNOR of a and b) and gate 2 (AND with pin) form pout, the
// propagate signal to the next less significant cell.
//
// These gate functions are the ones drawn for the cell. The precharge
// (PMOS N1) and evaluation foot (N3) of the dynamic Result line are not
// modelled here: pull_down is the gate 1 output, and the entry that owns the
// Result line wires all its cells' pull_down signals together. The SRAM
// storage of b is held by the array that instantiates the entry.
//
// Purely combinational.
module rmcam_cell #(
  parameter bit UPPER = 1'b0   // 0: lower-bound cell, 1: upper-bound cell
) (
  input  logic a,          // search bit (A)
  input  logic b,          // stored bit (B)
  input  logic pin,        // propagate in
  output logic pout,       // propagate out
  output logic pull_down   // gate 1 output: discharge Result during evaluation
);

  always_comb begin
    if (UPPER) pull_down = a & ~b & pin;
    else       pull_down = ~a & b & pin;
    pout = pin & ~(a ^ b);
  end

endmodule
