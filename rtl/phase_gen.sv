// Phase sequencer of one memory access: phi1 .. phi5.
//
// The mapping structure clocks its stages with five phases: the range CAMs
// (phi1), the two-columns ROM (phi2), the two decoders (phi3), the
// three-columns ROM (phi4) and the RAM (phi5). How they are generated is not
// given; here they are five one-cycle enables of a single clock, produced by
// a one-hot shift register. A start in an idle cycle or in the phi5 cycle
// begins a new sequence with phi1 in the next cycle, so accesses can follow
// one another every five cycles.
//
// Timing: start in cycle t gives phase[0] in cycle t+1 .. phase[4] in t+5.
module phase_gen
  import rmcam_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  output logic                  ready,   // a start is accepted this cycle
  output logic [NUM_PHASES-1:0] phase    // one-hot, phase[0] = phi1
);

  assign ready = (phase == '0) || phase[PH_RAM];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              phase <= '0;
    else if (start && ready) phase <= NUM_PHASES'(1);
    else                     phase <= phase << 1;
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(phase));

endmodule
