// Self-checking test of phase_gen: a start gives phi1..phi5 in the five
// following cycles, one phase at a time; starts are refused while phases
// 1..4 run and taken again in the phi5 cycle, so back-to-back accesses are
// five cycles apart.
module phase_gen_tb;
  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  logic start = 1'b0, ready;
  logic [4:0] phase;

  phase_gen dut (.clk, .rst_n, .start, .ready, .phase);

  always #5 clk = ~clk;

  task automatic check(input logic [4:0] ph, input logic rdy, input string what);
    checks++;
    if (phase !== ph || ready !== rdy) begin
      failures++;
      $display("FAIL %s phase=%b ready=%0b exp %b %0b", what, phase, ready, ph, rdy);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1;
    check('0, 1'b1, "reset");
    rst_n = 1'b1;
    // single access
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    for (int p = 0; p < 5; p++) begin
      check(5'(1) << p, p == 4, "single");
      @(negedge clk);
    end
    check('0, 1'b1, "idle after single");
    // start held high: accepted every five cycles
    start = 1'b1;
    @(negedge clk);
    for (int rep = 0; rep < 3; rep++)
      for (int p = 0; p < 5; p++) begin
        check(5'(1) << p, p == 4, "back to back");
        @(negedge clk);
      end
    start = 1'b0;
    check(5'b00001, 1'b0, "last restart");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
