// Self-checking test of inherent_voter: the output is the majority of the
// three column bits for all eight combinations.
module inherent_voter_tb;
  logic clk = 1'b0;
  int   checks = 0, failures = 0;
  logic [2:0] bits;
  logic recovered;
  int ones;

  inherent_voter dut (.bits, .recovered);

  always #5 clk = ~clk;

  initial begin
    for (int v = 0; v < 8; v++) begin
      bits = 3'(v);
      @(posedge clk);
      ones = int'(bits[0]) + int'(bits[1]) + int'(bits[2]);
      checks++;
      if (recovered !== (ones >= 2)) begin
        failures++;
        $display("FAIL bits=%b got=%0b", bits, recovered);
      end
    end
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
