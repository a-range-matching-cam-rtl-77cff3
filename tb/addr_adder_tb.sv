// Self-checking test of addr_adder: all address/vector pairs of 6 bits,
// sum modulo 64.
module addr_adder_tb;
  logic clk = 1'b0;
  int   checks = 0, failures = 0;
  logic [5:0] addr, vec, mapped;

  addr_adder #(.ADDR_W(6)) dut (.addr, .vec, .mapped);

  always #5 clk = ~clk;

  initial begin
    for (int a = 0; a < 64; a++) begin
      for (int v = 0; v < 64; v++) begin
        addr = 6'(a); vec = 6'(v);
        #1;
        checks++;
        if (int'(mapped) != (a + v) % 64) begin
          failures++;
          if (failures < 10) $display("FAIL %0d+%0d got %0d", a, v, mapped);
        end
      end
      @(posedge clk);
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
