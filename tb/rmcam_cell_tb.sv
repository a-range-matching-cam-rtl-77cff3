// Self-checking test of rmcam_cell: all eight input combinations of a
// lower-bound and an upper-bound cell against the cell's truth table
// (lower: discharge when a=0, b=1, pin=1; upper: when a=1, b=0, pin=1;
// propagate when pin=1 and a equals b).
module rmcam_cell_tb;
  logic clk = 1'b0;
  int   checks = 0, failures = 0;
  logic a, b, pin;
  logic pout_l, pd_l, pout_u, pd_u;

  rmcam_cell #(.UPPER(1'b0)) dut_l (.a, .b, .pin, .pout(pout_l), .pull_down(pd_l));
  rmcam_cell #(.UPPER(1'b1)) dut_u (.a, .b, .pin, .pout(pout_u), .pull_down(pd_u));

  always #5 clk = ~clk;

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s a=%0b b=%0b pin=%0b got=%0b exp=%0b", what, a, b, pin, got, exp);
    end
  endtask

  initial begin
    for (int v = 0; v < 8; v++) begin
      {a, b, pin} = 3'(v);
      @(posedge clk);
      check(pd_l,   (a == 1'b0 && b == 1'b1 && pin == 1'b1), "lower pull_down");
      check(pd_u,   (a == 1'b1 && b == 1'b0 && pin == 1'b1), "upper pull_down");
      check(pout_l, (pin == 1'b1 && a == b), "lower pout");
      check(pout_u, (pin == 1'b1 && a == b), "upper pout");
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
