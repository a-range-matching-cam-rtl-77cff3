// Self-checking test of addr_decoder: every address gives exactly its own
// line after an eval edge; the lines hold while eval is low.
module addr_decoder_tb;
  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  logic        eval = 1'b0;
  logic [5:0]  addr = '0;
  logic [63:0] lines;

  addr_decoder #(.ADDR_W(6)) dut (.clk, .rst_n, .eval, .addr, .lines);

  always #5 clk = ~clk;

  task automatic check(input logic [63:0] exp, input string what);
    checks++;
    if (lines !== exp) begin
      failures++;
      $display("FAIL %s addr=%0d got=%h exp=%h", what, addr, lines, exp);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1;
    check('0, "reset");
    rst_n = 1'b1;
    for (int a = 0; a < 64; a++) begin
      @(negedge clk);
      addr = 6'(a); eval = 1'b1;
      @(posedge clk); #1;
      eval = 1'b0;
      check(64'(1) << a, "decode");
    end
    @(negedge clk);
    addr = 6'd7;
    repeat (2) @(posedge clk);
    #1;
    check(64'(1) << 63, "hold");
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
