// Self-checking test of rmcam_entry: every key/bound pair of a 6-bit lower
// entry (expects key >= bound) and upper entry (expects key <= bound), and
// of a 5-bit pair of entries, the width of the drawn five-cell entry.
module rmcam_entry_tb;
  logic clk = 1'b0;
  int   checks = 0, failures = 0;
  logic [5:0] key6, bound6;
  logic [4:0] key5, bound5;
  logic lo6, up6, lo5, up5;

  rmcam_entry #(.ADDR_W(6), .UPPER(1'b0)) dut_lo6 (.key(key6), .bound(bound6), .out(lo6));
  rmcam_entry #(.ADDR_W(6), .UPPER(1'b1)) dut_up6 (.key(key6), .bound(bound6), .out(up6));
  rmcam_entry #(.ADDR_W(5), .UPPER(1'b0)) dut_lo5 (.key(key5), .bound(bound5), .out(lo5));
  rmcam_entry #(.ADDR_W(5), .UPPER(1'b1)) dut_up5 (.key(key5), .bound(bound5), .out(up5));

  always #5 clk = ~clk;

  task automatic check(input logic got, input logic exp, input string what, input int k, input int bd);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s key=%0d bound=%0d got=%0b", what, k, bd, got);
    end
  endtask

  initial begin
    for (int k = 0; k < 64; k++) begin
      for (int bd = 0; bd < 64; bd++) begin
        key6 = 6'(k); bound6 = 6'(bd);
        key5 = 5'(k); bound5 = 5'(bd);
        #1;
        check(lo6, k >= bd, "lower6", k, bd);
        check(up6, k <= bd, "upper6", k, bd);
        if (k < 32 && bd < 32) begin
          check(lo5, k >= bd, "lower5", k, bd);
          check(up5, k <= bd, "upper5", k, bd);
        end
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
