// Self-checking test of rmcam_array: after reset no lower/upper pair can
// match; written bounds are compared against every key; the match lines
// change only on an eval edge. Checks a lower and an upper array.
module rmcam_array_tb;
  localparam int unsigned AW = 6, E = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  logic          wr_en_lo = 1'b0, wr_en_up = 1'b0, eval = 1'b0;
  logic [1:0]    wr_idx = '0;
  logic [AW-1:0] wr_data = '0, key = '0;
  logic [E-1:0]  m_lo, m_up;
  logic [AW-1:0] lo_ref [E], up_ref [E];

  rmcam_array #(.ADDR_W(AW), .ENTRIES(E), .UPPER(1'b0)) dut_lo (
    .clk, .rst_n, .wr_en(wr_en_lo), .wr_idx, .wr_data, .eval, .key, .match(m_lo));
  rmcam_array #(.ADDR_W(AW), .ENTRIES(E), .UPPER(1'b1)) dut_up (
    .clk, .rst_n, .wr_en(wr_en_up), .wr_idx, .wr_data, .eval, .key, .match(m_up));

  always #5 clk = ~clk;

  task automatic check(input logic [E-1:0] got, input logic [E-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s key=%0d got=%b exp=%b", what, key, got, exp);
    end
  endtask

  function automatic logic [E-1:0] exp_lo(input logic [AW-1:0] k);
    for (int n = 0; n < E; n++) exp_lo[n] = (k >= lo_ref[n]);
  endfunction
  function automatic logic [E-1:0] exp_up(input logic [AW-1:0] k);
    for (int n = 0; n < E; n++) exp_up[n] = (k <= up_ref[n]);
  endfunction

  task automatic search(input logic [AW-1:0] k);
    key = k; eval = 1'b1;
    @(posedge clk); #1;
    eval = 1'b0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // reset bounds: no key lies in both the lower and the upper range
    for (int k = 0; k < 64; k++) begin
      search(AW'(k));
      check(m_lo & m_up, '0, "reset pair");
    end
    // write bounds
    for (int n = 0; n < E; n++) begin
      lo_ref[n] = AW'($urandom_range(0, 63));
      up_ref[n] = AW'($urandom_range(0, 63));
    end
    lo_ref[0] = 6'd10; up_ref[0] = 6'd20;
    for (int n = 0; n < E; n++) begin
      @(negedge clk);
      wr_en_lo = 1'b1; wr_idx = 2'(n); wr_data = lo_ref[n];
      @(negedge clk);
      wr_en_lo = 1'b0;
      wr_en_up = 1'b1; wr_data = up_ref[n];
      @(negedge clk);
      wr_en_up = 1'b0;
    end
    for (int k = 0; k < 64; k++) begin
      search(AW'(k));
      check(m_lo, exp_lo(AW'(k)), "lower");
      check(m_up, exp_up(AW'(k)), "upper");
    end
    // match lines hold without eval
    search(6'd15);
    check(m_lo[0] & m_up[0], 1'b1, "inside entry 0");
    key = 6'd40;
    repeat (3) @(posedge clk);
    #1;
    check(m_lo[0] & m_up[0], 1'b1, "held without eval");
    search(6'd40);
    check(m_lo[0] & m_up[0], 1'b0, "outside entry 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
