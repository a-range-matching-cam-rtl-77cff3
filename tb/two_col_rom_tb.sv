// Self-checking test of two_col_rom: vectors are read back through each
// word line, both vectors read zero without a hit and after reset, and the
// outputs change only on an eval edge.
module two_col_rom_tb;
  localparam int unsigned AW = 6, C = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  logic          wr_en = 1'b0, eval = 1'b0;
  logic [1:0]    wr_idx = '0;
  logic [AW-1:0] wr_row_vec = '0, wr_col_vec = '0;
  logic [C-1:0]  word_line = '0;
  logic [AW-1:0] row_vec, col_vec;
  logic [AW-1:0] rv [C], cv [C];

  two_col_rom #(.ADDR_W(AW), .CLUSTERS(C)) dut (
    .clk, .rst_n, .wr_en, .wr_idx, .wr_row_vec, .wr_col_vec, .eval, .word_line, .row_vec, .col_vec);

  always #5 clk = ~clk;

  task automatic read(input logic [C-1:0] wl);
    @(negedge clk);
    word_line = wl; eval = 1'b1;
    @(negedge clk);
    eval = 1'b0;
  endtask

  task automatic check(input logic [AW-1:0] r, input logic [AW-1:0] c, input string what);
    checks++;
    if (row_vec !== r || col_vec !== c) begin
      failures++;
      $display("FAIL %s got %0d,%0d exp %0d,%0d", what, row_vec, col_vec, r, c);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < C; n++) begin
      read(C'(1) << n);
      check('0, '0, "reset word");
    end
    for (int n = 0; n < C; n++) begin
      rv[n] = AW'($urandom); cv[n] = AW'($urandom);
      @(negedge clk);
      wr_en = 1'b1; wr_idx = 2'(n); wr_row_vec = rv[n]; wr_col_vec = cv[n];
      @(negedge clk);
      wr_en = 1'b0;
    end
    for (int rep = 0; rep < 3; rep++) begin
      for (int n = 0; n < C; n++) begin
        read(C'(1) << n);
        check(rv[n], cv[n], "word");
        read('0);
        check('0, '0, "no hit");
      end
    end
    read(4'b0010);
    word_line = 4'b0001;
    repeat (2) @(negedge clk);
    check(rv[1], cv[1], "hold without eval");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
