// Self-checking test of three_col_rom: after reset every column maps to
// (c, c, c); written triples are read back one-hot; outputs hold without
// an eval edge.
module three_col_rom_tb;
  localparam int unsigned AW = 6, N = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  logic          wr_en = 1'b0, eval = 1'b0;
  logic [AW-1:0] wr_col = '0, wr_col_i = '0, wr_col_j = '0, wr_col_k = '0;
  logic [N-1:0]  word_line = '0;
  logic [N-1:0]  sel [3];
  int ti [N], tj [N], tk [N];

  three_col_rom #(.ADDR_W(AW)) dut (
    .clk, .rst_n, .wr_en, .wr_col, .wr_col_i, .wr_col_j, .wr_col_k, .eval, .word_line, .sel);

  always #5 clk = ~clk;

  task automatic read(input int c);
    @(negedge clk);
    word_line = N'(1) << c; eval = 1'b1;
    @(negedge clk);
    eval = 1'b0;
  endtask

  task automatic check(input int c, input string what);
    checks++;
    if (sel[0] !== N'(1) << ti[c] || sel[1] !== N'(1) << tj[c] || sel[2] !== N'(1) << tk[c]) begin
      failures++;
      if (failures < 10) $display("FAIL %s col %0d: %h %h %h", what, c, sel[0], sel[1], sel[2]);
    end
  endtask

  initial begin
    for (int c = 0; c < N; c++) begin ti[c] = c; tj[c] = c; tk[c] = c; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < N; c++) begin read(c); check(c, "identity"); end
    for (int c = 0; c < N; c += 3) begin
      ti[c] = $urandom_range(0, N - 1);
      tj[c] = $urandom_range(0, N - 1);
      tk[c] = $urandom_range(0, N - 1);
      @(negedge clk);
      wr_en = 1'b1; wr_col = AW'(c);
      wr_col_i = AW'(ti[c]); wr_col_j = AW'(tj[c]); wr_col_k = AW'(tk[c]);
      @(negedge clk);
      wr_en = 1'b0;
    end
    for (int c = 0; c < N; c++) begin read(c); check(c, "written"); end
    read(3);
    word_line = N'(1) << 5;
    repeat (2) @(negedge clk);
    check(3, "hold");
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
