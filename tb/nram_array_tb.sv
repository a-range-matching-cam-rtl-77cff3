// Self-checking test of the nram_array model: a random image is written
// one cell at a time (all three selects on the same column) and read back;
// a write with three different columns stores the bit in all three; reads
// of three different columns return each cell; stuck-at defects override
// the stored value.
module nram_array_tb;
  localparam int unsigned AW = 6, N = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  logic eval = 1'b0, we = 1'b0, wdata = 1'b0;
  logic [N-1:0] word_line = '0;
  logic [N-1:0] col_sel [3];
  logic [N-1:0][N-1:0] defect_mask = '0, defect_value = '0;
  logic [2:0] rd_bits;
  logic [N-1:0][N-1:0] img;

  nram_array #(.ADDR_W(AW)) dut (
    .clk, .rst_n, .eval, .we, .wdata, .word_line, .col_sel, .defect_mask, .defect_value, .rd_bits);

  always #5 clk = ~clk;

  task automatic access(input logic w, input logic d, input int r, input int ci, input int cj, input int ck);
    @(negedge clk);
    we = w; wdata = d; word_line = N'(1) << r;
    col_sel[0] = N'(1) << ci; col_sel[1] = N'(1) << cj; col_sel[2] = N'(1) << ck;
    eval = 1'b1;
    @(negedge clk);
    eval = 1'b0; we = 1'b0;
  endtask

  task automatic check(input logic [2:0] exp, input string what);
    checks++;
    if (rd_bits !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %b exp %b", what, rd_bits, exp);
    end
  endtask

  initial begin
    col_sel[0] = '0; col_sel[1] = '0; col_sel[2] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        img[r][c] = 1'($urandom);
        access(1'b1, img[r][c], r, c, c, c);
      end
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c += 3) begin
        access(1'b0, 1'b0, r, c, (c + 1) % N, (c + 2) % N);
        check({img[r][(c + 2) % N], img[r][(c + 1) % N], img[r][c]}, "read three");
      end
    // write one bit into three columns at once
    access(1'b1, ~img[5][7], 5, 7, 20, 33);
    access(1'b0, 1'b0, 5, 7, 20, 33);
    check({3{~img[5][7]}}, "tmr write");
    access(1'b0, 1'b0, 5, 8, 8, 8);
    check({3{img[5][8]}}, "neighbour untouched");
    // stuck-at defects
    defect_mask[5][20] = 1'b1; defect_value[5][20] = img[5][7];
    access(1'b0, 1'b0, 5, 7, 20, 33);
    check({~img[5][7], img[5][7], ~img[5][7]}, "stuck cell");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
