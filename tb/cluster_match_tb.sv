// Self-checking test of cluster_match: four cluster rectangles are loaded
// through the configuration port; every row/column address of a 64 x 64
// array is searched and hit is compared with a rectangle-membership model.
// A rectangle left at its reset bounds must never hit.
module cluster_match_tb;
  import rmcam_pkg::*;
  localparam int unsigned AW = 6, C = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  logic          cfg_we = 1'b0;
  cfg_target_e   cfg_target = CFG_LOWER_ROW;
  logic [1:0]    cfg_idx = '0;
  logic [AW-1:0] cfg_bound = '0;
  logic          eval = 1'b0;
  logic [AW-1:0] row_addr = '0, col_addr = '0;
  logic [C-1:0]  hit, exp;
  int r_lo [C], r_hi [C], c_lo [C], c_hi [C];
  int hits_seen = 0;

  cluster_match #(.ADDR_W(AW), .CLUSTERS(C)) dut (
    .clk, .rst_n, .cfg_we, .cfg_target, .cfg_idx, .cfg_bound, .eval, .row_addr, .col_addr, .hit);

  always #5 clk = ~clk;

  task automatic cfg(input cfg_target_e t, input int idx, input int v);
    @(negedge clk);
    cfg_we = 1'b1; cfg_target = t; cfg_idx = 2'(idx); cfg_bound = AW'(v);
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  initial begin
    // rectangles 0..2 disjoint; rectangle 3 left at reset
    r_lo[0] = 2;  r_hi[0] = 9;  c_lo[0] = 3;  c_hi[0] = 12;
    r_lo[1] = 20; r_hi[1] = 31; c_lo[1] = 40; c_hi[1] = 47;
    r_lo[2] = 50; r_hi[2] = 63; c_lo[2] = 0;  c_hi[2] = 5;
    r_lo[3] = 64; r_hi[3] = -1; c_lo[3] = 64; c_hi[3] = -1;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3; n++) begin
      cfg(CFG_LOWER_ROW, n, r_lo[n]);
      cfg(CFG_UPPER_ROW, n, r_hi[n]);
      cfg(CFG_LOWER_COL, n, c_lo[n]);
      cfg(CFG_UPPER_COL, n, c_hi[n]);
    end
    for (int r = 0; r < 64; r++) begin
      for (int c = 0; c < 64; c++) begin
        @(negedge clk);
        row_addr = AW'(r); col_addr = AW'(c); eval = 1'b1;
        @(negedge clk);
        eval = 1'b0;
        for (int n = 0; n < C; n++)
          exp[n] = (r >= r_lo[n] && r <= r_hi[n] && c >= c_lo[n] && c <= c_hi[n]);
        checks++;
        if (|hit) hits_seen++;
        if (hit !== exp) begin
          failures++;
          if (failures < 10) $display("FAIL r=%0d c=%0d hit=%b exp=%b", r, c, hit, exp);
        end
      end
    end
    // the three rectangles cover 80 + 96 + 84 addresses
    checks++;
    if (hits_seen != 80 + 96 + 84) begin
      failures++;
      $display("FAIL hit count %0d", hits_seen);
    end
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
