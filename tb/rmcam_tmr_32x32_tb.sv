// End-to-end test of rmcam_tmr_top built as the 32 x 32 bit RAM (ADDR_W = 5,
// four cluster rectangles), the smaller of the two RAM sizes of the design.
//
// A defect map is built with two dense clusters and single random defects
// in four columns. Phase 1 writes and reads the cluster addresses without
// any repair table: stuck cells must corrupt some of them. Phase 2 loads the
// repair tables the offline analysis would produce:
//   cluster 0: rows 2..5,   cols 4..7   moved by (+18, +16) to rows 20..23, cols 20..23
//   cluster 1: rows 10..12, cols 18..20 moved by (+16, -10) to rows 26..28, cols 8..10
//              (the column sum wraps modulo 32)
//   TMR: logical column c in 0..3 is read from columns (c, 24+2c, 25+2c)
// and then writes and reads every logical address (all but the spare
// windows and the spare TMR columns 24..31). Every response is compared with
// a reference model of the mapping and of the stuck cells, its latency must
// be six cycles, and every read must return the written bit.
// Counted mechanisms: cluster hit (remap), column wrap, no hit, TMR vote
// that outvoted a defective copy, request taken in the phi5 cycle (back to
// back), reads corrupted without repair. Each must occur at least once.
module rmcam_tmr_32x32_tb;
  import rmcam_pkg::*;
  localparam int unsigned AW = 5, N = 32, C = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  longint cycle = 0;

  logic              req_valid = 1'b0, req_ready, req_we = 1'b0, req_wdata = 1'b0;
  logic [AW-1:0]     req_row = '0, req_col = '0;
  logic              rsp_valid, rsp_we, rsp_rdata, rsp_cluster_hit;
  logic [2:0]        rsp_bits;
  logic [AW-1:0]     rsp_mapped_row, rsp_mapped_col;
  logic              cfg_we = 1'b0;
  cfg_target_e       cfg_target = CFG_LOWER_ROW;
  logic [AW-1:0]     cfg_idx = '0;
  logic [3*AW-1:0]   cfg_data = '0;
  logic [N-1:0][N-1:0] defect_mask = '0, defect_value = '0;

  rmcam_tmr_top #(.ADDR_W(AW), .CLUSTERS(C)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req_we, .req_row, .req_col, .req_wdata,
    .rsp_valid, .rsp_we, .rsp_rdata, .rsp_bits, .rsp_cluster_hit, .rsp_mapped_row, .rsp_mapped_col,
    .cfg_we, .cfg_target, .cfg_idx, .cfg_data, .defect_mask, .defect_value);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // ---------------- reference model ----------------
  bit repair_on = 1'b0;
  int r_lo [C], r_hi [C], c_lo [C], c_hi [C], r_vec [C], c_vec [C];
  int tmr [N][3];
  bit phys [N][N];          // what the array holds where no defect sits
  bit written [N][N];       // last bit written to each logical address

  typedef struct {
    longint t_accept;
    bit     we, data, hit;
    int     mrow, mcol;
    bit [2:0] bits;
    bit     exp_data;
    int     lrow, lcol;
  } exp_t;
  exp_t q [$];

  function automatic bit phys_cell(int r, int c);
    return defect_mask[r][c] ? defect_value[r][c] : phys[r][c];
  endfunction

  // ---------------- mechanism counters ----------------
  int n_hit = 0, n_wrap = 0, n_nohit = 0, n_vote_fix = 0, n_b2b = 0, n_unrepaired_bad = 0;
  int n_reads = 0, n_writes = 0;
  longint last_accept = -100;

  // accept: model the access at the edge where the DUT takes it
  always @(posedge clk) begin
    if (rst_n && req_valid && req_ready) begin
      exp_t e;
      int mr, mc, hitn;
      hitn = -1;
      if (repair_on)
        for (int n = 0; n < C; n++)
          if (req_row >= r_lo[n] && req_row <= r_hi[n] && req_col >= c_lo[n] && req_col <= c_hi[n]) hitn = n;
      mr = int'(req_row); mc = int'(req_col);
      if (hitn >= 0) begin
        mr = (mr + r_vec[hitn]) & (N - 1);
        if (mc + c_vec[hitn] >= N) n_wrap++;
        mc = (mc + c_vec[hitn]) & (N - 1);
      end
      e.t_accept = cycle; e.we = req_we; e.data = req_wdata; e.hit = (hitn >= 0);
      e.mrow = mr; e.mcol = mc; e.lrow = int'(req_row); e.lcol = int'(req_col);
      if (req_we) begin
        for (int t = 0; t < 3; t++) phys[mr][tmr[mc][t]] = req_wdata;
        written[req_row][req_col] = req_wdata;
        e.bits = '0;
      end else begin
        for (int t = 0; t < 3; t++) e.bits[t] = phys_cell(mr, tmr[mc][t]);
      end
      e.exp_data = (e.bits[0] & e.bits[1]) | (e.bits[1] & e.bits[2]) | (e.bits[0] & e.bits[2]);
      if (cycle - last_accept == 5) n_b2b++;
      last_accept = cycle;
      q.push_back(e);
    end
  end

  // response monitor
  always @(posedge clk) begin
    if (rst_n && rsp_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("FAIL response without request");
      end else begin
        e = q.pop_front();
        if (cycle - e.t_accept != 6) begin
          failures++;
          $display("FAIL latency %0d", cycle - e.t_accept);
        end
        if (rsp_we != e.we || rsp_cluster_hit != e.hit || int'(rsp_mapped_row) != e.mrow ||
            int'(rsp_mapped_col) != e.mcol) begin
          failures++;
          if (failures < 10)
            $display("FAIL (%0d,%0d) we=%0b hit=%0b map=(%0d,%0d) exp hit=%0b map=(%0d,%0d)",
                     e.lrow, e.lcol, rsp_we, rsp_cluster_hit, rsp_mapped_row, rsp_mapped_col,
                     e.hit, e.mrow, e.mcol);
        end
        if (e.hit) n_hit++; else n_nohit++;
        if (e.we) n_writes++;
        else begin
          n_reads++;
          checks++;
          if (rsp_bits != e.bits || rsp_rdata != e.exp_data) begin
            failures++;
            if (failures < 10)
              $display("FAIL read (%0d,%0d) bits=%b data=%0b exp %b %0b",
                       e.lrow, e.lcol, rsp_bits, rsp_rdata, e.bits, e.exp_data);
          end
          if (repair_on) begin
            // with the repair tables loaded every logical bit must survive
            checks++;
            if (rsp_rdata != written[e.lrow][e.lcol]) begin
              failures++;
              if (failures < 10) $display("FAIL unrepaired (%0d,%0d)", e.lrow, e.lcol);
            end
            if (!(e.bits == 3'b000 || e.bits == 3'b111) && rsp_rdata == written[e.lrow][e.lcol])
              n_vote_fix++;
          end else if (rsp_rdata != written[e.lrow][e.lcol]) begin
            n_unrepaired_bad++;
          end
        end
      end
    end
  end

  // ---------------- stimulus ----------------
  task automatic access(input bit we, input int r, input int c, input bit d);
    @(negedge clk);
    req_valid = 1'b1; req_we = we; req_row = AW'(r); req_col = AW'(c); req_wdata = d;
    do @(posedge clk); while (!req_ready);
    #1;
    req_valid = 1'b0;
  endtask

  task automatic cfg(input cfg_target_e t, input int idx, input logic [3*AW-1:0] d);
    @(negedge clk);
    cfg_we = 1'b1; cfg_target = t; cfg_idx = AW'(idx); cfg_data = d;
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  function automatic bit in_cluster(int r, int c);
    for (int n = 0; n < 2; n++)
      if (r >= r_lo[n] && r <= r_hi[n] && c >= c_lo[n] && c <= c_hi[n]) return 1'b1;
    return 1'b0;
  endfunction

  // physical cells the logical space must not use
  function automatic bit reserved(int r, int c);
    if (c >= 24) return 1'b1;
    if (r >= 20 && r <= 23 && c >= 20 && c <= 23) return 1'b1;
    if (r >= 26 && r <= 28 && c >= 8 && c <= 10) return 1'b1;
    return 1'b0;
  endfunction

  task automatic wait_idle();
    while (q.size() != 0) @(posedge clk);
    @(negedge clk);
  endtask

  initial begin
    r_lo[0] = 2;  r_hi[0] = 5;  c_lo[0] = 4;  c_hi[0] = 7;  r_vec[0] = 18; c_vec[0] = 16;
    r_lo[1] = 10; r_hi[1] = 12; c_lo[1] = 18; c_hi[1] = 20; r_vec[1] = 16; c_vec[1] = 32 - 10;
    for (int n = 2; n < C; n++) begin
      r_lo[n] = 32; r_hi[n] = -1; c_lo[n] = 32; c_hi[n] = -1; r_vec[n] = 0; c_vec[n] = 0;
    end
    for (int c = 0; c < N; c++) for (int t = 0; t < 3; t++) tmr[c][t] = c;
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) begin phys[r][c] = 0; written[r][c] = 0; end

    // defect map: dense clusters, single defects in the TMR triples
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++)
        if (in_cluster(r, c) && $urandom_range(0, 99) < 60) begin
          defect_mask[r][c] = 1'b1; defect_value[r][c] = 1'($urandom);
        end
    for (int r = 0; r < N; r++)
      for (int c = 0; c < 4; c++)
        if ($urandom_range(0, 99) < 30) begin
          int pc;
          case ($urandom_range(0, 2))
            0: pc = c;
            1: pc = 24 + 2 * c;
            default: pc = 25 + 2 * c;
          endcase
          defect_mask[r][pc] = 1'b1; defect_value[r][pc] = 1'($urandom);
        end

    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // phase 1: no repair tables; cluster cells and TMR column cells
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++)
        if (in_cluster(r, c) || c < 4) access(1'b1, r, c, 1'($urandom));
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++)
        if (in_cluster(r, c) || c < 4) access(1'b0, r, c, 1'b0);
    wait_idle();

    // phase 2: load the repair tables
    for (int n = 0; n < C; n++) begin
      cfg(CFG_LOWER_ROW, n, (3*AW)'(r_lo[n] > 31 ? 31 : r_lo[n]));
      cfg(CFG_UPPER_ROW, n, (3*AW)'(r_hi[n] < 0 ? 0 : r_hi[n]));
      cfg(CFG_LOWER_COL, n, (3*AW)'(c_lo[n] > 31 ? 31 : c_lo[n]));
      cfg(CFG_UPPER_COL, n, (3*AW)'(c_hi[n] < 0 ? 0 : c_hi[n]));
      cfg(CFG_VEC_ROM, n, (3*AW)'({AW'(r_vec[n]), AW'(c_vec[n])}));
    end
    // unused clusters 2,3: row range [31,0] and column range [31,0] are empty
    for (int c = 0; c < 4; c++) begin
      tmr[c][0] = c; tmr[c][1] = 24 + 2 * c; tmr[c][2] = 25 + 2 * c;
      cfg(CFG_TMR_ROM, c, {AW'(tmr[c][0]), AW'(tmr[c][1]), AW'(tmr[c][2])});
    end
    repair_on = 1'b1;

    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++)
        if (!reserved(r, c)) access(1'b1, r, c, 1'($urandom));
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++)
        if (!reserved(r, c)) access(1'b0, r, c, 1'b0);
    wait_idle();
    repeat (3) @(posedge clk);

    $display("mechanisms: cluster_hit=%0d wrap=%0d no_hit=%0d tmr_vote_fix=%0d back_to_back=%0d unrepaired_bad=%0d reads=%0d writes=%0d",
             n_hit, n_wrap, n_nohit, n_vote_fix, n_b2b, n_unrepaired_bad, n_reads, n_writes);
    checks += 8;
    if (n_hit == 0)            begin failures++; $display("FAIL no cluster hit"); end
    if (n_wrap == 0)           begin failures++; $display("FAIL no wrap"); end
    if (n_nohit == 0)          begin failures++; $display("FAIL no pass-through"); end
    if (n_vote_fix == 0)       begin failures++; $display("FAIL no TMR correction"); end
    if (n_b2b == 0)            begin failures++; $display("FAIL no back-to-back access"); end
    if (n_unrepaired_bad == 0) begin failures++; $display("FAIL defects never visible"); end
    if (n_reads == 0)          begin failures++; $display("FAIL no reads"); end
    if (q.size() != 0)         begin failures++; $display("FAIL %0d responses missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
