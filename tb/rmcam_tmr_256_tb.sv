// Workload test of rmcam_tmr_top built as a 256 x 256 bit RAM (ADDR_W = 8),
// the array size of the repair-rate experiments: roughly 7.5 % uniformly
// scattered stuck cells plus three Gaussian-shaped clusters (about 1.5 %
// of the array).
//
// Layout of the repair tables, chosen by this test (the offline search for
// rectangles and column triples is not part of the hardware):
//   logical columns 0..63 are TMR columns, column c stored in physical
//   columns 3c, 3c+1, 3c+2; logical columns 192..255 are plain columns;
//   logical columns 64..191 are not used (their cells hold the TMR copies);
//   each cluster gets a rectangle of 21 x 21 physical cells, written in
//   logical coordinates, moved to a reserved window in the TMR region.
// Every logical address is written and read. Each response is compared with
// a reference model of the mapping and of the stuck cells (latency six
// cycles). The share of reads that return the written bit is printed, for
// the plain and the TMR columns, with and without the cluster remapping;
// it must rise with the repair tables.
module rmcam_tmr_256_tb;
  import rmcam_pkg::*;
  localparam int unsigned AW = 8, N = 256, C = 4;

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
  int n_hit = 0, n_wrap = 0, n_nohit = 0, n_vote_fix = 0, n_b2b = 0;
  int n_reads = 0, n_writes = 0;
  int n_good [2], n_tot [2];
  function automatic int cls(int c); return (c < 64) ? 1 : 0; endfunction
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
          if (rsp_rdata == written[e.lrow][e.lcol]) n_good[cls(e.lcol)]++;
          n_tot[cls(e.lcol)]++;
          if (!(e.bits == 3'b000 || e.bits == 3'b111) && rsp_rdata == written[e.lrow][e.lcol])
            n_vote_fix++;
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

  task automatic wait_idle();
    while (q.size() != 0) @(posedge clk);
    @(negedge clk);
  endtask

  // approximately normal offset, sigma about 4 (sum of four uniforms)
  function automatic int gauss4();
    int s = 0;
    for (int i = 0; i < 4; i++) s += $urandom_range(0, 14);
    return s - 28;
  endfunction

  // target windows in logical coordinates: rows 200..220, TMR columns
  int win_r [C], win_c [C];
  function automatic bit reserved(int r, int c);
    if (c >= 64 && c < 192) return 1'b1;
    for (int n = 0; n < 3; n++)
      if (r >= win_r[n] && r <= win_r[n] + r_hi[n] - r_lo[n] &&
          c >= win_c[n] && c <= win_c[n] + c_hi[n] - c_lo[n]) return 1'b1;
    return 1'b0;
  endfunction

  task automatic pass(input string what);
    int pre_fix;
    n_good[0] = 0; n_good[1] = 0; n_tot[0] = 0; n_tot[1] = 0;
    pre_fix = n_vote_fix;
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++)
        if (!reserved(r, c)) access(1'b1, r, c, 1'($urandom));
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++)
        if (!reserved(r, c)) access(1'b0, r, c, 1'b0);
    wait_idle();
    $display("%s: plain columns %0d/%0d correct, TMR columns %0d/%0d correct, votes that fixed a copy %0d",
             what, n_good[0], n_tot[0], n_good[1], n_tot[1], n_vote_fix - pre_fix);
  endtask

  int cr [3], cc [3];     // cluster centres, physical
  int defects_uniform = 0, defects_cluster = 0;
  int good_plain_before, good_tmr_before;

  initial begin
    for (int c = 0; c < N; c++) for (int t = 0; t < 3; t++) tmr[c][t] = c;
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) begin phys[r][c] = 0; written[r][c] = 0; end
    // uniform defects, 7.5 %
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++)
        if ($urandom_range(0, 999) < 75) begin
          defect_mask[r][c] = 1'b1; defect_value[r][c] = 1'($urandom); defects_uniform++;
        end
    // three clusters: one in the plain region, two in the TMR region
    cr[0] = 40;  cc[0] = 220;
    cr[1] = 100; cc[1] = 60;
    cr[2] = 160; cc[2] = 150;
    for (int n = 0; n < 3; n++)
      for (int k = 0; k < 500; k++) begin
        int r, c;
        r = cr[n] + gauss4(); c = cc[n] + gauss4();
        if (!defect_mask[r][c]) defects_cluster++;
        defect_mask[r][c] = 1'b1; defect_value[r][c] = 1'($urandom);
      end
    // rectangles (logical) covering centre +- 10 physical cells
    r_lo[0] = 30;  r_hi[0] = 50;  c_lo[0] = 210;   c_hi[0] = 230;
    r_lo[1] = 90;  r_hi[1] = 110; c_lo[1] = 50/3;  c_hi[1] = 70/3;
    r_lo[2] = 150; r_hi[2] = 170; c_lo[2] = 140/3; c_hi[2] = 160/3;
    win_r[0] = 200; win_c[0] = 0;
    win_r[1] = 200; win_c[1] = 25;
    win_r[2] = 230; win_c[2] = 25;
    for (int n = 0; n < 3; n++) begin
      r_vec[n] = (win_r[n] - r_lo[n]) & (N - 1);
      c_vec[n] = (win_c[n] - c_lo[n]) & (N - 1);
    end
    r_lo[3] = N; r_hi[3] = -1; c_lo[3] = N; c_hi[3] = -1; r_vec[3] = 0; c_vec[3] = 0;
    $display("defects: uniform %0d, cluster %0d of %0d cells", defects_uniform, defects_cluster, N * N);

    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // TMR triples are loaded first; clusters are not yet remapped
    for (int c = 0; c < 64; c++) begin
      tmr[c][0] = 3 * c; tmr[c][1] = 3 * c + 1; tmr[c][2] = 3 * c + 2;
      cfg(CFG_TMR_ROM, c, {AW'(tmr[c][0]), AW'(tmr[c][1]), AW'(tmr[c][2])});
    end
    repair_on = 1'b0;
    pass("TMR only");
    good_plain_before = n_good[0];
    good_tmr_before = n_good[1];

    // then the cluster rectangles
    for (int n = 0; n < C; n++) begin
      cfg(CFG_LOWER_ROW, n, (3*AW)'(r_lo[n] > N - 1 ? N - 1 : r_lo[n]));
      cfg(CFG_UPPER_ROW, n, (3*AW)'(r_hi[n] < 0 ? 0 : r_hi[n]));
      cfg(CFG_LOWER_COL, n, (3*AW)'(c_lo[n] > N - 1 ? N - 1 : c_lo[n]));
      cfg(CFG_UPPER_COL, n, (3*AW)'(c_hi[n] < 0 ? 0 : c_hi[n]));
      cfg(CFG_VEC_ROM, n, (3*AW)'({AW'(r_vec[n]), AW'(c_vec[n])}));
    end
    repair_on = 1'b1;
    pass("TMR and clusters");
    repeat (3) @(posedge clk);

    $display("mechanisms: cluster_hit=%0d wrap=%0d no_hit=%0d tmr_vote_fix=%0d back_to_back=%0d reads=%0d writes=%0d",
             n_hit, n_wrap, n_nohit, n_vote_fix, n_b2b, n_reads, n_writes);
    checks += 7;
    if (n_hit == 0)      begin failures++; $display("FAIL no cluster hit"); end
    if (n_wrap == 0)     begin failures++; $display("FAIL no wrap"); end
    if (n_nohit == 0)    begin failures++; $display("FAIL no pass-through"); end
    if (n_vote_fix == 0) begin failures++; $display("FAIL no TMR correction"); end
    if (n_b2b == 0)      begin failures++; $display("FAIL no back-to-back access"); end
    if (n_good[0] <= good_plain_before || n_good[1] <= good_tmr_before) begin
      failures++; $display("FAIL cluster remapping did not raise the share of good reads");
    end
    if (q.size() != 0)   begin failures++; $display("FAIL %0d responses missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
