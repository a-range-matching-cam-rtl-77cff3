// Cluster rectangle matcher: the four range CAMs and their wired AND.
//
// A cluster n is a rectangle of rows [row_lo(n), row_hi(n)] and columns
// [col_lo(n), col_hi(n)]. The row address is searched in the lower and upper
// row CAMs, the column address in the lower and upper column CAMs; the four
// match lines of entry n are ANDed (a wired AND in the circuit), so hit[n] is
// high when the address lies inside rectangle n. Each cluster therefore
// costs four CAM entries, one in each CAM, as the repair scheme counts it.
//
// Configuration writes select one CAM by target (CFG_LOWER_ROW ..
// CFG_UPPER_COL) and one entry by index. The search is evaluated on eval
// (phi1); hit is valid from the cycle after that edge until the next eval.
module cluster_match
  import rmcam_pkg::*;
#(
  parameter int unsigned ADDR_W   = 6,
  parameter int unsigned CLUSTERS = 4,
  localparam int unsigned IDX_W   = (CLUSTERS > 1) ? $clog2(CLUSTERS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cfg_we,
  input  cfg_target_e          cfg_target,
  input  logic [IDX_W-1:0]     cfg_idx,
  input  logic [ADDR_W-1:0]    cfg_bound,
  input  logic                 eval,       // phi1
  input  logic [ADDR_W-1:0]    row_addr,
  input  logic [ADDR_W-1:0]    col_addr,
  output logic [CLUSTERS-1:0]  hit
);

  logic [CLUSTERS-1:0] m_lr, m_ur, m_lc, m_uc;

  rmcam_array #(.ADDR_W(ADDR_W), .ENTRIES(CLUSTERS), .UPPER(1'b0)) u_lower_row (
    .clk, .rst_n, .wr_en(cfg_we && cfg_target == CFG_LOWER_ROW), .wr_idx(cfg_idx),
    .wr_data(cfg_bound), .eval, .key(row_addr), .match(m_lr));
  rmcam_array #(.ADDR_W(ADDR_W), .ENTRIES(CLUSTERS), .UPPER(1'b1)) u_upper_row (
    .clk, .rst_n, .wr_en(cfg_we && cfg_target == CFG_UPPER_ROW), .wr_idx(cfg_idx),
    .wr_data(cfg_bound), .eval, .key(row_addr), .match(m_ur));
  rmcam_array #(.ADDR_W(ADDR_W), .ENTRIES(CLUSTERS), .UPPER(1'b0)) u_lower_col (
    .clk, .rst_n, .wr_en(cfg_we && cfg_target == CFG_LOWER_COL), .wr_idx(cfg_idx),
    .wr_data(cfg_bound), .eval, .key(col_addr), .match(m_lc));
  rmcam_array #(.ADDR_W(ADDR_W), .ENTRIES(CLUSTERS), .UPPER(1'b1)) u_upper_col (
    .clk, .rst_n, .wr_en(cfg_we && cfg_target == CFG_UPPER_COL), .wr_idx(cfg_idx),
    .wr_data(cfg_bound), .eval, .key(col_addr), .match(m_uc));

  // Wired AND of the four match lines of each entry.
  assign hit = m_lr & m_ur & m_lc & m_uc;

endmodule
