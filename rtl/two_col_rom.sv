// Two-columns ROM: the placement vectors of the cluster rectangles.
//
// Word line n is the hit line of cluster n. The word holds the row and the
// column placement vector of that cluster, the offsets that move an address
// inside the defective rectangle to a healthy window. The words are stored
// inverted: the bit lines are precharged high and a selected cell that holds
// a 0 pulls its bit line low, and an inverter on each bit line gives the
// vector. With no hit no cell is selected, the bit lines stay high and both
// vectors read as zero, so an address outside every cluster is not moved.
// If several hit lines were high the bit lines would give the OR of their
// vectors, as the wired bit lines do; the repair tables are meant to keep
// the rectangles disjoint.
//
// Storing the inverse and reading through inverters follows the mapping
// structure; that the ROM is written through a configuration port (it has to
// be programmed per chip after test) and resets to "no offset" is this
// design's choice. The read is captured on the edge that ends the eval phase
// (phi2) and held.
module two_col_rom #(
  parameter int unsigned ADDR_W   = 6,
  parameter int unsigned CLUSTERS = 4,
  localparam int unsigned IDX_W   = (CLUSTERS > 1) ? $clog2(CLUSTERS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 wr_en,
  input  logic [IDX_W-1:0]     wr_idx,
  input  logic [ADDR_W-1:0]    wr_row_vec,  // true (not inverted) vectors
  input  logic [ADDR_W-1:0]    wr_col_vec,
  input  logic                 eval,        // phi2
  input  logic [CLUSTERS-1:0]  word_line,   // cluster hit lines
  output logic [ADDR_W-1:0]    row_vec,
  output logic [ADDR_W-1:0]    col_vec
);

  // Stored inverted: {~row_vec, ~col_vec}.
  logic [2*ADDR_W-1:0] cell_q [CLUSTERS];
  logic [2*ADDR_W-1:0] bit_line;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < CLUSTERS; n++) cell_q[n] <= '1;
    end else if (wr_en) begin
      cell_q[wr_idx] <= ~{wr_row_vec, wr_col_vec};
    end
  end

  // Precharged bit lines, pulled low by selected cells holding 0.
  always_comb begin
    bit_line = '1;
    for (int n = 0; n < CLUSTERS; n++)
      if (word_line[n]) bit_line &= cell_q[n];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_vec <= '0;
      col_vec <= '0;
    end else if (eval) begin
      {row_vec, col_vec} <= ~bit_line;   // output inverters
    end
  end

endmodule
