// Three-columns ROM: the TMR column triple of each column address.
//
// Word line c (from DEC 1) selects the word of mapped column c, which holds
// three one-hot column-select vectors for the RAM: the physical columns i, j
// and k whose bits are read together and voted. A column that is not
// repaired by TMR holds the triple (c, c, c), so its single cell is read
// three times and the vote returns that cell. The outputs are the RAM
// column select lines themselves, which is why the words are one-hot: the
// mapping structure has no column decoder after this ROM.
//
// The ROM has one word per column and resets to the identity triple (c,c,c)
// for every column. A configuration write gives the three column numbers of
// one word; they are stored one-hot. Both are this design's choices. The
// read is captured on the edge that ends the eval phase (phi4) and held.
module three_col_rom #(
  parameter int unsigned ADDR_W = 6,
  localparam int unsigned COLS  = 1 << ADDR_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic [ADDR_W-1:0] wr_col,     // column (word) to write
  input  logic [ADDR_W-1:0] wr_col_i,   // the three physical columns
  input  logic [ADDR_W-1:0] wr_col_j,
  input  logic [ADDR_W-1:0] wr_col_k,
  input  logic              eval,       // phi4
  input  logic [COLS-1:0]   word_line,  // one-hot from DEC 1
  output logic [COLS-1:0]   sel [3]     // one-hot column selects i, j, k
);

  logic [COLS-1:0] cell_q [COLS][3];
  logic [COLS-1:0] rd [3];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < COLS; c++)
        for (int t = 0; t < 3; t++) cell_q[c][t] <= COLS'(1) << c;
    end else if (wr_en) begin
      cell_q[wr_col][0] <= COLS'(1) << wr_col_i;
      cell_q[wr_col][1] <= COLS'(1) << wr_col_j;
      cell_q[wr_col][2] <= COLS'(1) << wr_col_k;
    end
  end

  always_comb begin
    for (int t = 0; t < 3; t++) begin
      rd[t] = '0;
      for (int c = 0; c < COLS; c++)
        if (word_line[c]) rd[t] |= cell_q[c][t];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < 3; t++) sel[t] <= '0;
    end else if (eval) begin
      for (int t = 0; t < 3; t++) sel[t] <= rd[t];
    end
  end

endmodule
