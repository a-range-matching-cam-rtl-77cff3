// Behavioural model of the nanotube RAM (NRAM) array, with defect injection.
//
// The real part is a process-specific array of carbon-nanotube cells: each
// cell is a two-terminal CNT switch (high resistance = 0, contacted fabric =
// 1) selected by one NMOS transistor on word line WL between bit line BL and
// select line SL. This model keeps only its logic behaviour: a ROWS x COLS
// bit array, one word line (one-hot, from DEC 0) and three one-hot column
// select vectors (from the three-columns ROM) that pick the three cells
// read together for TMR.
//
// Manufacturing defects are modelled as stuck-at cells: where defect_mask is
// set the cell reads defect_value whatever was written. These two inputs
// stand for the physical defects that an external tester would find; they
// are not a function of the real array.
//
// On the edge that ends the eval phase (phi5): a write stores wdata into
// every selected cell (all three TMR copies), a read captures the three
// selected bits into rd_bits, held until the next read. Writing through the
// same three selects is this design's choice; only reads are described for
// the mapping structure.
module nram_array #(
  parameter int unsigned ADDR_W = 6,
  localparam int unsigned ROWS  = 1 << ADDR_W,
  localparam int unsigned COLS  = 1 << ADDR_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       eval,          // phi5
  input  logic                       we,
  input  logic                       wdata,
  input  logic [ROWS-1:0]            word_line,     // one-hot row
  input  logic [COLS-1:0]            col_sel [3],   // one-hot columns i, j, k
  input  logic [ROWS-1:0][COLS-1:0]  defect_mask,   // model only: stuck cells
  input  logic [ROWS-1:0][COLS-1:0]  defect_value,  // model only: stuck values
  output logic [2:0]                 rd_bits
);

  logic [ROWS-1:0][COLS-1:0] cell_q;
  logic [ROWS-1:0][COLS-1:0] cell_rd;
  logic [COLS-1:0]           row_rd;
  logic [COLS-1:0]           any_sel;
  logic [2:0]                rd_d;

  assign cell_rd = (cell_q & ~defect_mask) | (defect_value & defect_mask);
  assign any_sel = col_sel[0] | col_sel[1] | col_sel[2];

  always_comb begin
    row_rd = '0;
    for (int r = 0; r < ROWS; r++)
      if (word_line[r]) row_rd |= cell_rd[r];
    for (int t = 0; t < 3; t++) rd_d[t] = |(row_rd & col_sel[t]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cell_q  <= '0;
      rd_bits <= '0;
    end else if (eval) begin
      if (we) begin
        for (int r = 0; r < ROWS; r++)
          if (word_line[r]) cell_q[r] <= (cell_q[r] & ~any_sel) | ({COLS{wdata}} & any_sel);
      end else begin
        rd_bits <= rd_d;
      end
    end
  end

endmodule
