// One range-matching CAM: ENTRIES words of lower or upper bounds.
//
// Each word holds one bound of one cluster rectangle (row or column, lower or
// upper). The words are written like SRAM through wr_en/wr_idx/wr_data. A
// search compares key against all words in parallel; the match lines are
// captured on the clock edge that ends the evaluation phase (eval high, the
// phi1 phase of the mapping structure) and held until the next evaluation.
//
// Reset loads a bound that no key can satisfy together with its partner:
// all ones into a lower CAM and all zeros into an upper CAM, so an entry
// that was never written cannot report a rectangle. The reset value, write
// port and registered match lines are this design's choices.
module rmcam_array #(
  parameter int unsigned ADDR_W  = 6,
  parameter int unsigned ENTRIES = 4,
  parameter bit          UPPER   = 1'b0,
  localparam int unsigned IDX_W  = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                wr_en,
  input  logic [IDX_W-1:0]    wr_idx,
  input  logic [ADDR_W-1:0]   wr_data,
  input  logic                eval,     // phi1: evaluate the search
  input  logic [ADDR_W-1:0]   key,
  output logic [ENTRIES-1:0]  match     // registered match lines
);

  logic [ADDR_W-1:0]  bound_q [ENTRIES];
  logic [ENTRIES-1:0] match_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < ENTRIES; n++) bound_q[n] <= UPPER ? '0 : '1;
    end else if (wr_en) begin
      bound_q[wr_idx] <= wr_data;
    end
  end

  for (genvar n = 0; n < ENTRIES; n++) begin : g_entry
    rmcam_entry #(.ADDR_W(ADDR_W), .UPPER(UPPER)) u_entry (
      .key  (key),
      .bound(bound_q[n]),
      .out  (match_d[n])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    match <= '0;
    else if (eval) match <= match_d;
  end

endmodule
