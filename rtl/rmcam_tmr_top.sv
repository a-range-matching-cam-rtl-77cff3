// Defect-tolerant NRAM with cluster remapping and voterless TMR.
//
// One bit-wide access goes through five phases:
//   phi1  the row and column address are searched in the four range CAMs;
//         hit[n] says that the address lies in cluster rectangle n;
//   phi2  the two-columns ROM gives the row and column placement vectors of
//         the hit cluster (zero without a hit);
//   phi3  the adders add the vectors to the address and the decoders
//         decode the mapped row (RAM word line) and the mapped column
//         (three-columns ROM word line);
//   phi4  the three-columns ROM gives the three physical columns of the
//         mapped column;
//   phi5  the NRAM reads the three bits of the mapped row in those columns
//         (or writes the data into all three); the inherent voter returns
//         their majority.
// The chain of blocks and their phases follow the mapping structure; the
// request/response handshake, the configuration port, the write path and
// one clock cycle per phase are this design's choices.
//
// Interface: a request is taken when req_valid and req_ready are both high
// in cycle t; phi1..phi5 run in cycles t+1..t+5 and rsp_valid is high in
// cycle t+6 (read data in rsp_rdata, the three raw column bits in rsp_bits,
// whether a cluster was hit and the mapped address alongside). A new
// request can be taken in the cycle of phi5, so accesses follow one another
// every five cycles and a response is valid for one cycle only. Configuration writes (cfg_*) must be made
// while no access is in flight. defect_mask/defect_value feed the NRAM
// model's stuck-at defects and stand for the physical array's defects.
module rmcam_tmr_top
  import rmcam_pkg::*;
#(
  parameter int unsigned ADDR_W   = 6,   // 64 x 64 bit RAM
  parameter int unsigned CLUSTERS = 4,   // cluster rectangles (4 CAM entries each)
  localparam int unsigned N       = 1 << ADDR_W,
  localparam int unsigned IDX_W   = (CLUSTERS > 1) ? $clog2(CLUSTERS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // access
  input  logic                 req_valid,
  output logic                 req_ready,
  input  logic                 req_we,
  input  logic [ADDR_W-1:0]    req_row,
  input  logic [ADDR_W-1:0]    req_col,
  input  logic                 req_wdata,
  output logic                 rsp_valid,
  output logic                 rsp_we,
  output logic                 rsp_rdata,
  output logic [2:0]           rsp_bits,
  output logic                 rsp_cluster_hit,
  output logic [ADDR_W-1:0]    rsp_mapped_row,
  output logic [ADDR_W-1:0]    rsp_mapped_col,
  // configuration of the repair tables
  input  logic                 cfg_we,
  input  cfg_target_e          cfg_target,
  input  logic [ADDR_W-1:0]    cfg_idx,    // cluster number, or column for CFG_TMR_ROM
  input  logic [3*ADDR_W-1:0]  cfg_data,   // bound in [ADDR_W-1:0]; {row_vec,col_vec}; {i,j,k}
  // defects of the NRAM model
  input  logic [N-1:0][N-1:0]  defect_mask,
  input  logic [N-1:0][N-1:0]  defect_value
);

  logic [NUM_PHASES-1:0] phase;
  logic                  accept;
  logic                  we_q, wdata_q;
  logic [ADDR_W-1:0]     row_q, col_q;
  logic [CLUSTERS-1:0]   hit;
  logic [ADDR_W-1:0]     row_vec, col_vec;
  logic [ADDR_W-1:0]     mapped_row, mapped_col;
  logic [ADDR_W-1:0]     mapped_row_q, mapped_col_q;
  logic [N-1:0]          row_lines, col_lines;
  logic [N-1:0]          col_sel [3];
  logic [2:0]            ram_bits;
  logic                  voted;
  logic                  hit_q;

  assign accept = req_valid && req_ready;

  phase_gen u_phase (
    .clk, .rst_n, .start(req_valid), .ready(req_ready), .phase);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      we_q    <= 1'b0;
      wdata_q <= 1'b0;
      row_q   <= '0;
      col_q   <= '0;
    end else if (accept) begin
      we_q    <= req_we;
      wdata_q <= req_wdata;
      row_q   <= req_row;
      col_q   <= req_col;
    end
  end

  // phi1: range CAMs and wired AND
  cluster_match #(.ADDR_W(ADDR_W), .CLUSTERS(CLUSTERS)) u_cam (
    .clk, .rst_n,
    .cfg_we, .cfg_target, .cfg_idx(cfg_idx[IDX_W-1:0]), .cfg_bound(cfg_data[ADDR_W-1:0]),
    .eval(phase[PH_CAM]), .row_addr(row_q), .col_addr(col_q), .hit);

  // phi2: placement vectors
  two_col_rom #(.ADDR_W(ADDR_W), .CLUSTERS(CLUSTERS)) u_vec_rom (
    .clk, .rst_n,
    .wr_en(cfg_we && cfg_target == CFG_VEC_ROM), .wr_idx(cfg_idx[IDX_W-1:0]),
    .wr_row_vec(cfg_data[2*ADDR_W-1:ADDR_W]), .wr_col_vec(cfg_data[ADDR_W-1:0]),
    .eval(phase[PH_VEC]), .word_line(hit), .row_vec, .col_vec);

  // phi3: adders and decoders
  addr_adder #(.ADDR_W(ADDR_W)) u_add_row (.addr(row_q), .vec(row_vec), .mapped(mapped_row));
  addr_adder #(.ADDR_W(ADDR_W)) u_add_col (.addr(col_q), .vec(col_vec), .mapped(mapped_col));

  addr_decoder #(.ADDR_W(ADDR_W)) u_dec_row (
    .clk, .rst_n, .eval(phase[PH_DEC]), .addr(mapped_row), .lines(row_lines));
  addr_decoder #(.ADDR_W(ADDR_W)) u_dec_col (
    .clk, .rst_n, .eval(phase[PH_DEC]), .addr(mapped_col), .lines(col_lines));

  // phi4: TMR column triple
  three_col_rom #(.ADDR_W(ADDR_W)) u_tmr_rom (
    .clk, .rst_n,
    .wr_en(cfg_we && cfg_target == CFG_TMR_ROM), .wr_col(cfg_idx),
    .wr_col_i(cfg_data[3*ADDR_W-1:2*ADDR_W]), .wr_col_j(cfg_data[2*ADDR_W-1:ADDR_W]),
    .wr_col_k(cfg_data[ADDR_W-1:0]),
    .eval(phase[PH_TMR]), .word_line(col_lines), .sel(col_sel));

  // phi5: NRAM access and voter
  nram_array #(.ADDR_W(ADDR_W)) u_ram (
    .clk, .rst_n, .eval(phase[PH_RAM]), .we(we_q), .wdata(wdata_q),
    .word_line(row_lines), .col_sel, .defect_mask, .defect_value, .rd_bits(ram_bits));

  inherent_voter u_voter (.bits(ram_bits), .recovered(voted));

  // Side information of the access, captured along the phases.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hit_q        <= 1'b0;
      mapped_row_q <= '0;
      mapped_col_q <= '0;
    end else begin
      if (phase[PH_VEC]) hit_q <= |hit;
      if (phase[PH_DEC]) begin
        mapped_row_q <= mapped_row;
        mapped_col_q <= mapped_col;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp_valid       <= 1'b0;
      rsp_we          <= 1'b0;
      rsp_cluster_hit <= 1'b0;
      rsp_mapped_row  <= '0;
      rsp_mapped_col  <= '0;
    end else begin
      rsp_valid <= phase[PH_RAM];
      if (phase[PH_RAM]) begin
        rsp_we          <= we_q;
        rsp_cluster_hit <= hit_q;
        rsp_mapped_row  <= mapped_row_q;
        rsp_mapped_col  <= mapped_col_q;
      end
    end
  end

  assign rsp_rdata = voted;
  assign rsp_bits  = ram_bits;

  a_cfg_idle: assert property (@(posedge clk) disable iff (!rst_n)
    cfg_we |-> (phase == '0));
  a_one_cluster: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(hit));

endmodule
