// Shared types and constants of the RM-CAM + TMR memory repair structure.
//
// The configuration port loads the repair tables that an offline analysis
// of the tester's defect map has produced: the four range CAMs (one bound
// per cluster rectangle each), the two-columns ROM (placement vectors) and
// the three-columns ROM (TMR column triples). cfg_target_e selects which of
// these a configuration write goes to. The encoding is this design's own.
//
// The five evaluation phases follow the phase names phi1..phi5 of the
// mapping structure: phi1 CAM search, phi2 vector ROM, phi3 decoders,
// phi4 TMR column ROM, phi5 RAM access.
package rmcam_pkg;

  typedef enum logic [2:0] {
    CFG_LOWER_ROW = 3'd0,  // lower bound of a cluster's row range
    CFG_UPPER_ROW = 3'd1,  // upper bound of a cluster's row range
    CFG_LOWER_COL = 3'd2,  // lower bound of a cluster's column range
    CFG_UPPER_COL = 3'd3,  // upper bound of a cluster's column range
    CFG_VEC_ROM   = 3'd4,  // placement vectors {row_vec, col_vec} of a cluster
    CFG_TMR_ROM   = 3'd5   // three physical columns {i, j, k} of a logical column
  } cfg_target_e;

  localparam int unsigned NUM_PHASES = 5;

  typedef enum logic [2:0] {
    PH_CAM   = 3'd0,  // phi1
    PH_VEC   = 3'd1,  // phi2
    PH_DEC   = 3'd2,  // phi3
    PH_TMR   = 3'd3,  // phi4
    PH_RAM   = 3'd4   // phi5
  } phase_e;

endpackage
