// emtrig_pkg -- shared types and constants of the endcap muon trigger logic.
//
// Two engines use this package:
//  * the Run 3 NSW coincidence, which refines the pT of one TGC Big Wheel
//    candidate with up to 16 New Small Wheel (NSW) tracks inside two LHC
//    clocks, running at 320 MHz (8 ticks per 40 MHz bunch crossing);
//  * the HL-LHC TGC track reconstruction, which forms station Position IDs,
//    combines them into 12-bit pattern-list addresses and reads 18-bit track
//    segments from one memory per Subunit, running at 160 MHz (4 ticks per
//    bunch crossing).
// Counts that come from the design description (8 tracks per Track
// Coincidence module, 2 modules, 8/16/32 channels per layer, 5/5/2-bit
// Position IDs, 12-bit address, 18-bit segment, 8 candidates per Subunit)
// are fixed here. Field widths of the Run 3 side (RoI, pT code, NSW deltas)
// are this design's own choice.
package emtrig_pkg;

  // ------------------------------------------------------------------
  // Run 3 NSW coincidence
  // ------------------------------------------------------------------
  localparam int ROI_W    = 8;   // TGC-BW region of interest within a sector
  localparam int PT_W     = 4;   // pT threshold code, larger = higher pT
  localparam int DETA_W   = 4;   // NSW - TGC-BW position difference in eta
  localparam int DPHI_W   = 3;   // NSW - TGC-BW position difference in phi
  localparam int DTHETA_W = 4;   // NSW angle d-theta
  localparam int N_TRK    = 8;   // NSW tracks per Track Coincidence module
  localparam int N_TC     = 2;   // Track Coincidence modules
  localparam int TICKS320 = 8;   // 320 MHz ticks per LHC clock
  localparam int IDX_W    = $clog2(N_TRK * N_TC);

  localparam int POS_LUT_AW = ROI_W + DETA_W + DPHI_W;    // LUT (d-eta:d-phi)
  localparam int ANG_LUT_AW = ROI_W + DETA_W + DTHETA_W;  // LUT (d-eta:d-theta)
  localparam int MRG_LUT_AW = 3 * PT_W;                   // pT merger table

  typedef struct packed {
    logic                vld;
    logic [DETA_W-1:0]   deta;
    logic [DPHI_W-1:0]   dphi;
    logic [DTHETA_W-1:0] dtheta;
  } nsw_track_t;

  // One NSW track on its way through a Track Coincidence module.
  typedef struct packed {
    logic                vld;     // NSW track present
    logic                first;   // first track of this bunch crossing
    logic                last;    // last track of this bunch crossing
    logic [IDX_W-1:0]    idx;     // NSW track number 0..15
    logic [ROI_W-1:0]    roi;
    logic [PT_W-1:0]     bw_pt;   // TGC-BW pT of the candidate
    logic [DETA_W-1:0]   deta;
    logic [DPHI_W-1:0]   dphi;
    logic [DTHETA_W-1:0] dtheta;
  } sel_track_t;

  // A merged pT candidate sent to the pT Selection.
  typedef struct packed {
    logic             vld;
    logic             first;
    logic             last;
    logic [IDX_W-1:0] idx;
    logic [PT_W-1:0]  pt;
  } cand_t;

  // Configuration targets of the Run 3 tables.
  typedef enum logic [1:0] {
    CFG_POS_LUT = 2'd0,
    CFG_ANG_LUT = 2'd1,
    CFG_MERGER  = 2'd2
  } cfg_tbl_e;

  // ------------------------------------------------------------------
  // HL-LHC TGC track reconstruction
  // ------------------------------------------------------------------
  localparam int M1_LAYERS = 3, M2_LAYERS = 2, M3_LAYERS = 2;
  localparam int M1_CH = 32, M2_CH = 16, M3_CH = 2;     // M3: per Subunit
  localparam int N_SUB = 4;                             // Subunits per Unit
  localparam int M1_BUS = 100, M2_BUS = 35, M3_BUS = 7; // wire_M1/M2/M3 widths
  localparam int M1_POS = M1_LAYERS * M1_CH;            // 96 Position IDs
  localparam int M2_POS = M2_LAYERS * M2_CH;            // 32 Position IDs
  localparam int M3_POS = M3_LAYERS * M3_CH;            // 4 per Subunit
  localparam int M1_ID_W = 5, M2_ID_W = 5, M3_ID_W = 2; // address fields
  localparam int M1_FULL_W = $clog2(M1_POS);            // 7-bit full M1 index
  localparam int M1_WIN = 1 << M1_ID_W;                 // 32 M1 positions per Subunit
  localparam int RAM_AW = M1_ID_W + M2_ID_W + M3_ID_W;  // 12
  localparam int N_SEG = 8;                             // segments per Subunit per BC
  localparam int SEG_PER_TICK = 2;
  localparam int TICKS160 = 4;                          // 160 MHz ticks per LHC clock
  localparam int N_PAT = 8;                             // coincidence patterns
  localparam int N_UNITS = 92;                          // Units per Sector Logic

  typedef struct packed {
    logic [1:0] flag;      // successfully reconstructed flag
    logic [3:0] r_m3;      // position R in M3
    logic [7:0] dtheta;    // delta theta
    logic [3:0] pt_thr;    // pT threshold
  } segment_t;
  localparam int SEG_W = $bits(segment_t);               // 18

  // Coincidence-type index per station: 0 = all layers, 1 = one fewer, 2 = two fewer.
  // Table I rows as {M1 type, M2 type, M3 type}, in priority order.
  typedef logic [1:0] ctype_t;
  localparam ctype_t PAT_M1 [N_PAT] = '{2'd0, 2'd1, 2'd0, 2'd0, 2'd1, 2'd1, 2'd0, 2'd2};
  localparam ctype_t PAT_M2 [N_PAT] = '{2'd0, 2'd0, 2'd1, 2'd0, 2'd1, 2'd0, 2'd1, 2'd0};
  localparam ctype_t PAT_M3 [N_PAT] = '{2'd0, 2'd0, 2'd0, 2'd1, 2'd0, 2'd1, 2'd1, 2'd0};

  // First M1 fine position of the 32-wide window a Subunit combines.
  function automatic int m1_window_start(int sub);
    return (sub * (M1_POS - M1_WIN)) / (N_SUB - 1);
  endfunction

endpackage
