// endcap_sl_top -- endcap muon Sector Logic trigger firmware, both generations.
//
// Holds the two trigger engines of the endcap Sector Logic:
//  * nsw_coincidence (Run 3, 320 MHz): refines the pT of a TGC Big Wheel
//    candidate with up to 16 NSW tracks by position and angle matching,
//    result two LHC clocks after the inputs;
//  * tgc_track_reco (HL-LHC, 160 MHz): reconstructs TGC wire track segments
//    from all Big Wheel hits by station coincidence and pattern-list look-up
//    in N_UNITS Units, result six 160 MHz ticks after the hits.
// In the real system the two engines live on different boards and eras and
// share nothing; this top only gathers them so one design holds every block.
// Everything that feeds them (optical links, G-Link and GTX/GTY receivers,
// the Big Wheel coincidence, the NSW decoder, control processors) is outside
// this design and appears as ports.
// Clocks: clk320/clk40 synchronous and phase-aligned, bc0_320 high on the
// 320 MHz tick that coincides with a clk40 edge; clk160 with bc0_160 high on
// the first of the four 160 MHz ticks of a bunch crossing.
module endcap_sl_top
  import emtrig_pkg::*;
#(
  parameter int N_UNITS_P = N_UNITS,
  localparam int UW = (N_UNITS_P > 1) ? $clog2(N_UNITS_P) : 1
) (
  // ---- Run 3 NSW coincidence ----
  input  logic                    clk320,
  input  logic                    clk40,
  input  logic                    rst320,
  input  logic                    bc0_320,
  input  logic [ROI_W-1:0]        bw_roi,
  input  logic [PT_W-1:0]         bw_pt,
  input  nsw_track_t              nsw_trk [N_TC*N_TRK],
  output logic [PT_W-1:0]         nsw_pt_out,
  output logic                    nsw_valid_out,
  output logic [IDX_W-1:0]        nsw_idx_out,
  input  logic                    nsw_cfg_we,
  input  cfg_tbl_e                nsw_cfg_tbl,
  input  logic [ANG_LUT_AW-1:0]   nsw_cfg_addr,
  input  logic [PT_W-1:0]         nsw_cfg_data,
  // ---- HL-LHC TGC track reconstruction ----
  input  logic                    clk160,
  input  logic                    rst160,
  input  logic                    bc0_160,
  input  logic [M1_BUS-1:0]       wire_m1 [N_UNITS_P],
  input  logic [M2_BUS-1:0]       wire_m2 [N_UNITS_P],
  input  logic [M3_BUS-1:0]       wire_m3 [N_UNITS_P][N_SUB],
  input  logic                    tgc_cfg_we,
  input  logic [UW-1:0]           tgc_cfg_unit,
  input  logic [1:0]              tgc_cfg_sub,
  input  logic [RAM_AW-1:0]       tgc_cfg_addr,
  input  segment_t                tgc_cfg_data,
  output segment_t                seg_out   [N_UNITS_P][N_SUB][SEG_PER_TICK],
  output logic [SEG_PER_TICK-1:0] seg_vld   [N_UNITS_P][N_SUB],
  output logic                    seg_first [N_UNITS_P][N_SUB]
);

  nsw_coincidence u_nsw (
    .clk320, .clk40, .rst(rst320), .bc0(bc0_320),
    .roi_in(bw_roi), .bw_pt_in(bw_pt), .trk_in(nsw_trk),
    .pt_out(nsw_pt_out), .valid_out(nsw_valid_out), .idx_out(nsw_idx_out),
    .cfg_we(nsw_cfg_we), .cfg_tbl(nsw_cfg_tbl), .cfg_addr(nsw_cfg_addr), .cfg_data(nsw_cfg_data)
  );

  tgc_track_reco #(.N_UNITS_P(N_UNITS_P)) u_tgc (
    .clk(clk160), .rst(rst160), .bc0(bc0_160),
    .wire_m1, .wire_m2, .wire_m3,
    .cfg_we(tgc_cfg_we), .cfg_unit(tgc_cfg_unit), .cfg_sub(tgc_cfg_sub),
    .cfg_addr(tgc_cfg_addr), .cfg_data(tgc_cfg_data),
    .seg_out, .seg_vld, .seg_first
  );

endmodule
