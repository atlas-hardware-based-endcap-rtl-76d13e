// nsw_coincidence -- Run 3 NSW coincidence: pT refinement of one TGC Big Wheel
// candidate with up to 16 New Small Wheel tracks inside two LHC clocks.
//
// Two Track Coincidence modules, each with its own copy of identical tables,
// take eight NSW tracks each and stream them through the position LUT
// (d-eta:d-phi), the angle LUT (d-eta:d-theta) and the pT merger at
// 320 MHz, eight times the LHC clock. The pT Selection folds the two
// candidate streams into the highest pT and returns it to the 40 MHz domain.
// This serial-parallel mix needs two table copies instead of sixteen and
// still finishes 16 tracks in one LHC clock of processing.
//
// Interface: roi_in, bw_pt_in and trk_in[0..15] are sampled on the 320 MHz
// edge where bc0 is high, which must coincide with a clk40 rising edge
// (clk320 and clk40 synchronous and phase-aligned). pt_out/valid_out/idx_out
// change on clk40 exactly two LHC clocks after that edge. Configuration
// writes go to both modules at once.
// The module split, clock ratio and two-clock budget follow the design
// description; widths, strobe and configuration path are this design's own.
module nsw_coincidence
  import emtrig_pkg::*;
(
  input  logic                  clk320,
  input  logic                  clk40,
  input  logic                  rst,
  input  logic                  bc0,
  input  logic [ROI_W-1:0]      roi_in,
  input  logic [PT_W-1:0]       bw_pt_in,
  input  nsw_track_t            trk_in [N_TC*N_TRK],
  output logic [PT_W-1:0]       pt_out,
  output logic                  valid_out,
  output logic [IDX_W-1:0]      idx_out,
  input  logic                  cfg_we,
  input  cfg_tbl_e              cfg_tbl,
  input  logic [ANG_LUT_AW-1:0] cfg_addr,
  input  logic [PT_W-1:0]       cfg_data
);

  cand_t cand [N_TC];

  for (genvar m = 0; m < N_TC; m++) begin : g_tc
    nsw_track_t trk_m [N_TRK];
    for (genvar i = 0; i < N_TRK; i++) begin : g_map
      assign trk_m[i] = trk_in[m*N_TRK + i];
    end
    track_coincidence #(.BASE_IDX(m * N_TRK)) u_tc (
      .clk(clk320), .rst, .bc0, .roi_in, .bw_pt_in,
      .trk_in(trk_m), .cand(cand[m]),
      .cfg_we, .cfg_tbl, .cfg_addr, .cfg_data
    );
  end

  pt_selection u_sel (
    .clk(clk320), .clk_lhc(clk40), .rst,
    .cand, .pt_out, .valid_out, .idx_out
  );

endmodule
