// track_coincidence -- one Track Coincidence module of the Run 3 NSW coincidence.
//
// Eight NSW tracks are matched against one TGC Big Wheel candidate. The NSW
// Track Selector streams the tracks one per 320 MHz tick; for each track the
// position LUT is addressed with {RoI, d-eta, d-phi} and the angle LUT with
// {RoI, d-eta, d-theta}; one tick later the pT merger table combines the two
// LUT answers with the Big Wheel pT into the track's candidate pT.
//
// Timing: with bc0 sampled on edge E0, candidate i appears on `cand` after
// edge E(i+2), i = 0..7, tagged first (i=0) and last (i=7). A new set may
// start every eight ticks.
// Configuration: cfg_we writes cfg_data into the table chosen by cfg_tbl at
// cfg_addr (low bits used for the smaller tables). Both Track Coincidence
// modules of the design hold identical tables, so the parent broadcasts
// writes. Structure and data flow follow the block diagram of the design;
// field widths and the configuration path are this design's choice.
module track_coincidence
  import emtrig_pkg::*;
#(
  parameter int BASE_IDX = 0
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  bc0,
  input  logic [ROI_W-1:0]      roi_in,
  input  logic [PT_W-1:0]       bw_pt_in,
  input  nsw_track_t            trk_in [N_TRK],
  output cand_t                 cand,
  input  logic                  cfg_we,
  input  cfg_tbl_e              cfg_tbl,
  input  logic [ANG_LUT_AW-1:0] cfg_addr,
  input  logic [PT_W-1:0]       cfg_data
);

  sel_track_t      trk_s;     // from the selector
  sel_track_t      trk_d;     // aligned with the LUT outputs
  logic [PT_W-1:0] pos_pt, ang_pt;

  nsw_track_selector #(.N(N_TRK), .BASE_IDX(BASE_IDX)) u_sel (
    .clk, .rst, .bc0, .roi_in, .bw_pt_in, .trk_in, .out(trk_s)
  );

  matching_lut #(.AW(POS_LUT_AW), .DW(PT_W)) u_pos_lut (
    .clk    (clk),
    .rd_addr({trk_s.roi, trk_s.deta, trk_s.dphi}),
    .rd_data(pos_pt),
    .wr_en  (cfg_we && cfg_tbl == CFG_POS_LUT),
    .wr_addr(cfg_addr[POS_LUT_AW-1:0]),
    .wr_data(cfg_data)
  );

  matching_lut #(.AW(ANG_LUT_AW), .DW(PT_W)) u_ang_lut (
    .clk    (clk),
    .rd_addr({trk_s.roi, trk_s.deta, trk_s.dtheta}),
    .rd_data(ang_pt),
    .wr_en  (cfg_we && cfg_tbl == CFG_ANG_LUT),
    .wr_addr(cfg_addr),
    .wr_data(cfg_data)
  );

  always_ff @(posedge clk) begin
    if (rst) trk_d <= '0;
    else     trk_d <= trk_s;
  end

  pt_merger u_merger (
    .clk, .rst,
    .trk     (trk_d),
    .pos_pt  (pos_pt),
    .ang_pt  (ang_pt),
    .cand    (cand),
    .cfg_we  (cfg_we && cfg_tbl == CFG_MERGER),
    .cfg_addr(cfg_addr[MRG_LUT_AW-1:0]),
    .cfg_data(cfg_data)
  );

endmodule
