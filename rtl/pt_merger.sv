// pt_merger -- pT merger of one Track Coincidence module.
//
// For each NSW track it decides which pT becomes the track's candidate pT,
// given the TGC Big Wheel pT and the pT codes returned by the position LUT
// (d-eta:d-phi) and the angle LUT (d-eta:d-theta). The decision is itself a
// block-RAM table addressed by {BW pT, position pT, angle pT}, so the rule
// ("basically the highest pT", with exceptions the operators may want) is
// set by configuration, not by logic. A track flagged absent by the NSW
// gives an invalid candidate.
//
// Timing: trk (the track's tags, already aligned with the LUT outputs) and
// the two LUT pT codes are sampled together; the candidate comes out one
// clock later. Table write port as in matching_lut. The table form follows
// the block diagram (the merger is drawn as BRAM); the address layout is this
// design's choice.
module pt_merger
  import emtrig_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst,
  input  sel_track_t            trk,
  input  logic [PT_W-1:0]       pos_pt,
  input  logic [PT_W-1:0]       ang_pt,
  output cand_t                 cand,
  input  logic                  cfg_we,
  input  logic [MRG_LUT_AW-1:0] cfg_addr,
  input  logic [PT_W-1:0]       cfg_data
);

  logic [PT_W-1:0] pt_rd;
  sel_track_t      trk_q;

  matching_lut #(.AW(MRG_LUT_AW), .DW(PT_W)) u_tbl (
    .clk    (clk),
    .rd_addr({trk.bw_pt, pos_pt, ang_pt}),
    .rd_data(pt_rd),
    .wr_en  (cfg_we),
    .wr_addr(cfg_addr),
    .wr_data(cfg_data)
  );

  always_ff @(posedge clk) begin
    if (rst) trk_q <= '0;
    else     trk_q <= trk;
  end

  always_comb begin
    cand.vld   = trk_q.vld;
    cand.first = trk_q.first;
    cand.last  = trk_q.last;
    cand.idx   = trk_q.idx;
    cand.pt    = trk_q.vld ? pt_rd : '0;
  end

endmodule
