// nsw_track_selector -- NSW Track Selector of one Track Coincidence module.
//
// Once per LHC clock (marked by the bc0 strobe) it captures up to eight NSW
// track candidates together with the RoI and pT of the TGC Big Wheel
// candidate, then sends the tracks one per 320 MHz tick to the position- and
// angle-matching LUTs. Eight tracks at eight ticks per LHC clock keep the
// stream continuous, so one set of LUTs serves all eight tracks; this is how
// the design saves memory against eight parallel LUT copies while still
// meeting the latency budget.
//
// Interface: trk_in[] is sampled on the 320 MHz edge where bc0 is high; the
// same edge puts track 0 on `out` (first=1), the next seven edges put tracks
// 1..7 (last=1 on track 7). Between sets `out` carries nothing (all tags 0).
// BASE_IDX numbers the tracks 0..7 or 8..15 for the second module.
// Serial processing and the 8:1 clock ratio follow the design description;
// the registered single-cycle hand-off and the tag fields are this design's
// choice.
module nsw_track_selector
  import emtrig_pkg::*;
#(
  parameter int N        = N_TRK,
  parameter int BASE_IDX = 0
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  bc0,
  input  logic [ROI_W-1:0]      roi_in,
  input  logic [PT_W-1:0]       bw_pt_in,
  input  nsw_track_t            trk_in [N],
  output sel_track_t            out
);

  localparam int CNT_W = $clog2(N + 1);
  localparam int SEL_W = (N > 1) ? $clog2(N) : 1;

  nsw_track_t         buf_q [N];
  logic [ROI_W-1:0]   roi_q;
  logic [PT_W-1:0]    pt_q;
  logic [CNT_W-1:0]   cnt_q;     // next track to send; N = idle

  function automatic sel_track_t pack(nsw_track_t t, int i, logic [ROI_W-1:0] roi,
                                      logic [PT_W-1:0] pt);
    sel_track_t s;
    s.vld    = t.vld;
    s.first  = (i == 0);
    s.last   = (i == N - 1);
    s.idx    = IDX_W'(BASE_IDX + i);
    s.roi    = roi;
    s.bw_pt  = pt;
    s.deta   = t.deta;
    s.dphi   = t.dphi;
    s.dtheta = t.dtheta;
    return s;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt_q <= CNT_W'(N);
      out   <= '0;
    end else if (bc0) begin
      buf_q <= trk_in;
      roi_q <= roi_in;
      pt_q  <= bw_pt_in;
      out   <= pack(trk_in[0], 0, roi_in, bw_pt_in);
      cnt_q <= CNT_W'(1);
    end else if (cnt_q < CNT_W'(N)) begin
      out   <= pack(buf_q[cnt_q[SEL_W-1:0]], int'(cnt_q), roi_q, pt_q);
      cnt_q <= cnt_q + 1'b1;
    end else begin
      out   <= '0;
    end
  end

endmodule
