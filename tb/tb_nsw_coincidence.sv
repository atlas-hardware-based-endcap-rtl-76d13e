// tb_nsw_coincidence -- end-to-end test of the Run 3 NSW coincidence: tables
// loaded with known contents, one TGC Big Wheel candidate with 16 random NSW
// tracks per bunch crossing, crossings back to back. Checks the selected pT,
// validity and track number, and that each result appears exactly two LHC
// clocks after its inputs were sampled (no earlier, no later).
module tb_nsw_coincidence;
  import emtrig_pkg::*;
  import tb_ref_pkg::*;
  localparam int NEV = 200;
  localparam int NT  = N_TC * N_TRK;
  logic clk320 = 1'b1, clk40 = 1'b1, rst = 1'b1, bc0 = 1'b0;
  always #1 clk320 = ~clk320;
  always #8 clk40  = ~clk40;
  logic [ROI_W-1:0] roi_in = '0;
  logic [PT_W-1:0]  bw_pt_in = '0;
  nsw_track_t       trk_in [NT];
  logic [PT_W-1:0]  pt_out;
  logic             valid_out;
  logic [IDX_W-1:0] idx_out;
  logic             cfg_we = 1'b0;
  cfg_tbl_e         cfg_tbl = CFG_POS_LUT;
  logic [ANG_LUT_AW-1:0] cfg_addr = '0;
  logic [PT_W-1:0]  cfg_data = '0;
  int checks = 0, failures = 0;
  int n_tc1 = 0, n_none = 0;

  nsw_coincidence dut (.*);

  typedef struct { logic v; logic [PT_W-1:0] pt; logic [IDX_W-1:0] idx; } res_t;
  res_t             r   [NEV];
  nsw_track_t       trk [NEV][NT];
  logic [ROI_W-1:0] roi [NEV];
  logic [PT_W-1:0]  bpt [NEV];
  int  p = 0, n = 0;
  bit  running = 0;
  int  n0 = 0;      // LHC edge at which crossing 0 is sampled

  initial begin : watchdog
    repeat (300000) @(posedge clk320);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int ev = 0; ev < NEV; ev++) begin
      roi[ev] = ROI_W'($urandom);
      bpt[ev] = PT_W'($urandom);
      foreach (trk[ev][i]) begin
        trk[ev][i] = nsw_track_t'($urandom);
        trk[ev][i].vld = (ev % 7 == 3) ? 1'b0 : (($urandom % 3) == 0);
      end
      r[ev].v = 0; r[ev].pt = '0; r[ev].idx = '0;
      for (int k = 0; k < N_TRK; k++) for (int m = 0; m < N_TC; m++) begin
        int t, pt;
        t  = m * N_TRK + k;
        pt = merger_f(bpt[ev], pos_lut_f(int'({roi[ev], trk[ev][t].deta, trk[ev][t].dphi})),
                      ang_lut_f(int'({roi[ev], trk[ev][t].deta, trk[ev][t].dtheta})));
        if (trk[ev][t].vld && (!r[ev].v || pt > int'(r[ev].pt))) begin
          r[ev].v = 1; r[ev].pt = PT_W'(pt); r[ev].idx = IDX_W'(t);
        end
      end
      if (!r[ev].v) n_none++;
      else if (r[ev].idx >= N_TRK) n_tc1++;
    end
  end

  always @(posedge clk320) p++;
  always @(posedge clk40) n++;

  initial begin
    foreach (trk_in[i]) trk_in[i] = '0;
    repeat (3) @(negedge clk320); rst = 1'b0;
    cfg_we = 1'b1;
    cfg_tbl = CFG_POS_LUT;
    for (int a = 0; a < 2**POS_LUT_AW; a++) begin
      cfg_addr = ANG_LUT_AW'(a); cfg_data = pos_lut_f(a); @(negedge clk320);
    end
    cfg_tbl = CFG_ANG_LUT;
    for (int a = 0; a < 2**ANG_LUT_AW; a++) begin
      cfg_addr = ANG_LUT_AW'(a); cfg_data = ang_lut_f(a); @(negedge clk320);
    end
    cfg_tbl = CFG_MERGER;
    for (int a = 0; a < 2**MRG_LUT_AW; a++) begin
      cfg_addr = ANG_LUT_AW'(a); cfg_data = merger_f(a >> 8, (a >> 4) & 15, a & 15); @(negedge clk320);
    end
    cfg_we = 1'b0;
    // wait for the negedge just before a 320 MHz edge that is an LHC edge
    while ((p + 1) % 8 != 0) @(negedge clk320);
    n0 = (p + 1) / 8;
    for (int ev = 0; ev < NEV; ev++) begin
      bc0 = 1'b1; roi_in = roi[ev]; bw_pt_in = bpt[ev]; trk_in = trk[ev];
      @(negedge clk320);
      bc0 = 1'b0;
      foreach (trk_in[i]) trk_in[i] = nsw_track_t'($urandom);  // must not matter
      roi_in = ROI_W'($urandom);
      repeat (7) @(negedge clk320);
    end
  end

  // After LHC edge n the output must hold crossing n - n0 - 2.
  always @(negedge clk40) begin
    if (n0 > 0 && n - n0 - 2 >= 0 && n - n0 - 2 < NEV) begin
      automatic res_t e = r[n - n0 - 2];
      checks++;
      if (valid_out !== e.v || (e.v && (pt_out !== e.pt || idx_out !== e.idx))) begin
        failures++;
        if (failures < 10) $display("crossing %0d: got v%0d pt %0d idx %0d, exp v%0d pt %0d idx %0d",
                                    n - n0 - 2, valid_out, pt_out, idx_out, e.v, e.pt, e.idx);
      end
    end
    if (n0 > 0 && n - n0 - 2 == NEV) begin
      if (n_none == 0 || n_tc1 == 0) failures++;
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
