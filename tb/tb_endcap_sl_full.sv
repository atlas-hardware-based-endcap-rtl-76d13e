// tb_endcap_sl_full -- the end-to-end test of tb_endcap_sl_top run on the
// top level at its full size: no parameter overrides, so the TGC engine has
// all 92 Units. Only Units 0, 46 and 91 get their pattern-list memories
// written (writing all 92 x 4 x 4096 words would dominate the run time); the
// other Units must return all-zero segments from their power-up contents but
// with exactly the same valid flags, so the address path of every Unit is
// still checked. The NSW coincidence side is the same as in the reduced test.
// Every mechanism counter must be non-zero.
module tb_endcap_sl_full;
  import emtrig_pkg::*;
  import tb_ref_pkg::*;
  localparam int NU      = N_UNITS;
  localparam int NEV     = 40;
  localparam int NEV_NSW = 150;
  localparam int NT      = N_TC * N_TRK;
  localparam int UW      = (NU > 1) ? $clog2(NU) : 1;

  // ---------------- clocks: LHC edge n = 320 MHz edge 8n = 160 MHz edge 4n
  logic clk320 = 1'b1, clk40 = 1'b1, clk160 = 1'b1;
  always #1 clk320 = ~clk320;
  always #2 clk160 = ~clk160;
  always #8 clk40  = ~clk40;
  logic rst320 = 1'b1, rst160 = 1'b1, bc0_320 = 1'b0, bc0_160 = 1'b0;

  logic [ROI_W-1:0] bw_roi = '0;
  logic [PT_W-1:0]  bw_pt = '0;
  nsw_track_t       nsw_trk [NT];
  logic [PT_W-1:0]  nsw_pt_out;
  logic             nsw_valid_out;
  logic [IDX_W-1:0] nsw_idx_out;
  logic             nsw_cfg_we = 1'b0;
  cfg_tbl_e         nsw_cfg_tbl = CFG_POS_LUT;
  logic [ANG_LUT_AW-1:0] nsw_cfg_addr = '0;
  logic [PT_W-1:0]  nsw_cfg_data = '0;

  logic [M1_BUS-1:0] wire_m1 [NU];
  logic [M2_BUS-1:0] wire_m2 [NU];
  logic [M3_BUS-1:0] wire_m3 [NU][N_SUB];
  logic              tgc_cfg_we = 1'b0;
  logic [UW-1:0]     tgc_cfg_unit = '0;
  logic [1:0]        tgc_cfg_sub = '0;
  logic [RAM_AW-1:0] tgc_cfg_addr = '0;
  segment_t          tgc_cfg_data = '0;
  segment_t          seg_out   [NU][N_SUB][SEG_PER_TICK];
  logic [1:0]        seg_vld   [NU][N_SUB];
  logic              seg_first [NU][N_SUB];

  endcap_sl_top dut (.*);

  int checks = 0, failures = 0;
  // mechanism counters
  int n_tc0 = 0, n_tc1 = 0, n_none = 0, n_tie = 0;
  int n_pat [N_PAT];
  int n_drop = 0, n_win = 0, n_empty = 0, n_full = 0, n_seg = 0;
  bit nsw_done = 0, tgc_done = 0;

  initial begin : watchdog
    repeat (2000000) @(posedge clk320);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit loaded(int u);
    return u == 0 || u == NU - 1 || u == NU / 2;
  endfunction

  // ================= Run 3 NSW coincidence =================
  typedef struct { logic v; logic [PT_W-1:0] pt; logic [IDX_W-1:0] idx; } res_t;
  res_t             r   [NEV_NSW];
  nsw_track_t       trk [NEV_NSW][NT];
  logic [ROI_W-1:0] roi [NEV_NSW];
  logic [PT_W-1:0]  bpt [NEV_NSW];
  int p320 = 0, n40 = 0, n0 = 0;

  always @(posedge clk320) p320++;
  always @(posedge clk40) n40++;

  initial begin
    for (int ev = 0; ev < NEV_NSW; ev++) begin
      roi[ev] = ROI_W'($urandom);
      bpt[ev] = PT_W'($urandom);
      foreach (trk[ev][i]) begin
        trk[ev][i] = nsw_track_t'($urandom);
        trk[ev][i].vld = (ev % 9 == 4) ? 1'b0 : (($urandom % 3) == 0);
      end
      r[ev].v = 0; r[ev].pt = '0; r[ev].idx = '0;
      for (int k = 0; k < N_TRK; k++) for (int m = 0; m < N_TC; m++) begin
        automatic int t = m * N_TRK + k;
        automatic int pt = merger_f(bpt[ev], pos_lut_f(int'({roi[ev], trk[ev][t].deta, trk[ev][t].dphi})),
                                    ang_lut_f(int'({roi[ev], trk[ev][t].deta, trk[ev][t].dtheta})));
        if (trk[ev][t].vld && r[ev].v && pt == int'(r[ev].pt)) n_tie++;
        if (trk[ev][t].vld && (!r[ev].v || pt > int'(r[ev].pt))) begin
          r[ev].v = 1; r[ev].pt = PT_W'(pt); r[ev].idx = IDX_W'(t);
        end
      end
      if (!r[ev].v) n_none++;
      else if (r[ev].idx >= N_TRK) n_tc1++;
      else n_tc0++;
    end
  end

  initial begin
    foreach (nsw_trk[i]) nsw_trk[i] = '0;
    repeat (3) @(negedge clk320); rst320 = 1'b0;
    nsw_cfg_we = 1'b1;
    nsw_cfg_tbl = CFG_POS_LUT;
    for (int a = 0; a < 2**POS_LUT_AW; a++) begin
      nsw_cfg_addr = ANG_LUT_AW'(a); nsw_cfg_data = pos_lut_f(a); @(negedge clk320);
    end
    nsw_cfg_tbl = CFG_ANG_LUT;
    for (int a = 0; a < 2**ANG_LUT_AW; a++) begin
      nsw_cfg_addr = ANG_LUT_AW'(a); nsw_cfg_data = ang_lut_f(a); @(negedge clk320);
    end
    nsw_cfg_tbl = CFG_MERGER;
    for (int a = 0; a < 2**MRG_LUT_AW; a++) begin
      nsw_cfg_addr = ANG_LUT_AW'(a); nsw_cfg_data = merger_f(a >> 8, (a >> 4) & 15, a & 15);
      @(negedge clk320);
    end
    nsw_cfg_we = 1'b0;
    while ((p320 + 1) % 8 != 0) @(negedge clk320);
    n0 = (p320 + 1) / 8;
    for (int ev = 0; ev < NEV_NSW; ev++) begin
      bc0_320 = 1'b1; bw_roi = roi[ev]; bw_pt = bpt[ev]; nsw_trk = trk[ev];
      @(negedge clk320);
      bc0_320 = 1'b0;
      foreach (nsw_trk[i]) nsw_trk[i] = nsw_track_t'($urandom);   // must not matter
      bw_roi = ROI_W'($urandom);
      repeat (7) @(negedge clk320);
    end
  end

  // after LHC edge n the output holds crossing n - n0 - 2
  always @(negedge clk40) begin
    if (n0 > 0 && n40 - n0 - 2 >= 0 && n40 - n0 - 2 < NEV_NSW) begin
      automatic res_t e = r[n40 - n0 - 2];
      checks++;
      if (nsw_valid_out !== e.v || (e.v && (nsw_pt_out !== e.pt || nsw_idx_out !== e.idx))) begin
        failures++;
        if (failures < 10) $display("NSW crossing %0d: got v%0d pt %0d idx %0d, exp v%0d pt %0d idx %0d",
                                    n40 - n0 - 2, nsw_valid_out, nsw_pt_out, nsw_idx_out, e.v, e.pt, e.idx);
      end
    end
    if (n0 > 0 && n40 - n0 - 2 == NEV_NSW) nsw_done = 1;
  end

  // ================= HL-LHC TGC track reconstruction =================
  logic [M1_BUS-1:0] w1 [NEV][NU];
  logic [M2_BUS-1:0] w2 [NEV][NU];
  logic [M3_BUS-1:0] w3 [NEV][NU][N_SUB];
  int_q              ea [NEV][NU][N_SUB];
  int p160 = 0, p0 = -1;

  always @(posedge clk160) p160++;

  initial begin
    foreach (n_pat[i]) n_pat[i] = 0;
    for (int ev = 0; ev < NEV; ev++)
      for (int u = 0; u < NU; u++) begin
        w1[ev][u] = gen_station(3, 32, 100, (ev + u) % 4, 90, (ev % 3) * 3);
        w2[ev][u] = M2_BUS'(gen_station(2, 16, 35, 1 + $urandom % 2, 90, (ev % 3) * 3));
        for (int s = 0; s < N_SUB; s++) begin
          automatic int_q pats;
          automatic int_q all1 = ref_coin(w1[ev][u], 3, 32, 3, 2, 1);
          automatic int w0 = m1_window_start(s);
          w3[ev][u][s] = M3_BUS'(gen_station(2, 2, 7, $urandom % 2, 90, (ev % 3) * 5));
          ea[ev][u][s] = ref_unit(w1[ev][u], w2[ev][u], w3[ev][u][s], s, pats);
          foreach (pats[i]) if (pats[i] < 0) n_drop++; else n_pat[pats[i]]++;
          foreach (all1[i]) if (all1[i] < w0 || all1[i] >= w0 + M1_WIN) n_win++;
          if (ea[ev][u][s].size() == 0) n_empty++;
          if (ea[ev][u][s].size() == N_SEG) n_full++;
        end
      end
  end

  initial begin
    foreach (wire_m1[u]) begin
      wire_m1[u] = '0; wire_m2[u] = '0;
      foreach (wire_m3[u][s]) wire_m3[u][s] = '0;
    end
    repeat (3) @(negedge clk160); rst160 = 1'b0;
    for (int u = 0; u < NU; u++)
      if (loaded(u))
        for (int s = 0; s < N_SUB; s++)
          for (int a = 0; a < 2**RAM_AW; a++) begin
            tgc_cfg_we = 1'b1; tgc_cfg_unit = UW'(u); tgc_cfg_sub = 2'(s);
            tgc_cfg_addr = RAM_AW'(a); tgc_cfg_data = seg_f(u, s, a);
            @(negedge clk160);
          end
    tgc_cfg_we = 1'b0;
    while ((p160 + 1) % 4 != 0) @(negedge clk160);
    p0 = p160 + 1;
    for (int ev = 0; ev < NEV; ev++) begin
      bc0_160 = 1'b1;
      for (int u = 0; u < NU; u++) begin
        wire_m1[u] = w1[ev][u]; wire_m2[u] = w2[ev][u]; wire_m3[u] = w3[ev][u];
      end
      @(negedge clk160);
      bc0_160 = 1'b0;
      foreach (wire_m1[u]) wire_m1[u] = gen_station(3, 32, 100, 2, 90, 20);  // must not matter
      repeat (3) @(negedge clk160);
    end
  end

  // after 160 MHz edge p: pair k of crossing m, with p = p0 + 4m + 3 + k
  always @(negedge clk160) begin
    if (p0 >= 0 && p160 >= p0 + 3) begin
      automatic int q = p160 - p0 - 3;
      automatic int m = q / 4;
      automatic int k = q % 4;
      if (m < NEV) begin
        for (int u = 0; u < NU; u++)
          for (int s = 0; s < N_SUB; s++) begin
            checks++;
            if (seg_first[u][s] !== (k == 0)) failures++;
            for (int l = 0; l < SEG_PER_TICK; l++) begin
              automatic int j = 2 * k + l;
              automatic bit ev_ = j < ea[m][u][s].size();
              automatic segment_t es = '0;
              if (ev_) begin
                n_seg++;
                if (loaded(u)) es = seg_f(u, s, ea[m][u][s][j]);
              end
              if (seg_vld[u][s][l] !== ev_ || (ev_ && seg_out[u][s][l] !== es)) begin
                failures++;
                if (failures < 10) $display("TGC crossing %0d unit %0d sub %0d slot %0d: got v%0d %h, exp %p",
                                            m, u, s, j, seg_vld[u][s][l], seg_out[u][s][l], ea[m][u][s]);
              end
            end
          end
      end else tgc_done = 1;
    end
  end

  // ================= end of test =================
  initial begin
    wait (nsw_done && tgc_done);
    $display("NSW: winner TC0 %0d, winner TC1 %0d, no track %0d, ties %0d", n_tc0, n_tc1, n_none, n_tie);
    $display("TGC: patterns %p, dropped %0d, outside window %0d, empty %0d, full %0d, segments %0d",
             n_pat, n_drop, n_win, n_empty, n_full, n_seg);
    if (n_tc0 == 0 || n_tc1 == 0 || n_none == 0 || n_tie == 0) failures++;
    foreach (n_pat[i]) if (n_pat[i] == 0) failures++;
    if (n_drop == 0 || n_win == 0 || n_empty == 0 || n_full == 0 || n_seg == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
