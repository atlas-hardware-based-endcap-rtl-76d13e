// tb_track_coincidence -- loads the position LUT, angle LUT and merger table
// with known contents, feeds random NSW track sets back to back and checks
// every candidate (pT from the two LUTs and the merger, tags) and its tick:
// candidate i must appear after edge E(i+2) of its bunch crossing.
module tb_track_coincidence;
  import emtrig_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b1, rst = 1'b1, bc0 = 1'b0;
  always #1 clk = ~clk;
  logic [ROI_W-1:0] roi_in = '0;
  logic [PT_W-1:0]  bw_pt_in = '0;
  nsw_track_t       trk_in [N_TRK];
  cand_t            cand;
  logic             cfg_we = 1'b0;
  cfg_tbl_e         cfg_tbl = CFG_POS_LUT;
  logic [ANG_LUT_AW-1:0] cfg_addr = '0;
  logic [PT_W-1:0]  cfg_data = '0;
  int checks = 0, failures = 0;

  track_coincidence #(.BASE_IDX(0)) dut (.*);

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_tables();
    cfg_we = 1'b1;
    cfg_tbl = CFG_POS_LUT;
    for (int a = 0; a < 2**POS_LUT_AW; a++) begin
      cfg_addr = ANG_LUT_AW'(a); cfg_data = pos_lut_f(a); @(negedge clk);
    end
    cfg_tbl = CFG_ANG_LUT;
    for (int a = 0; a < 2**ANG_LUT_AW; a++) begin
      cfg_addr = ANG_LUT_AW'(a); cfg_data = ang_lut_f(a); @(negedge clk);
    end
    cfg_tbl = CFG_MERGER;
    for (int a = 0; a < 2**MRG_LUT_AW; a++) begin
      cfg_addr = ANG_LUT_AW'(a); cfg_data = merger_f(a >> 8, (a >> 4) & 15, a & 15); @(negedge clk);
    end
    cfg_we = 1'b0;
  endtask

  cand_t exp_q[$];
  int    nvld = 0;

  initial begin
    foreach (trk_in[i]) trk_in[i] = '0;
    repeat (3) @(negedge clk); rst = 1'b0;
    load_tables();
    for (int ev = 0; ev < 200; ev++) begin
      automatic logic [ROI_W-1:0] roi = ROI_W'($urandom);
      automatic logic [PT_W-1:0]  pt  = PT_W'($urandom);
      nsw_track_t       t [N_TRK];
      foreach (t[i]) begin
        t[i] = nsw_track_t'($urandom);
        t[i].vld = ($urandom % 4) != 0;
      end
      foreach (t[i]) begin
        cand_t e;
        int pa, aa;
        pa = int'({roi, t[i].deta, t[i].dphi});
        aa = int'({roi, t[i].deta, t[i].dtheta});
        e.vld = t[i].vld; e.first = (i == 0); e.last = (i == N_TRK - 1); e.idx = IDX_W'(i);
        e.pt = t[i].vld ? merger_f(pt, pos_lut_f(pa), ang_lut_f(aa)) : '0;
        exp_q.push_back(e);
      end
      bc0 = 1'b1; roi_in = roi; bw_pt_in = pt; trk_in = t;
      for (int k = 0; k < N_TRK; k++) begin
        @(negedge clk);
        bc0 = 1'b0;
        // edge E(k) has passed: candidate k-2 of this set (or 6,7 of the last) is out
        if (ev > 0 || k >= 2) begin
          automatic cand_t e = exp_q.pop_front();
          checks++;
          if (cand.vld) nvld++;
          if (cand !== e) begin
            failures++;
            if (failures < 10) $display("ev %0d k %0d got %p exp %p", ev, k, cand, e);
          end
        end
      end
    end
    repeat (2) begin
      cand_t e;
      @(negedge clk);
      e = exp_q.pop_front();
      checks++;
      if (cand !== e) failures++;
    end
    @(negedge clk);
    checks++; if (cand.vld || cand.first || cand.last) failures++;   // idle
    if (nvld == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
