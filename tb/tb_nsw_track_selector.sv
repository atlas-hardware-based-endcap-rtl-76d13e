// tb_nsw_track_selector -- checks that eight captured NSW tracks leave one per
// tick in order, with RoI, BW pT, track number and first/last tags, that the
// stream is continuous for back-to-back bunch crossings, and idle otherwise.
module tb_nsw_track_selector;
  import emtrig_pkg::*;
  logic clk = 1'b1, rst = 1'b1, bc0 = 1'b0;
  always #1 clk = ~clk;
  logic [ROI_W-1:0] roi_in = '0;
  logic [PT_W-1:0]  bw_pt_in = '0;
  nsw_track_t       trk_in [N_TRK];
  sel_track_t       out;
  int checks = 0, failures = 0;

  nsw_track_selector #(.N(N_TRK), .BASE_IDX(8)) dut (.*);

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(sel_track_t got, sel_track_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("%0t got %p exp %p", $time, got, exp);
    end
  endtask

  initial begin
    foreach (trk_in[i]) trk_in[i] = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int ev = 0; ev < 40; ev++) begin
      nsw_track_t       t [N_TRK];
      automatic logic [ROI_W-1:0] roi = ROI_W'($urandom);
      automatic logic [PT_W-1:0]  pt  = PT_W'($urandom);
      foreach (t[i]) t[i] = nsw_track_t'($urandom);
      bc0 = 1'b1; trk_in = t; roi_in = roi; bw_pt_in = pt;
      for (int i = 0; i < N_TRK; i++) begin
        sel_track_t e;
        @(negedge clk);
        bc0 = 1'b0;
        foreach (trk_in[j]) trk_in[j] = nsw_track_t'($urandom);  // must not matter
        roi_in = ROI_W'($urandom);
        e.vld = t[i].vld; e.first = (i == 0); e.last = (i == N_TRK - 1);
        e.idx = IDX_W'(8 + i); e.roi = roi; e.bw_pt = pt;
        e.deta = t[i].deta; e.dphi = t[i].dphi; e.dtheta = t[i].dtheta;
        check(out, e);
      end
      if (ev % 4 == 3) begin  // gap: output must be idle
        repeat (1 + $urandom % 3) begin
          @(negedge clk);
          check(out, '0);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
