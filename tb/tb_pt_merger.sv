// tb_pt_merger -- loads the merger table with a rule (highest pT, vetoed by a
// zero angle pT), then checks candidates one clock after their inputs,
// including tag pass-through and invalid tracks.
module tb_pt_merger;
  import emtrig_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b1, rst = 1'b1;
  always #1 clk = ~clk;
  sel_track_t trk = '0;
  logic [PT_W-1:0] pos_pt = '0, ang_pt = '0;
  cand_t cand;
  logic cfg_we = 1'b0;
  logic [MRG_LUT_AW-1:0] cfg_addr = '0;
  logic [PT_W-1:0] cfg_data = '0;
  int checks = 0, failures = 0;

  pt_merger dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk); rst = 1'b0;
    for (int a = 0; a < 2**MRG_LUT_AW; a++) begin
      cfg_we = 1'b1; cfg_addr = MRG_LUT_AW'(a);
      cfg_data = merger_f(a >> 8, (a >> 4) & 15, a & 15);
      @(negedge clk);
    end
    cfg_we = 1'b0;
    for (int i = 0; i < 2000; i++) begin
      cand_t e;
      trk = sel_track_t'({$urandom, $urandom});
      pos_pt = PT_W'($urandom); ang_pt = PT_W'($urandom);
      if (i % 10 == 0) ang_pt = '0;
      e.vld = trk.vld; e.first = trk.first; e.last = trk.last; e.idx = trk.idx;
      e.pt = trk.vld ? merger_f(trk.bw_pt, pos_pt, ang_pt) : '0;
      @(negedge clk);
      checks++;
      if (cand !== e) begin
        failures++;
        if (failures < 10) $display("got %p exp %p", cand, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
