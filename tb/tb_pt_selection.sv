// tb_pt_selection -- drives two candidate streams, one pair per 320 MHz tick,
// crossing m occupying edges 8m+2 .. 8m+9 (as inside the full design), and
// checks the selected pT, validity and track number on the 40 MHz output.
// The result of crossing m must be on the output exactly after LHC edge m+2
// (LHC edge n = 320 MHz edge 8n). Covers empty crossings, ties, and winners
// from either stream.
module tb_pt_selection;
  import emtrig_pkg::*;
  localparam int NEV = 300;
  logic clk = 1'b1, clk_lhc = 1'b1, rst = 1'b1;
  always #1 clk = ~clk;
  always #8 clk_lhc = ~clk_lhc;
  cand_t cand [N_TC];
  logic [PT_W-1:0]  pt_out;
  logic             valid_out;
  logic [IDX_W-1:0] idx_out;
  int checks = 0, failures = 0;
  int n_tc1 = 0, n_none = 0, n_tie = 0, n_keep = 0;

  pt_selection dut (.*);

  typedef struct { logic v; logic [PT_W-1:0] pt; logic [IDX_W-1:0] idx; } res_t;
  cand_t c [NEV][N_TRK][N_TC];
  res_t  r [NEV];
  int    p = 0, n = 0;

  initial begin : watchdog
    repeat (8 * NEV + 200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int ev = 0; ev < NEV; ev++) begin
      automatic int mode = ev % 5;
      r[ev].v = 0; r[ev].pt = '0; r[ev].idx = '0;
      for (int k = 0; k < N_TRK; k++) for (int m = 0; m < N_TC; m++) begin
        c[ev][k][m].vld   = (mode == 3) ? 1'b0 : (($urandom % 3) != 0);
        c[ev][k][m].pt    = (mode == 4) ? PT_W'(9) : PT_W'($urandom);
        c[ev][k][m].first = (k == 0);
        c[ev][k][m].last  = (k == N_TRK - 1);
        c[ev][k][m].idx   = IDX_W'(m * N_TRK + k);
      end
      // reference: scan in arrival order, a strictly greater pT replaces
      for (int k = 0; k < N_TRK; k++) for (int m = 0; m < N_TC; m++)
        if (c[ev][k][m].vld && (!r[ev].v || c[ev][k][m].pt > r[ev].pt)) begin
          r[ev].v = 1; r[ev].pt = c[ev][k][m].pt; r[ev].idx = c[ev][k][m].idx;
        end
      if (!r[ev].v) n_none++;
      else if (r[ev].idx >= N_TRK) n_tc1++;
      if (mode == 4) n_tie++;
      if (r[ev].v && (r[ev].idx % N_TRK) < 4) n_keep++;   // winner held for >= 4 ticks
    end
  end

  always @(posedge clk) p++;
  always @(posedge clk_lhc) n++;

  // Drive after edge p the pair sampled at edge p+1.
  always @(negedge clk) begin
    int q, ev, k;
    if (p >= 3) rst <= 1'b0;
    q  = p - 1;
    ev = q / 8;
    k  = q % 8;
    if (q >= 0 && ev < NEV) begin
      foreach (cand[m]) cand[m] <= c[ev][k][m];
    end else begin
      foreach (cand[m]) cand[m] <= '0;
    end
  end

  always @(negedge clk_lhc) begin
    if (n >= 2 && n - 2 < NEV) begin
      automatic res_t e = r[n - 2];
      checks++;
      if (valid_out !== e.v || (e.v && (pt_out !== e.pt || idx_out !== e.idx))) begin
        failures++;
        if (failures < 10) $display("crossing %0d: got v%0d pt %0d idx %0d, exp v%0d pt %0d idx %0d",
                                    n - 2, valid_out, pt_out, idx_out, e.v, e.pt, e.idx);
      end
    end
    if (n - 2 == NEV) begin
      if (n_none == 0 || n_tc1 == 0 || n_tie == 0 || n_keep == 0) failures++;
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
