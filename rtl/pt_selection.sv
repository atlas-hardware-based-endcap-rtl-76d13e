// pt_selection -- pT Selection of the Run 3 NSW coincidence.
//
// The two Track Coincidence modules each deliver one candidate per 320 MHz
// tick. Every tick this block picks the highest pT among three: the two new
// candidates and the best one kept so far in a register. After the sixteenth
// candidate (the pair tagged `last`) the winner is moved to a result
// register, which the 40 MHz LHC clock domain samples.
//
// Rules: only valid candidates compete; a new candidate replaces the kept
// one only with a strictly higher pT, and between the two new ones module 0
// wins a tie, so the lower track number wins equal pT. The `first` tag
// restarts the search. If no candidate is valid, valid_out is 0.
// Timing: the last pair, visible after 320 MHz edge E9 of a bunch crossing,
// is folded in at E10; the LHC-domain register (clk_lhc, synchronous and
// phase-aligned with clk) shows the result after the following LHC edge.
// The three-way comparison and the register follow the design description;
// tie rules and the clock-domain hand-off are this design's choice.
module pt_selection
  import emtrig_pkg::*;
(
  input  logic             clk,
  input  logic             clk_lhc,
  input  logic             rst,
  input  cand_t            cand [N_TC],
  output logic [PT_W-1:0]  pt_out,
  output logic             valid_out,
  output logic [IDX_W-1:0] idx_out
);

  cand_t best_q, best_n, res_q;

  always_comb begin
    best_n = cand[0].first ? '0 : best_q;
    for (int i = 0; i < N_TC; i++) begin
      if (cand[i].vld && (!best_n.vld || cand[i].pt > best_n.pt)) best_n = cand[i];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      best_q <= '0;
      res_q  <= '0;
    end else begin
      best_q <= best_n;
      if (cand[0].last) res_q <= best_n;
    end
  end

  // Hand-over to the LHC clock domain.
  always_ff @(posedge clk_lhc) begin
    pt_out    <= res_q.pt;
    valid_out <= res_q.vld;
    idx_out   <= res_q.idx;
  end

  // Both Track Coincidence modules run in lock-step.
  a_lockstep: assert property (@(posedge clk) disable iff (rst)
    cand[0].first == cand[N_TC-1].first && cand[0].last == cand[N_TC-1].last);

endmodule
