// ram_addr_gen -- RAM Address Generator of one Subunit.
//
// It turns the Position IDs of the three TGC stations into addresses of the
// Subunit's pattern list. An address is {M1 ID (5 b), M2 ID (5 b), M3 ID
// (2 b)}; which IDs may be combined is given by the eight coincidence
// patterns, in priority order:
//     7/7  : M1 3/3, M2 2/2, M3 2/2      5/7A : M1 2/3, M2 1/2, M3 2/2
//     6/7A : M1 2/3, M2 2/2, M3 2/2      5/7B : M1 2/3, M2 2/2, M3 1/2
//     6/7B : M1 3/3, M2 1/2, M3 2/2      5/7C : M1 3/3, M2 1/2, M3 1/2
//     6/7C : M1 3/3, M2 2/2, M3 1/2      5/7D : M1 1/3, M2 2/2, M3 2/2
// Each M1 and M2 type carries two IDs and each M3 type one, so a pattern
// yields up to four combinations; within a pattern smaller eta (larger fine
// position) comes first, ordering M1 first and M2 second. The first eight
// valid combinations of the 32 are kept.
//
// M1 has 96 fine positions but only 5 address bits: the Subunit with index
// SUB combines the window of 32 M1 positions starting at
// m1_window_start(SUB) (0, 21, 42, 64) and ignores M1 IDs outside it. This
// window is this design's way of reconciling the 96 Position IDs with the
// 5-bit field.
//
// Timing: on the clock where `load` is high the list is computed from the
// current IDs and captured; the same edge puts addresses 0 and 1 on
// addr_out (first=1), the next three edges addresses 2..7. Empty slots leave
// with addr_vld = 0. A new load may come every four clocks.
module ram_addr_gen
  import emtrig_pkg::*;
#(
  parameter int SUB = 0
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  load,
  input  logic [M1_FULL_W-1:0]  m1_id  [3][2],   // [type 3/3,2/3,1/3][slot]
  input  logic [1:0]            m1_vld [3],
  input  logic [M2_ID_W-1:0]    m2_id  [2][2],   // [type 2/2,1/2][slot]
  input  logic [1:0]            m2_vld [2],
  input  logic [M3_ID_W-1:0]    m3_id  [2],      // [type 2/2,1/2]
  input  logic                  m3_vld [2],
  output logic [RAM_AW-1:0]     addr_out [SEG_PER_TICK],
  output logic [SEG_PER_TICK-1:0] addr_vld,
  output logic                  first
);

  localparam int WIN0  = m1_window_start(SUB);
  localparam int NSLOT = N_PAT * 4;
  localparam int PH_W  = $clog2(TICKS160 + 1);

  // Window-relative, eta-ordered IDs.
  logic [M1_ID_W-1:0] m1_o [3][2];
  logic [1:0]         m1_ov [3];
  logic [M2_ID_W-1:0] m2_o [2][2];
  logic [1:0]         m2_ov [2];

  always_comb begin
    for (int t = 0; t < 3; t++) begin
      logic [M1_ID_W-1:0] r [2];
      logic [1:0]         v;
      for (int s = 0; s < 2; s++) begin
        v[s] = m1_vld[t][s] && int'(m1_id[t][s]) >= WIN0 && int'(m1_id[t][s]) < WIN0 + M1_WIN;
        r[s] = M1_ID_W'(int'(m1_id[t][s]) - WIN0);
      end
      if (v[1] && (!v[0] || r[1] > r[0])) begin
        m1_o[t][0] = r[1]; m1_o[t][1] = r[0]; m1_ov[t] = {v[0], v[1]};
      end else begin
        m1_o[t][0] = r[0]; m1_o[t][1] = r[1]; m1_ov[t] = v;
      end
    end
    for (int t = 0; t < 2; t++) begin
      if (m2_vld[t][1] && (!m2_vld[t][0] || m2_id[t][1] > m2_id[t][0])) begin
        m2_o[t][0] = m2_id[t][1]; m2_o[t][1] = m2_id[t][0]; m2_ov[t] = {m2_vld[t][0], m2_vld[t][1]};
      end else begin
        m2_o[t][0] = m2_id[t][0]; m2_o[t][1] = m2_id[t][1]; m2_ov[t] = m2_vld[t];
      end
    end
  end

  // Priority compaction of the 32 combinations into at most eight addresses.
  logic [RAM_AW-1:0] list_n [N_SEG];
  logic [N_SEG-1:0]  lvld_n;

  always_comb begin
    int n;
    n = 0;
    lvld_n = '0;
    for (int j = 0; j < N_SEG; j++) list_n[j] = '0;
    for (int p = 0; p < N_PAT; p++) begin
      for (int i = 0; i < 2; i++) begin
        for (int k = 0; k < 2; k++) begin
          logic              v;
          logic [RAM_AW-1:0] a;
          v = m1_ov[PAT_M1[p]][i] && m2_ov[PAT_M2[p][0]][k] && m3_vld[PAT_M3[p][0]];
          a = {m1_o[PAT_M1[p]][i], m2_o[PAT_M2[p][0]][k], m3_id[PAT_M3[p][0]]};
          for (int j = 0; j < N_SEG; j++) begin
            if (v && n == j) begin
              list_n[j] = a;
              lvld_n[j] = 1'b1;
            end
          end
          if (v && n < N_SEG) n++;
        end
      end
    end
  end

  logic [RAM_AW-1:0] list_q [N_SEG];
  logic [N_SEG-1:0]  lvld_q;
  logic [PH_W-1:0]   ph_q;     // next pair to send; TICKS160 = idle

  always_ff @(posedge clk) begin
    if (rst) begin
      ph_q     <= PH_W'(TICKS160);
      addr_vld <= '0;
      first    <= 1'b0;
      lvld_q   <= '0;
    end else if (load) begin
      list_q   <= list_n;
      lvld_q   <= lvld_n;
      for (int s = 0; s < SEG_PER_TICK; s++) addr_out[s] <= list_n[s];
      addr_vld <= lvld_n[SEG_PER_TICK-1:0];
      first    <= 1'b1;
      ph_q     <= PH_W'(1);
    end else if (ph_q < PH_W'(TICKS160)) begin
      for (int s = 0; s < SEG_PER_TICK; s++) addr_out[s] <= list_q[int'(ph_q)*SEG_PER_TICK + s];
      addr_vld <= lvld_q[int'(ph_q)*SEG_PER_TICK +: SEG_PER_TICK];
      first    <= 1'b0;
      ph_q     <= ph_q + 1'b1;
    end else begin
      addr_vld <= '0;
      first    <= 1'b0;
    end
  end

endmodule
