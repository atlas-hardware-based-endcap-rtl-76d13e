// tb_ram_addr_gen -- the four Subunit address generators on random Position
// IDs; every bunch crossing (load every four ticks) the four address pairs
// must match the reference list built by walking the coincidence patterns in
// priority order. Also counts that each of the eight patterns, the limit of
// eight addresses and the M1 window rejection all occur.
module tb_ram_addr_gen;
  import emtrig_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b1, rst = 1'b1, load = 1'b0;
  always #1 clk = ~clk;
  logic [M1_FULL_W-1:0] m1_id [3][2];
  logic [1:0]           m1_vld [3];
  logic [M2_ID_W-1:0]   m2_id [2][2];
  logic [1:0]           m2_vld [2];
  logic [M3_ID_W-1:0]   m3_id [2];
  logic                 m3_vld [2];
  logic [RAM_AW-1:0]    addr [N_SUB][2];
  logic [1:0]           avld [N_SUB];
  logic                 afirst [N_SUB];
  int checks = 0, failures = 0;
  int pat_cnt [8];
  int n_drop = 0, n_win = 0;

  for (genvar s = 0; s < N_SUB; s++) begin : g
    ram_addr_gen #(.SUB(s)) dut (.clk, .rst, .load, .m1_id, .m1_vld, .m2_id, .m2_vld,
                                 .m3_id, .m3_vld, .addr_out(addr[s]), .addr_vld(avld[s]),
                                 .first(afirst[s]));
  end

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (pat_cnt[i]) pat_cnt[i] = 0;
    foreach (m1_vld[t]) m1_vld[t] = '0;
    foreach (m2_vld[t]) m2_vld[t] = '0;
    foreach (m3_vld[t]) m3_vld[t] = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int ev = 0; ev < 2000; ev++) begin
      automatic int_q m1 [3], m2 [2], m3 [2];
      automatic int_q exp [N_SUB];
      automatic int_q pats;
      for (int t = 0; t < 3; t++) begin
        automatic int c = (ev % 9 == 0) ? 2 : $urandom % 3;
        for (int o = 0; o < 2; o++) begin
          m1_id[t][o]  = M1_FULL_W'($urandom % M1_POS);
          m1_vld[t][o] = (o < c);
          if (o < c) m1[t].push_back(int'(m1_id[t][o]));
        end
      end
      for (int t = 0; t < 2; t++) begin
        automatic int c = (ev % 9 == 0) ? 2 : $urandom % 3;
        for (int o = 0; o < 2; o++) begin
          m2_id[t][o]  = M2_ID_W'($urandom);
          m2_vld[t][o] = (o < c);
          if (o < c) m2[t].push_back(int'(m2_id[t][o]));
        end
      end
      for (int t = 0; t < 2; t++) begin
        m3_id[t]  = M3_ID_W'($urandom);
        m3_vld[t] = (ev % 9 == 0) ? 1'b1 : ($urandom % 3 != 0);
        if (m3_vld[t]) m3[t].push_back(int'(m3_id[t]));
      end
      for (int s = 0; s < N_SUB; s++) begin
        exp[s] = ref_addrs(m1, m2, m3, s, pats);
        foreach (pats[i]) if (pats[i] >= 0) pat_cnt[pats[i]]++; else n_drop++;
      end
      foreach (m1[t]) foreach (m1[t][i]) if (m1[t][i] < 21 || m1[t][i] >= 53) n_win++;
      load = 1'b1;
      for (int k = 0; k < TICKS160; k++) begin
        @(negedge clk);
        load = 1'b0;
        foreach (m1_vld[t]) m1_vld[t] = 2'($urandom);   // must not matter after load
        for (int s = 0; s < N_SUB; s++) begin
          for (int l = 0; l < 2; l++) begin
            automatic int j = 2 * k + l;
            automatic bit ev_ = j < exp[s].size();
            checks++;
            if (avld[s][l] !== ev_ || (ev_ && int'(addr[s][l]) != exp[s][j]) || afirst[s] !== (k == 0)) begin
              failures++;
              if (failures < 10) $display("ev %0d sub %0d slot %0d: got v%0d %h exp %p", ev, s, j,
                                          avld[s][l], addr[s][l], exp[s]);
            end
          end
        end
      end
      if (ev % 50 == 49) begin   // idle gap
        @(negedge clk);
        for (int s = 0; s < N_SUB; s++) begin checks++; if (avld[s] !== 2'b00) failures++; end
      end
    end
    foreach (pat_cnt[i]) if (pat_cnt[i] == 0) begin failures++; $display("pattern %0d never seen", i); end
    if (n_drop == 0 || n_win == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
