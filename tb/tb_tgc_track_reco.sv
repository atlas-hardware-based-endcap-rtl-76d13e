// tb_tgc_track_reco -- a Sector Logic TGC engine with a reduced number of
// Units (NU). Each Unit's four pattern-list memories are written through the
// shared configuration port with a function of (unit, subunit, address), so a
// write steered to the wrong Unit or Subunit shows up as a wrong segment.
// Every Unit gets its own random hits each crossing; crossings back to back;
// each Subunit's four segment pairs are checked after 160 MHz edges
// 4m+3 .. 4m+6 against the reference model.
module tb_tgc_track_reco;
  import emtrig_pkg::*;
  import tb_ref_pkg::*;
  localparam int NU  = 3;
  localparam int NEV = 200;
  localparam int UW  = (NU > 1) ? $clog2(NU) : 1;
  logic clk = 1'b1, rst = 1'b1, bc0 = 1'b0;
  always #1 clk = ~clk;
  logic [M1_BUS-1:0] wire_m1 [NU];
  logic [M2_BUS-1:0] wire_m2 [NU];
  logic [M3_BUS-1:0] wire_m3 [NU][N_SUB];
  logic              cfg_we = 1'b0;
  logic [UW-1:0]     cfg_unit = '0;
  logic [1:0]        cfg_sub = '0;
  logic [RAM_AW-1:0] cfg_addr = '0;
  segment_t          cfg_data = '0;
  segment_t          seg_out   [NU][N_SUB][SEG_PER_TICK];
  logic [1:0]        seg_vld   [NU][N_SUB];
  logic              seg_first [NU][N_SUB];
  int checks = 0, failures = 0, n_seg = 0;

  tgc_track_reco #(.N_UNITS_P(NU)) dut (.*);

  logic [M1_BUS-1:0] w1 [NEV][NU];
  logic [M2_BUS-1:0] w2 [NEV][NU];
  logic [M3_BUS-1:0] w3 [NEV][NU][N_SUB];
  int_q              ea [NEV][NU][N_SUB];
  int p = 0, p0 = -1;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int ev = 0; ev < NEV; ev++)
      for (int u = 0; u < NU; u++) begin
        w1[ev][u] = gen_station(3, 32, 100, (ev + u) % 4, 90, (ev % 3) * 3);
        w2[ev][u] = M2_BUS'(gen_station(2, 16, 35, 1 + $urandom % 2, 90, (ev % 3) * 3));
        for (int s = 0; s < N_SUB; s++) begin
          automatic int_q pats;
          w3[ev][u][s] = M3_BUS'(gen_station(2, 2, 7, $urandom % 2, 90, (ev % 3) * 5));
          ea[ev][u][s] = ref_unit(w1[ev][u], w2[ev][u], w3[ev][u][s], s, pats);
        end
      end
  end

  always @(posedge clk) p++;

  initial begin
    foreach (wire_m1[u]) begin
      wire_m1[u] = '0; wire_m2[u] = '0;
      foreach (wire_m3[u][s]) wire_m3[u][s] = '0;
    end
    repeat (3) @(negedge clk); rst = 1'b0;
    for (int u = 0; u < NU; u++)
      for (int s = 0; s < N_SUB; s++)
        for (int a = 0; a < 2**RAM_AW; a++) begin
          cfg_we = 1'b1; cfg_unit = UW'(u); cfg_sub = 2'(s);
          cfg_addr = RAM_AW'(a); cfg_data = seg_f(u, s, a);
          @(negedge clk);
        end
    cfg_we = 1'b0;
    p0 = p + 1;
    for (int ev = 0; ev < NEV; ev++) begin
      bc0 = 1'b1;
      for (int u = 0; u < NU; u++) begin
        wire_m1[u] = w1[ev][u]; wire_m2[u] = w2[ev][u]; wire_m3[u] = w3[ev][u];
      end
      @(negedge clk);
      bc0 = 1'b0;
      foreach (wire_m2[u]) wire_m2[u] = M2_BUS'(gen_station(2, 16, 35, 2, 90, 20));  // must not matter
      repeat (3) @(negedge clk);
    end
    repeat (8) @(negedge clk);
    if (n_seg == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (p0 >= 0 && p >= p0 + 3) begin
      automatic int q = p - p0 - 3;
      automatic int m = q / 4;
      automatic int k = q % 4;
      if (m < NEV)
        for (int u = 0; u < NU; u++)
          for (int s = 0; s < N_SUB; s++) begin
            checks++;
            if (seg_first[u][s] !== (k == 0)) failures++;
            for (int l = 0; l < SEG_PER_TICK; l++) begin
              automatic int j = 2 * k + l;
              automatic bit ev_ = j < ea[m][u][s].size();
              if (ev_) n_seg++;
              if (seg_vld[u][s][l] !== ev_ || (ev_ && seg_out[u][s][l] !== seg_f(u, s, ea[m][u][s][j]))) begin
                failures++;
                if (failures < 10) $display("crossing %0d unit %0d sub %0d slot %0d: got v%0d %h", m, u, s, j,
                                            seg_vld[u][s][l], seg_out[u][s][l]);
              end
            end
          end
    end
  end
endmodule
