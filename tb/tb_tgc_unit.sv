// tb_tgc_unit -- one Unit end to end: pattern lists loaded with a known
// function of (Subunit, address), random muon-plus-noise hits every bunch
// crossing, crossings back to back. For each Subunit the four segment pairs
// of crossing m must come out after 160 MHz edges 4m+3 .. 4m+6 and match the
// reference (station coincidence -> pattern priority -> table look-up).
module tb_tgc_unit;
  import emtrig_pkg::*;
  import tb_ref_pkg::*;
  localparam int NEV = 400;
  logic clk = 1'b1, rst = 1'b1, bc0 = 1'b0;
  always #1 clk = ~clk;
  logic [M1_BUS-1:0] wire_m1 = '0;
  logic [M2_BUS-1:0] wire_m2 = '0;
  logic [M3_BUS-1:0] wire_m3 [N_SUB];
  logic              cfg_we = 1'b0;
  logic [1:0]        cfg_sub = '0;
  logic [RAM_AW-1:0] cfg_addr = '0;
  segment_t          cfg_data = '0;
  segment_t          seg_out [N_SUB][SEG_PER_TICK];
  logic [1:0]        seg_vld [N_SUB];
  logic              seg_first [N_SUB];
  int checks = 0, failures = 0, n_full = 0, n_seg = 0;

  tgc_unit dut (.*);

  logic [M1_BUS-1:0] w1 [NEV];
  logic [M2_BUS-1:0] w2 [NEV];
  logic [M3_BUS-1:0] w3 [NEV][N_SUB];
  int_q              ea [NEV][N_SUB];
  int p = 0, p0 = -1;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int ev = 0; ev < NEV; ev++) begin
      w1[ev] = gen_station(3, 32, 100, 1 + $urandom % 3, 90, (ev % 3) * 3);
      w2[ev] = M2_BUS'(gen_station(2, 16, 35, 1 + $urandom % 2, 90, (ev % 3) * 3));
      for (int s = 0; s < N_SUB; s++) begin
        automatic int_q pats;
        w3[ev][s] = M3_BUS'(gen_station(2, 2, 7, $urandom % 2, 90, (ev % 3) * 5));
        ea[ev][s] = ref_unit(w1[ev], w2[ev], w3[ev][s], s, pats);
        if (ea[ev][s].size() == 8) n_full++;
      end
    end
  end

  always @(posedge clk) p++;

  initial begin
    foreach (wire_m3[s]) wire_m3[s] = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int s = 0; s < N_SUB; s++)
      for (int a = 0; a < 2**RAM_AW; a++) begin
        cfg_we = 1'b1; cfg_sub = 2'(s); cfg_addr = RAM_AW'(a); cfg_data = seg_f(0, s, a);
        @(negedge clk);
      end
    cfg_we = 1'b0;
    p0 = p + 1;                       // edge at which crossing 0 is sampled
    for (int ev = 0; ev < NEV; ev++) begin
      bc0 = 1'b1; wire_m1 = w1[ev]; wire_m2 = w2[ev]; wire_m3 = w3[ev];
      @(negedge clk);
      bc0 = 1'b0;
      wire_m1 = gen_station(3, 32, 100, 2, 90, 20);    // must not matter
      repeat (3) @(negedge clk);
    end
    repeat (8) @(negedge clk);
    if (n_full == 0 || n_seg == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // after edge p: pair k of crossing m, with p = p0 + 4m + 3 + k
  always @(negedge clk) begin
    if (p0 >= 0 && p >= p0 + 3) begin
      int q, m, k;
      q = p - p0 - 3; m = q / 4; k = q % 4;
      if (m < NEV) begin
        for (int s = 0; s < N_SUB; s++) begin
          checks++;
          if (seg_first[s] !== (k == 0)) failures++;
          for (int l = 0; l < 2; l++) begin
            int j;
            bit ev_;
            j = 2 * k + l;
            ev_ = j < ea[m][s].size();
            if (ev_) n_seg++;
            if (seg_vld[s][l] !== ev_ || (ev_ && seg_out[s][l] !== seg_f(0, s, ea[m][s][j]))) begin
              failures++;
              if (failures < 10) $display("crossing %0d sub %0d slot %0d: got v%0d %h, exp %p", m, s, j,
                                          seg_vld[s][l], seg_out[s][l], ea[m][s]);
            end
          end
        end
      end
    end
  end
endmodule
