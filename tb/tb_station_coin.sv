// tb_station_coin -- all seven station-coincidence types (M1 3/3, 2/3, 1/3,
// M2 2/2, 1/2, M3 2/2, 1/2) on random muon-plus-noise hits; each output is
// compared, one clock later, with a reference that lists all fine positions,
// counts hit layers and sorts by the priority rule (centre first for M1/M2,
// smallest eta first for M3).
module tb_station_coin;
  import emtrig_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b1, rst = 1'b1;
  always #1 clk = ~clk;
  logic [M1_BUS-1:0] w1 = '0;
  logic [M2_BUS-1:0] w2 = '0;
  logic [M3_BUS-1:0] w3 = '0;
  int checks = 0, failures = 0, n_two = 0, n_one = 0, n_none = 0;

  logic [6:0] id1 [3][2]; logic [1:0] v1 [3];
  logic [4:0] id2 [2][2]; logic [1:0] v2 [2];
  logic [1:0] id3 [2][1]; logic [0:0] v3 [2];

  for (genvar t = 0; t < 3; t++) begin : g1
    station_coin #(.N_LAYER(3), .N_CH(32), .BUS_W(100), .REQ(3 - t), .N_OUT(2), .PRIO_CENTER(1))
      dut (.clk, .rst, .wire_in(w1), .id_out(id1[t]), .id_vld(v1[t]));
  end
  for (genvar t = 0; t < 2; t++) begin : g2
    station_coin #(.N_LAYER(2), .N_CH(16), .BUS_W(35), .REQ(2 - t), .N_OUT(2), .PRIO_CENTER(1))
      dut (.clk, .rst, .wire_in(w2), .id_out(id2[t]), .id_vld(v2[t]));
  end
  for (genvar t = 0; t < 2; t++) begin : g3
    station_coin #(.N_LAYER(2), .N_CH(2), .BUS_W(7), .REQ(2 - t), .N_OUT(1), .PRIO_CENTER(0))
      dut (.clk, .rst, .wire_in(w3), .id_out(id3[t]), .id_vld(v3[t]));
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cmp(string what, int_q e, int got_id [2], bit got_v [2], int nout);
    checks++;
    for (int o = 0; o < nout; o++) begin
      bit ev = (o < e.size());
      if (got_v[o] !== ev || (ev && got_id[o] != e[o])) begin
        failures++;
        if (failures < 10) $display("%s slot %0d: got v%0d id %0d, exp %p", what, o, got_v[o], got_id[o], e);
        return;
      end
    end
    if (nout == 2) begin
      if (e.size() >= 2) n_two++; else if (e.size() == 1) n_one++; else n_none++;
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int i = 0; i < 3000; i++) begin
      int_q e;
      int gi [2]; bit gv [2];
      w1 = gen_station(3, 32, 100, 1 + $urandom % 3, 85, (i % 4) * 2);
      w2 = M2_BUS'(gen_station(2, 16, 35, 1 + $urandom % 2, 85, (i % 4) * 2));
      w3 = M3_BUS'(gen_station(2, 2, 7, $urandom % 3, 80, (i % 3) * 10));
      @(negedge clk);
      for (int t = 0; t < 3; t++) begin
        e = ref_coin(w1, 3, 32, 3 - t, 2, 1);
        for (int o = 0; o < 2; o++) begin gi[o] = id1[t][o]; gv[o] = v1[t][o]; end
        cmp($sformatf("M1 %0d/3", 3 - t), e, gi, gv, 2);
      end
      for (int t = 0; t < 2; t++) begin
        e = ref_coin(M1_BUS'(w2), 2, 16, 2 - t, 2, 1);
        for (int o = 0; o < 2; o++) begin gi[o] = id2[t][o]; gv[o] = v2[t][o]; end
        cmp($sformatf("M2 %0d/2", 2 - t), e, gi, gv, 2);
      end
      for (int t = 0; t < 2; t++) begin
        e = ref_coin(M1_BUS'(w3), 2, 2, 2 - t, 1, 0);
        gi[0] = id3[t][0]; gv[0] = v3[t][0]; gi[1] = 0; gv[1] = 0;
        cmp($sformatf("M3 %0d/2", 2 - t), e, gi, gv, 1);
      end
    end
    if (n_two == 0 || n_one == 0 || n_none == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
