// tgc_unit -- one Unit of the HL-LHC TGC wire track reconstruction.
//
// A Unit is a triangular slice of the TGC Big Wheel wide enough to contain
// muons down to 4 GeV: 32 wire channels per layer in M1 (three layers), 16 in
// M2 (two layers) and 8 in M3 (two layers), the M3 channels split into four
// Subunits of two channels. Per bunch crossing the Unit
//   1. registers the hits (on bc0),
//   2. runs the seven station-coincidence types: M1 3/3, 2/3, 1/3 and M2
//      2/2, 1/2 (two Position IDs each, centre of the Unit first) shared by
//      all Subunits, and M3 2/2, 1/2 per Subunit (one Position ID, smallest
//      eta first),
//   3. in each Subunit, forms up to eight pattern-list addresses in the
//      priority of the coincidence patterns (ram_addr_gen) and reads the
//      track segments from that Subunit's memory (segment_extractor).
//
// Timing (160 MHz, four ticks per bunch crossing): hits sampled at edge E0
// (bc0 high), Position IDs after E1, address pairs after E2..E5, segment
// pairs after E3..E6 (seg_first marks the pair of E3). A new bunch crossing
// may start every four ticks, so the Unit runs at the full 40 MHz rate.
// Configuration: cfg_we writes cfg_data at cfg_addr in Subunit cfg_sub's
// memory. The data flow follows the block diagram of the design; the pipeline
// register placement is this design's choice.
module tgc_unit
  import emtrig_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    bc0,
  input  logic [M1_BUS-1:0]       wire_m1,
  input  logic [M2_BUS-1:0]       wire_m2,
  input  logic [M3_BUS-1:0]       wire_m3 [N_SUB],
  input  logic                    cfg_we,
  input  logic [1:0]              cfg_sub,
  input  logic [RAM_AW-1:0]       cfg_addr,
  input  segment_t                cfg_data,
  output segment_t                seg_out   [N_SUB][SEG_PER_TICK],
  output logic [SEG_PER_TICK-1:0] seg_vld   [N_SUB],
  output logic                    seg_first [N_SUB]
);

  // ---- hit registers ----
  logic [M1_BUS-1:0] m1_q;
  logic [M2_BUS-1:0] m2_q;
  logic [M3_BUS-1:0] m3_q [N_SUB];
  logic              bc0_d1, bc0_d2;

  always_ff @(posedge clk) begin
    if (bc0) begin
      m1_q <= wire_m1;
      m2_q <= wire_m2;
      m3_q <= wire_m3;
    end
    if (rst) begin
      bc0_d1 <= 1'b0;
      bc0_d2 <= 1'b0;
    end else begin
      bc0_d1 <= bc0;
      bc0_d2 <= bc0_d1;
    end
  end

  // ---- station coincidence ----
  logic [M1_FULL_W-1:0] m1_id  [3][2];
  logic [1:0]           m1_vld [3];
  logic [M2_ID_W-1:0]   m2_id  [2][2];
  logic [1:0]           m2_vld [2];

  for (genvar t = 0; t < 3; t++) begin : g_m1
    station_coin #(.N_LAYER(M1_LAYERS), .N_CH(M1_CH), .BUS_W(M1_BUS),
                   .REQ(M1_LAYERS - t), .N_OUT(2), .PRIO_CENTER(1'b1)) u_coin (
      .clk, .rst, .wire_in(m1_q), .id_out(m1_id[t]), .id_vld(m1_vld[t])
    );
  end

  for (genvar t = 0; t < 2; t++) begin : g_m2
    station_coin #(.N_LAYER(M2_LAYERS), .N_CH(M2_CH), .BUS_W(M2_BUS),
                   .REQ(M2_LAYERS - t), .N_OUT(2), .PRIO_CENTER(1'b1)) u_coin (
      .clk, .rst, .wire_in(m2_q), .id_out(m2_id[t]), .id_vld(m2_vld[t])
    );
  end

  // ---- Subunits ----
  for (genvar s = 0; s < N_SUB; s++) begin : g_sub
    logic [M3_ID_W-1:0]      m3_id  [2];
    logic                    m3_vld [2];
    logic [RAM_AW-1:0]       addr   [SEG_PER_TICK];
    logic [SEG_PER_TICK-1:0] avld;
    logic                    afirst;

    for (genvar t = 0; t < 2; t++) begin : g_m3
      logic [M3_ID_W-1:0] id  [1];
      logic [0:0]         vld;
      station_coin #(.N_LAYER(M3_LAYERS), .N_CH(M3_CH), .BUS_W(M3_BUS),
                     .REQ(M3_LAYERS - t), .N_OUT(1), .PRIO_CENTER(1'b0)) u_coin (
        .clk, .rst, .wire_in(m3_q[s]), .id_out(id), .id_vld(vld)
      );
      assign m3_id[t]  = id[0];
      assign m3_vld[t] = vld[0];
    end

    ram_addr_gen #(.SUB(s)) u_rag (
      .clk, .rst, .load(bc0_d2),
      .m1_id, .m1_vld, .m2_id, .m2_vld, .m3_id, .m3_vld,
      .addr_out(addr), .addr_vld(avld), .first(afirst)
    );

    segment_extractor u_se (
      .clk, .rst,
      .addr_in(addr), .addr_vld(avld), .first(afirst),
      .seg_out(seg_out[s]), .seg_vld(seg_vld[s]), .seg_first(seg_first[s]),
      .cfg_we(cfg_we && cfg_sub == 2'(s)), .cfg_addr, .cfg_data
    );
  end

endmodule
