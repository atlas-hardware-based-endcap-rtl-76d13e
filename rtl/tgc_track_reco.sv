// tgc_track_reco -- TGC wire track reconstruction of one HL-LHC Sector Logic.
//
// The sector is covered by N_UNITS Units (92 in the reference design) that
// work in parallel and independently; each returns up to eight 18-bit track
// segments per Subunit and bunch crossing. Each Unit gets its own copy of
// the hits it covers: neighbouring Units overlap, and the fan-out of sector
// channels to Units is done before this block.
//
// Timing: all Units share the 160 MHz clock and the bc0 strobe; segments of
// the bunch crossing sampled at edge E0 leave after edges E3..E6 (six ticks,
// 37.5 ns), inside the 0.125 us budget (20 ticks) of the design.
// Configuration: cfg_unit and cfg_sub select the memory written by cfg_we.
module tgc_track_reco
  import emtrig_pkg::*;
#(
  parameter int N_UNITS_P = N_UNITS,
  localparam int UW = (N_UNITS_P > 1) ? $clog2(N_UNITS_P) : 1
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    bc0,
  input  logic [M1_BUS-1:0]       wire_m1 [N_UNITS_P],
  input  logic [M2_BUS-1:0]       wire_m2 [N_UNITS_P],
  input  logic [M3_BUS-1:0]       wire_m3 [N_UNITS_P][N_SUB],
  input  logic                    cfg_we,
  input  logic [UW-1:0]           cfg_unit,
  input  logic [1:0]              cfg_sub,
  input  logic [RAM_AW-1:0]       cfg_addr,
  input  segment_t                cfg_data,
  output segment_t                seg_out   [N_UNITS_P][N_SUB][SEG_PER_TICK],
  output logic [SEG_PER_TICK-1:0] seg_vld   [N_UNITS_P][N_SUB],
  output logic                    seg_first [N_UNITS_P][N_SUB]
);

  for (genvar u = 0; u < N_UNITS_P; u++) begin : g_unit
    tgc_unit u_unit (
      .clk, .rst, .bc0,
      .wire_m1(wire_m1[u]), .wire_m2(wire_m2[u]), .wire_m3(wire_m3[u]),
      .cfg_we(cfg_we && cfg_unit == UW'(u)), .cfg_sub, .cfg_addr, .cfg_data,
      .seg_out(seg_out[u]), .seg_vld(seg_vld[u]), .seg_first(seg_first[u])
    );
  end

endmodule
