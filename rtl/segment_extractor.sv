// segment_extractor -- Segment Extractor of one Subunit: the pattern-list memory.
//
// The pattern list maps every 12-bit combination of M1, M2 and M3 Position
// IDs to an 18-bit track segment: {2-bit reconstructed flag, 4-bit position
// R in M3, 8-bit delta-theta, 4-bit pT threshold} (segment_t). On the FPGA
// it is one UltraRAM in true dual-port mode; here it is a 4096 x 18 array
// with two read ports, so the two addresses that arrive each 160 MHz tick
// are both looked up in that tick and eight addresses take four ticks.
//
// Timing: seg_out/seg_vld/seg_first follow addr_in/addr_vld/first by one
// clock. Configuration writes (cfg_we) use port B and must not coincide
// with a valid lane-1 read (asserted). Contents start at zero, as an
// UltraRAM does after configuration. Dual-port use, address and segment
// widths follow the design description; the write path is this design's
// choice.
module segment_extractor
  import emtrig_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst,
  input  logic [RAM_AW-1:0]        addr_in [SEG_PER_TICK],
  input  logic [SEG_PER_TICK-1:0]  addr_vld,
  input  logic                     first,
  output segment_t                 seg_out [SEG_PER_TICK],
  output logic [SEG_PER_TICK-1:0]  seg_vld,
  output logic                     seg_first,
  input  logic                     cfg_we,
  input  logic [RAM_AW-1:0]        cfg_addr,
  input  segment_t                 cfg_data
);

  segment_t mem [2**RAM_AW];

  initial begin
    for (int i = 0; i < 2**RAM_AW; i++) mem[i] = '0;
  end

  // Port A: read lane 0.
  always_ff @(posedge clk) begin
    seg_out[0] <= mem[addr_in[0]];
  end

  // Port B: configuration write, otherwise read lane 1.
  always_ff @(posedge clk) begin
    if (cfg_we) mem[cfg_addr] <= cfg_data;
    seg_out[1] <= mem[addr_in[1]];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      seg_vld   <= '0;
      seg_first <= 1'b0;
    end else begin
      seg_vld   <= addr_vld;
      seg_first <= first;
    end
  end

  a_no_cfg_during_read: assert property (@(posedge clk) disable iff (rst)
    !(cfg_we && addr_vld[1]));

endmodule
