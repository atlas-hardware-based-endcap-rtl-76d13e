// matching_lut -- block-RAM look-up table used for position and angle matching.
//
// The address is the TGC Big Wheel RoI followed by two position/angle
// differences between the NSW track and the Big Wheel candidate, e.g.
// {RoI, d-eta, d-phi} for position matching or {RoI, d-eta, d-theta} for
// angle matching; the word read back is the pT code that this combination
// supports. Putting the RoI in the address gives every region of the
// non-uniform toroid field its own table, as the design requires.
//
// Timing: synchronous read, data one clock after the address (a registered
// block-RAM output). A write port loads the table from the control path; a
// write and a read of the same address in one clock return the old word.
// Contents start at zero. Table contents and the write path are this
// design's choice; the LUT's role and its BRAM implementation follow the
// design description.
module matching_lut #(
  parameter int AW = emtrig_pkg::POS_LUT_AW,
  parameter int DW = emtrig_pkg::PT_W
) (
  input  logic          clk,
  input  logic [AW-1:0] rd_addr,
  output logic [DW-1:0] rd_data,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [DW-1:0] wr_data
);

  logic [DW-1:0] mem [2**AW];

  initial begin
    for (int i = 0; i < 2**AW; i++) mem[i] = '0;
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end

endmodule
