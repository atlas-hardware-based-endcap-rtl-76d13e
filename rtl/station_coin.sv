// station_coin -- one station-coincidence type of the TGC track reconstruction
// (for example "M1 2/3": two of the three M1 layers hit, the third not).
//
// The layers of a TGC station are staggered, so the set of channels hit
// across the layers pins a muon to a fraction of a channel: with L layers
// of N channels each there are L*N fine positions, the Position IDs (M1:
// 3 x 32 = 96, M2: 2 x 16 = 32, M3 per Subunit: 2 x 2 = 4). For each fine
// position k the block looks up the channel of every layer that covers k
// and fires when exactly REQ of those L channels are hit. Of all firing
// positions it outputs up to N_OUT, by priority:
//   PRIO_CENTER = 1 : closest to the centre of the Unit first (M1, M2);
//   PRIO_CENTER = 0 : smallest eta first (M3).
// Fine positions grow with R, so smaller eta means a larger index; at equal
// distance from the centre the larger index wins as well.
//
// Bus layout (this design's choice, matching the bus widths 100, 35 and 7 of
// the block diagram): layer 0 holds N+2 bits, bit 0 and bit N+1 being the
// neighbouring channels outside the Unit, which this coincidence does not
// use; layers 1..L-1 hold N+1 bits each. Layer 0 covers k with channel
// k/L + 1, layer l >= 1 with channel (k+l)/L.
// Timing: one register stage, Position IDs one clock after wire_in.
// The exact-count rule, the seven types, the two/one outputs and both
// priority rules follow the design description; the channel arithmetic is
// assumed.
module station_coin #(
  parameter int N_LAYER     = emtrig_pkg::M1_LAYERS,
  parameter int N_CH        = emtrig_pkg::M1_CH,
  parameter int BUS_W       = emtrig_pkg::M1_BUS,
  parameter int REQ         = 3,
  parameter int N_OUT       = 2,
  parameter bit PRIO_CENTER = 1'b1,
  localparam int NPOS       = N_LAYER * N_CH,
  localparam int ID_W       = (NPOS > 1) ? $clog2(NPOS) : 1
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [BUS_W-1:0] wire_in,
  output logic [ID_W-1:0]  id_out [N_OUT],
  output logic [N_OUT-1:0] id_vld
);

  if (BUS_W != (N_CH + 2) + (N_LAYER - 1) * (N_CH + 1)) begin : g_bad_bus
    $error("station_coin: BUS_W does not match N_LAYER and N_CH");
  end

  // Bit of wire_in that layer l uses for fine position k.
  function automatic int bit_of(int l, int k);
    if (l == 0) return k / N_LAYER + 1;
    return (N_CH + 2) + (l - 1) * (N_CH + 1) + (k + l) / N_LAYER;
  endfunction

  // Fine position visited j-th in priority order.
  function automatic int order(int j);
    if (!PRIO_CENTER) return NPOS - 1 - j;
    if (j % 2 == 0)   return NPOS / 2 + j / 2;
    return NPOS / 2 - 1 - j / 2;
  endfunction

  logic [NPOS-1:0]  coin;
  logic [ID_W-1:0]  id_n [N_OUT];
  logic [N_OUT-1:0] vld_n;

  always_comb begin
    for (int k = 0; k < NPOS; k++) begin
      int n;
      n = 0;
      for (int l = 0; l < N_LAYER; l++) n += int'(wire_in[bit_of(l, k)]);
      coin[k] = (n == REQ);
    end
  end

  always_comb begin
    int taken;
    taken = 0;
    vld_n = '0;
    for (int o = 0; o < N_OUT; o++) id_n[o] = '0;
    for (int j = 0; j < NPOS; j++) begin
      for (int o = 0; o < N_OUT; o++) begin
        if (coin[order(j)] && taken == o) begin
          id_n[o]  = ID_W'(order(j));
          vld_n[o] = 1'b1;
        end
      end
      if (coin[order(j)] && taken < N_OUT) taken++;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      id_vld <= '0;
    end else begin
      id_vld <= vld_n;
    end
    id_out <= id_n;
  end

endmodule
