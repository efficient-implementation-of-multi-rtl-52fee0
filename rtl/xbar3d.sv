// xbar3d: behavioural model of a horizontally integrated monolithic 3D ReRAM
// crossbar (analog part; this is a behavioural model, not synthesizable
// circuitry of the real array).
//
// LAYERS memristor layers of ROWS x COLS cells are stacked with voltage and
// current planes alternating, each plane shared by its two neighbouring layers:
//   layer 2k   : between voltage plane k and current plane k
//   layer 2k+1 : between current plane k and voltage plane k+1
// Every current plane therefore collects, per BL, the current of the layer
// below it and the layer above it (Kirchhoff's current law, I = Va*Ga + Vb*Gb):
//   cp_i[k][j] = sum_i vp_v[k][i]*G[2k][i][j] + vp_v[k+1][i]*G[2k+1][i][j]
// Voltages are modelled as the unsigned DAC input codes and conductances as
// unsigned integer levels, so currents are exact integers.
//
// Programming: one BL (column) of one layer is written per clock through
// prog_we/prog_layer/prog_col/prog_g (one conductance per row). The read is
// combinational (one "logical cycle" is a settled analog read). Cells that were
// never programmed hold random values until written; the tile controller
// programs every cell before the first read.
module xbar3d #(
  parameter int unsigned ROWS     = conv3d_pkg::XB_ROWS,
  parameter int unsigned COLS     = conv3d_pkg::XB_COLS,
  parameter int unsigned LAYERS   = conv3d_pkg::NUM_LAYERS,
  parameter int unsigned PIX_BITS = conv3d_pkg::PIX_BITS,
  parameter int unsigned G_BITS   = conv3d_pkg::G_BITS,
  parameter int unsigned CUR_BITS = conv3d_pkg::cur_bits(ROWS, LAYERS),
  localparam int unsigned NVP     = LAYERS / 2 + 1,
  localparam int unsigned NCP     = LAYERS / 2
) (
  input  logic                          clk,
  // programming port
  input  logic                          prog_we,
  input  logic [$clog2(LAYERS)-1:0]     prog_layer,
  input  logic [$clog2(COLS)-1:0]       prog_col,
  input  logic [ROWS-1:0][G_BITS-1:0]   prog_g,
  // analog read: WL voltages per voltage plane, BL currents per current plane
  input  logic [NVP-1:0][ROWS-1:0][PIX_BITS-1:0] vp_v,
  output logic [NCP-1:0][COLS-1:0][CUR_BITS-1:0] cp_i
);

  // conductance levels, stored per layer and BL column
  logic [G_BITS-1:0] g [LAYERS][COLS][ROWS];

  always_ff @(posedge clk) begin
    if (prog_we) begin
      for (int unsigned i = 0; i < ROWS; i++) begin
        g[prog_layer][prog_col][i] <= prog_g[i];
      end
    end
  end

  always_comb begin
    for (int unsigned k = 0; k < NCP; k++) begin
      for (int unsigned j = 0; j < COLS; j++) begin
        logic [CUR_BITS-1:0] acc;
        acc = '0;
        for (int unsigned i = 0; i < ROWS; i++) begin
          acc += CUR_BITS'(vp_v[k][i])   * CUR_BITS'(g[2*k][j][i]);
          acc += CUR_BITS'(vp_v[k+1][i]) * CUR_BITS'(g[2*k+1][j][i]);
        end
        cp_i[k][j] = acc;
      end
    end
  end

  initial begin
    assert (LAYERS % 2 == 0) else $error("xbar3d: LAYERS must be even");
  end

endmodule
