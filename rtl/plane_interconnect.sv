// plane_interconnect: the configurable interconnect behind the current planes.
//
// For every BL column j, cp_pos[j][k] says whether current plane k is wired to
// the non-negative sum I_p (1) or to the negative sum I_n (0). The weight
// mapper places negative weights in the layers below a separation voltage
// plane and non-negative weights above it, so for a column whose separation
// plane is v the configuration is cp_pos[j][k] = (k >= v), as in the paper's
// worked example (kernel 0: planes 0-1 -> I_n, 2-4 -> I_p; kernel 1: plane 0 ->
// I_n, 1-4 -> I_p). The block accepts any mask, though.
//
// The accumulation itself is a current sum on a wire in the real circuit; here
// it is a combinational adder tree, no clock, no latency.
module plane_interconnect #(
  parameter int unsigned COLS     = conv3d_pkg::XB_COLS,
  parameter int unsigned NCP      = conv3d_pkg::NUM_CP,
  parameter int unsigned CUR_BITS = conv3d_pkg::cur_bits(conv3d_pkg::XB_ROWS, conv3d_pkg::NUM_LAYERS)
) (
  input  logic [NCP-1:0][COLS-1:0][CUR_BITS-1:0] cp_i,
  input  logic [COLS-1:0][NCP-1:0]               cp_pos,
  output logic [COLS-1:0][CUR_BITS-1:0]          i_p,
  output logic [COLS-1:0][CUR_BITS-1:0]          i_n
);

  always_comb begin
    for (int unsigned j = 0; j < COLS; j++) begin
      i_p[j] = '0;
      i_n[j] = '0;
      for (int unsigned k = 0; k < NCP; k++) begin
        if (cp_pos[j][k]) i_p[j] += cp_i[k][j];
        else              i_n[j] += cp_i[k][j];
      end
    end
  end

endmodule
