// diff_amp: behavioural model of the difference read-out circuit (a slightly
// modified inverting op-amp; analog, modelled behaviourally).
//
// The negative-weight current I_n enters the op-amp's inverting input; the
// feedback resistor R0 gives V0 = I_n*R0, the output voltage is V1 = -I_n*R0
// and a second resistor R0 turns it back into I1 = -I_n. I1 joins I_p at the
// output node, so the output current is I2 = I_p - I_n. The model computes that
// difference for every BL column, combinationally, as a signed integer one bit
// wider than the inputs so it never overflows.
module diff_amp #(
  parameter int unsigned COLS     = conv3d_pkg::XB_COLS,
  parameter int unsigned CUR_BITS = conv3d_pkg::cur_bits(conv3d_pkg::XB_ROWS, conv3d_pkg::NUM_LAYERS)
) (
  input  logic        [COLS-1:0][CUR_BITS-1:0] i_p,
  input  logic        [COLS-1:0][CUR_BITS-1:0] i_n,
  output logic signed [COLS-1:0][CUR_BITS:0]   i_2
);

  always_comb begin
    for (int unsigned j = 0; j < COLS; j++) begin
      logic signed [CUR_BITS:0] i0, i1;
      i0     = $signed({1'b0, i_n[j]});  // I0 = In   (no current into the op-amp input)
      i1     = -i0;                      // I1 = -V0/R0 = -In
      i_2[j] = $signed({1'b0, i_p[j]}) + i1;
    end
  end

endmodule
