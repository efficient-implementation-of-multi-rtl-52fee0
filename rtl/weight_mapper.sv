// weight_mapper: maps one kernel (one BL column of the 3D crossbar) onto the
// memristor layers, separating negative from non-negative weights.
//
// A kernel of l*l positions is given as KPOS words of ROWS signed weights (one
// weight per channel; the word for position q holds the 1x1 weights of all
// channels, as in the 1x1-decomposition of multi-channel convolution). Each
// position becomes one layer whose conductances are the weight magnitudes.
// The steps follow the paper's mapping flow:
//   1. scan: a position is "negative" if any of its channel weights is
//      negative and "non-negative" if any is positive or if none is negative
//      (all-zero positions count as non-negative). A position with weights of
//      both signs takes one layer in each group (this generalises the paper's
//      example, where all channels of a position share one sign).
//   2. negative positions go to the layers just below a separation voltage
//      plane v = ceil(nneg/2), i.e. layers 2v-nneg .. 2v-1, holding |w| of the
//      negative weights; non-negative positions go to layers 2v .. 2v+npos-1,
//      holding the positive weights. Layers outside both ranges (the dummy
//      layer when nneg is odd, or unused upper layers) get conductance 0, so
//      they add no current.
//   3. interconnect: current plane k goes to I_p when k >= v, else to I_n.
// `fits` is low when 2v + npos exceeds LAYERS; the kernel then needs more
// than one pass, which this mapper does not split.
// Purely combinational.
module weight_mapper #(
  parameter int unsigned ROWS    = conv3d_pkg::XB_ROWS,
  parameter int unsigned LAYERS  = conv3d_pkg::NUM_LAYERS,
  parameter int unsigned MAX_POS = conv3d_pkg::MAX_POS,
  parameter int unsigned W_BITS  = conv3d_pkg::W_BITS,
  parameter int unsigned G_BITS  = conv3d_pkg::G_BITS,
  localparam int unsigned NCP    = LAYERS / 2,
  localparam int unsigned PB     = $clog2(MAX_POS + 1),
  localparam int unsigned LB     = $clog2(LAYERS + 1)
) (
  input  logic signed [MAX_POS-1:0][ROWS-1:0][W_BITS-1:0] w,
  input  logic [PB-1:0]                          kpos,     // positions used (l*l)
  output logic [LAYERS-1:0][ROWS-1:0][G_BITS-1:0] layer_g,
  output logic [NCP-1:0]                         cp_pos,   // 1: plane feeds I_p
  output logic [LB-1:0]                          sep_vp,   // separation voltage plane
  output logic [PB-1:0]                          nneg,
  output logic [PB-1:0]                          npos,
  output logic                                   fits
);

  logic [MAX_POS-1:0] has_neg, has_pos;
  logic [MAX_POS-1:0][LB:0] neg_layer, pos_layer;  // target layer of each group
  logic [LB:0] base_n, base_p;

  always_comb begin
    // step 1: scan the kernel
    for (int unsigned q = 0; q < MAX_POS; q++) begin
      logic any_neg, any_pos;
      any_neg = 1'b0;
      any_pos = 1'b0;
      for (int unsigned i = 0; i < ROWS; i++) begin
        if ($signed(w[q][i]) < 0) any_neg = 1'b1;
        if ($signed(w[q][i]) > 0) any_pos = 1'b1;
      end
      has_neg[q] = (q < kpos) && any_neg;
      has_pos[q] = (q < kpos) && (any_pos || !any_neg);
    end
    nneg = '0;
    npos = '0;
    for (int unsigned q = 0; q < MAX_POS; q++) begin
      nneg += PB'(has_neg[q]);
      npos += PB'(has_pos[q]);
    end
    sep_vp = LB'((32'(nneg) + 1) / 2);
    base_p = (LB + 1)'(2 * sep_vp);
    base_n = base_p - (LB + 1)'(nneg);
    fits   = ((LB + 2)'(base_p) + (LB + 2)'(npos)) <= (LB + 2)'(LAYERS);

    // step 2: rank positions inside each group and assign layers
    begin
      logic [LB:0] rn, rp;
      rn = '0;
      rp = '0;
      for (int unsigned q = 0; q < MAX_POS; q++) begin
        neg_layer[q] = base_n + rn;
        pos_layer[q] = base_p + rp;
        rn += (LB + 1)'(has_neg[q]);
        rp += (LB + 1)'(has_pos[q]);
      end
    end

    layer_g = '0;
    for (int unsigned q = 0; q < MAX_POS; q++) begin
      for (int unsigned l = 0; l < LAYERS; l++) begin
        if (has_neg[q] && neg_layer[q] == (LB + 1)'(l)) begin
          for (int unsigned i = 0; i < ROWS; i++)
            layer_g[l][i] = ($signed(w[q][i]) < 0) ? G_BITS'(-$signed(w[q][i])) : '0;
        end
        if (has_pos[q] && pos_layer[q] == (LB + 1)'(l)) begin
          for (int unsigned i = 0; i < ROWS; i++)
            layer_g[l][i] = ($signed(w[q][i]) > 0) ? G_BITS'(w[q][i]) : '0;
        end
      end
    end

    // step 3: interconnect configuration
    for (int unsigned k = 0; k < NCP; k++) cp_pos[k] = ((LB)'(k) >= sep_vp);
  end

endmodule
