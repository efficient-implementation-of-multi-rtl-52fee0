// tb_weight_mapper: self-checking test of the weight mapper.
// Part 1 replays the paper's worked example: two 3x3 edge-detection kernels
// with three identical channels on a 10-layer stack, and checks the
// separation plane, the interconnect masks (planes 0-1 / 2-4 and 0 / 1-4) and
// the conductances of every layer, including the dummy layer (layer 9 for
// kernel 0, layer 0 for kernel 1). Part 2 maps random kernels, with mixed-sign
// positions and kernels too large for the stack, on a 16-layer stack and
// compares with a reference mapping built from explicit position lists.
module tb_weight_mapper;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- part 1: the worked example (3 channels, 10 layers) ------
  localparam int R1 = 3, L1 = 10, P1 = 10;
  logic signed [P1-1:0][R1-1:0][7:0] w1;
  logic [$clog2(P1+1)-1:0] kpos1;
  logic [L1-1:0][R1-1:0][7:0] g1;
  logic [L1/2-1:0] cp1;
  logic [$clog2(L1+1)-1:0] sep1;
  logic [$clog2(P1+1)-1:0] nn1, np1;
  logic fit1;
  weight_mapper #(.ROWS(R1), .LAYERS(L1), .MAX_POS(P1)) dut1 (
    .w(w1), .kpos(kpos1), .layer_g(g1), .cp_pos(cp1), .sep_vp(sep1), .nneg(nn1), .npos(np1), .fits(fit1));

  // ---------------- part 2: random kernels (4 channels, 16 layers) ---------
  localparam int R2 = 4, L2 = 16, P2 = 16;
  logic signed [P2-1:0][R2-1:0][7:0] w2;
  logic [$clog2(P2+1)-1:0] kpos2;
  logic [L2-1:0][R2-1:0][7:0] g2;
  logic [L2/2-1:0] cp2;
  logic [$clog2(L2+1)-1:0] sep2;
  logic [$clog2(P2+1)-1:0] nn2, np2;
  logic fit2;
  weight_mapper #(.ROWS(R2), .LAYERS(L2), .MAX_POS(P2)) dut2 (
    .w(w2), .kpos(kpos2), .layer_g(g2), .cp_pos(cp2), .sep_vp(sep2), .nneg(nn2), .npos(np2), .fits(fit2));

  int k0 [9] = '{1, -2, 1, -2, 4, -2, 1, -2, 1};
  int k1 [9] = '{1, 1, 1, 1, -8, 1, 1, 1, 1};

  int unsigned seed_cnt_mixed = 0, seed_cnt_nofit = 0, cnt_odd = 0;

  initial begin
    // ---- kernel 0 of the example
    w1 = '0;
    for (int q = 0; q < 9; q++) for (int i = 0; i < R1; i++) w1[q][i] = 8'(k0[q]);
    kpos1 = 9;
    #1;
    check(sep1 == 2, "k0 separation plane is voltage plane 2");
    check(cp1 == 5'b11100, "k0: current planes 0-1 -> In, 2-4 -> Ip");
    check(nn1 == 4 && np1 == 5 && fit1, "k0: 4 negative, 5 non-negative, fits");
    for (int l = 0; l < 4; l++) for (int i = 0; i < R1; i++) check(g1[l][i] == 2, $sformatf("k0 layer %0d = |-2|", l));
    for (int i = 0; i < R1; i++) begin
      check(g1[4][i] == 1 && g1[5][i] == 1 && g1[6][i] == 4 && g1[7][i] == 1 && g1[8][i] == 1, "k0 layers 4-8 = 1 1 4 1 1");
      check(g1[9][i] == 0, "k0 layer 9 is the dummy layer");
    end
    // ---- kernel 1 of the example
    for (int q = 0; q < 9; q++) for (int i = 0; i < R1; i++) w1[q][i] = 8'(k1[q]);
    #1;
    check(sep1 == 1, "k1 separation plane is voltage plane 1");
    check(cp1 == 5'b11110, "k1: current plane 0 -> In, 1-4 -> Ip");
    check(nn1 == 1 && np1 == 8 && fit1, "k1: 1 negative, 8 non-negative, fits");
    for (int i = 0; i < R1; i++) begin
      check(g1[0][i] == 0, "k1 layer 0 is the dummy layer");
      check(g1[1][i] == 8, "k1 layer 1 = |-8|");
      for (int l = 2; l < 10; l++) check(g1[l][i] == 1, $sformatf("k1 layer %0d = 1", l));
    end

    // ---- random kernels against a list-based reference
    for (int t = 0; t < 400; t++) begin
      int negq[$], posq[$];
      int kp, v, ref_layer_q [L2], ref_layer_s [L2];
      negq.delete(); posq.delete();
      kp = 1 + ($urandom % 16);
      w2 = '0;
      for (int q = 0; q < kp; q++) begin
        int mode;
        mode = $urandom % 4;   // 0: all >= 0, 1: all <= 0, 2,3: mixed
        for (int i = 0; i < R2; i++) begin
          int x;
          x = int'($urandom % 128);
          if (mode == 1 || (mode >= 2 && ($urandom % 2))) x = -x;
          w2[q][i] = 8'(x);
        end
      end
      kpos2 = 5'(kp);
      #1;
      for (int q = 0; q < kp; q++) begin
        bit n, p;
        n = 0; p = 0;
        for (int i = 0; i < R2; i++) begin
          if ($signed(w2[q][i]) < 0) n = 1;
          if ($signed(w2[q][i]) > 0) p = 1;
        end
        if (n) negq.push_back(q);
        if (p || !n) posq.push_back(q);
        if (n && p) seed_cnt_mixed++;
      end
      v = (negq.size() + 1) / 2;
      if (negq.size() % 2) cnt_odd++;
      for (int l = 0; l < L2; l++) ref_layer_q[l] = -1;
      foreach (negq[k]) begin ref_layer_q[2*v - negq.size() + k] = negq[k]; ref_layer_s[2*v - negq.size() + k] = -1; end
      foreach (posq[k]) if (2*v + k < L2) begin ref_layer_q[2*v + k] = posq[k]; ref_layer_s[2*v + k] = 1; end
      check(fit2 == (2*v + posq.size() <= L2), $sformatf("t%0d fits", t));
      if (2*v + posq.size() > L2) seed_cnt_nofit++;
      check(sep2 == v, $sformatf("t%0d separation plane", t));
      check(nn2 == negq.size() && np2 == posq.size(), $sformatf("t%0d counts", t));
      for (int k = 0; k < L2/2; k++) check(cp2[k] == (k >= v), $sformatf("t%0d plane %0d routing", t, k));
      for (int l = 0; l < L2; l++) for (int i = 0; i < R2; i++) begin
        int e;
        e = 0;
        if (ref_layer_q[l] >= 0) begin
          int x;
          x = $signed(w2[ref_layer_q[l]][i]);
          e = (ref_layer_s[l] < 0) ? ((x < 0) ? -x : 0) : ((x > 0) ? x : 0);
        end
        check(g2[l][i] == 8'(e), $sformatf("t%0d layer %0d row %0d: got %0d want %0d", t, l, i, g2[l][i], e));
      end
    end
    check(seed_cnt_mixed > 0 && seed_cnt_nofit > 0 && cnt_odd > 0, "mixed, odd-negative and non-fitting kernels were exercised");
    $display("mixed positions %0d, kernels not fitting %0d, odd negative counts %0d", seed_cnt_mixed, seed_cnt_nofit, cnt_odd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
