// tb_tile_controller: self-checking test of the tile controller with a
// behavioural buffer on its bus port and two stand-in engines (random
// completion delays). Checked: every BL column of every engine is programmed
// in every layer with the conductances of an independently computed
// sign-separated mapping (zeros for unused columns), the interconnect masks,
// that each image column is applied in order with the right output
// addresses, that `done` follows the last pixel, and that a kernel needing
// more layers than the stack sets err_fit, and that the same kernel run in
// passes of 4 positions streams the image once per pass and loads the
// earlier partial words into the engines in every pass after the first.
module tb_tile_controller;
  import conv3d_pkg::*;
  localparam int NPE = 2, R = 3, C = 2, L = 10, MP = 10, AW = 8, WD = 32;
  localparam int NCP = L / 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done, err_fit, bus_req, bus_gnt, bus_rvalid = 0, pe_start;
  logic [KPOS_BITS-1:0] cfg_kpos, pass_first;
  logic [$clog2(MP+1)-1:0] cfg_ppass;
  logic [NPE-1:0] acc_we;
  logic acc_en;
  int n_acc_we = 0;
  always @(posedge clk) n_acc_we += $countones(acc_we);
  logic [$clog2(NPE*C+1)-1:0] cfg_nk;
  logic [AW-1:0] cfg_hw, cfg_wbase, cfg_ibase, cfg_obase, pixels_done, bus_addr;
  logic [WD-1:0] bus_rdata;
  ctrl_state_e state;
  logic [NPE-1:0] prog_we, cfg_we, pe_done;
  logic [$clog2(L)-1:0] prog_layer;
  logic [$clog2(C)-1:0] prog_col;
  logic [R-1:0][7:0] prog_g;
  logic [NCP-1:0] cfg_cp_pos;
  logic [R-1:0][7:0] vin;
  logic [NPE-1:0][AW-1:0] pe_out_addr;

  tile_controller #(.NPE(NPE), .ROWS(R), .COLS(C), .LAYERS(L), .MAX_POS(MP), .AW(AW), .WIDTH(WD)) dut (.*);

  // buffer stand-in
  logic [WD-1:0] mem [256];
  assign bus_gnt = bus_req && ($urandom % 4 != 0);
  always_ff @(posedge clk) begin
    bus_rvalid <= bus_gnt;
    if (bus_gnt) bus_rdata <= mem[bus_addr];
  end

  // programmed state seen from the engines
  int g_seen [NPE][L][R][C];
  logic [NCP-1:0] pos_seen [NPE][C];
  always_ff @(posedge clk) for (int e = 0; e < NPE; e++) begin
    if (prog_we[e]) for (int i = 0; i < R; i++) g_seen[e][prog_layer][i][prog_col] <= prog_g[i];
    if (cfg_we[e]) pos_seen[e][prog_col] <= cfg_cp_pos;
  end

  // engine stand-ins: done after a random delay
  int pix_seen = 0;
  logic [AW-1:0] addr_seen [NPE];
  initial pe_done = '0;
  always @(posedge clk) if (pe_start) begin
    int pix;
    pix_seen++;
    pix = (pix_seen - 1) % cfg_hw;
    checks++;
    for (int i = 0; i < R; i++)
      if (vin[i] != mem[cfg_ibase + pix][8*i +: 8]) begin failures++; $display("FAIL pixel %0d vin", pix_seen - 1); break; end
    for (int e = 0; e < NPE; e++) begin
      checks++;
      if (pe_out_addr[e] != cfg_obase + AW'(pix * NPE + e)) begin failures++; $display("FAIL out addr"); end
    end
    fork begin
      for (int e = 0; e < NPE; e++) begin
        repeat (1 + $urandom % 4) @(posedge clk);
        pe_done[e] <= 1'b1;
        @(posedge clk);
        pe_done[e] <= 1'b0;
      end
    end join_none
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, what); end
  endtask

  int kw [NPE*C][MP][R];
  int ex0 [9] = '{1, -2, 1, -2, 4, -2, 1, -2, 1};
  int ex1 [9] = '{1, 1, 1, 1, -8, 1, 1, 1, 1};

  // pp: positions per pass (0 = all); the mapping check covers the last pass
  task automatic run_case(int kp, int nk, int hw, bit expect_fail, int pp = 0);
    int t0, npass, lq0, lqn;
    npass = (pp == 0 || pp >= kp) ? 1 : (kp + pp - 1) / pp;
    lq0 = (npass - 1) * ((pp == 0) ? kp : pp);
    lqn = kp - lq0;
    n_acc_we = 0;
    cfg_kpos = 8'(kp); cfg_ppass = 4'(pp); cfg_nk = 3'(nk); cfg_hw = AW'(hw);
    cfg_wbase = 8'd10; cfg_ibase = 8'd100; cfg_obase = 8'd200;
    for (int j = 0; j < nk; j++) for (int q = 0; q < kp; q++) begin
      mem[cfg_wbase + j*kp + q] = '0;
      for (int i = 0; i < R; i++) mem[cfg_wbase + j*kp + q][8*i +: 8] = 8'(kw[j][q][i]);
    end
    for (int p = 0; p < hw; p++) mem[cfg_ibase + p] = WD'($urandom);
    pix_seen = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = 0;
    while (!done) begin @(negedge clk); t0++; end
    check(pix_seen == hw * npass, $sformatf("%0d pixels applied (want %0d)", pix_seen, hw * npass));
    check(n_acc_we == (npass - 1) * hw * NPE, $sformatf("%0d partial words loaded", n_acc_we));
    check(err_fit == expect_fail, "err_fit");
    // reference mapping per column
    for (int j = 0; j < NPE*C; j++) begin
      int negq[$], posq[$], v, lay [L], sgn [L];
      negq.delete(); posq.delete();
      for (int l = 0; l < L; l++) lay[l] = -1;
      if (j < nk) for (int q = lq0; q < lq0 + lqn; q++) begin
        bit n, p;
        n = 0; p = 0;
        for (int i = 0; i < R; i++) begin if (kw[j][q][i] < 0) n = 1; if (kw[j][q][i] > 0) p = 1; end
        if (n) negq.push_back(q);
        if (p || !n) posq.push_back(q);
      end
      v = (negq.size() + 1) / 2;
      foreach (negq[k]) begin lay[2*v - negq.size() + k] = negq[k]; sgn[2*v - negq.size() + k] = -1; end
      foreach (posq[k]) if (2*v + k < L) begin lay[2*v + k] = posq[k]; sgn[2*v + k] = 1; end
      for (int k = 0; k < NCP; k++) check(pos_seen[j / C][j % C][k] == (k >= v), $sformatf("col %0d plane %0d routing", j, k));
      for (int l = 0; l < L; l++) for (int i = 0; i < R; i++) begin
        int e;
        e = 0;
        if (lay[l] >= 0) begin
          int x;
          x = kw[j][lay[l]][i];
          e = (sgn[l] < 0) ? ((x < 0) ? -x : 0) : ((x > 0) ? x : 0);
        end
        check(g_seen[j / C][l][i][j % C] == e, $sformatf("col %0d layer %0d row %0d: %0d want %0d", j, l, i, g_seen[j / C][l][i][j % C], e));
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // paper example kernels in columns 0 and 1, random ones after
    for (int q = 0; q < 9; q++) for (int i = 0; i < R; i++) begin
      kw[0][q][i] = ex0[q];
      kw[1][q][i] = ex1[q];
    end
    for (int j = 2; j < NPE*C; j++) for (int q = 0; q < MP; q++) for (int i = 0; i < R; i++)
      kw[j][q][i] = ($urandom % 2) ? int'($urandom % 100) : -int'($urandom % 100);
    for (int j = 2; j < NPE*C; j++) for (int i = 0; i < R; i++) kw[j][0][i] = 5;  // keep j>=2 within 10 layers
    run_case(9, 2, 7, 0);     // the two example kernels only
    for (int j = 2; j < NPE*C; j++) for (int q = 0; q < 4; q++) for (int i = 0; i < R; i++) kw[j][q][i] = int'($urandom % 60) - 30;
    run_case(4, NPE*C, 12, 0); // random 2x2 kernels in all columns
    for (int q = 0; q < 9; q++) for (int i = 0; i < R; i++) kw[3][q][i] = (i == 0) ? -3 : 3;  // all positions mixed
    run_case(9, NPE*C, 3, 1); // 18 layers needed: does not fit
    run_case(9, NPE*C, 5, 0, 4); // the same kernels in passes of 4 positions: 3 passes
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
