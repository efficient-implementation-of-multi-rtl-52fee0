// tb_conv3d_tile: end-to-end test of one tile at reduced size (2 engines,
// 4 channels, 3 kernels per engine, 10-layer stack, 256-word buffer).
// Kernels and image are written through the mesh/host port, the run is
// started, and every output word is read back and compared with
//   out[k][p] = clip16( sum_q sum_i w[k][q][i] * img[p][i] )
// computed here straight from the kernels (no layer mapping involved).
// Runs: (1) the paper's two edge-detection kernels, (2) random small kernels
// with the host idle, checking the clocks per logical cycle, (3) large
// kernels with the host hammering the bus (ADC clipping, bus contention),
// (4) a kernel that needs more layers than the stack (err_fit), (5) 5x5
// kernels in seven passes whose partial outputs are added in the buffer.
// Mechanisms counted and required at least once: dummy layer at the bottom
// and at the top, mixed-sign positions, err_fit, ADC clipping, host stalled by
// the running tile, engine writes stalled by each other, a multi-pass run.
module tb_conv3d_tile;
  import conv3d_pkg::*;
  localparam int NPE = 2, R = 4, C = 3, L = 10, D = 256, AB = 16;
  localparam int AW = 8, NK = NPE * C;
  localparam int WD = (R * 8 > C * AB) ? R * 8 : C * AB;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic host_req = 0, host_we = 0, host_gnt, host_rvalid, start = 0, busy, done, err_fit, adc_sat;
  logic [AW-1:0] host_addr = '0, cfg_hw, cfg_wbase, cfg_ibase, cfg_obase, pixels_done;
  logic [WD-1:0] host_wdata = '0, host_rdata;
  logic [KPOS_BITS-1:0] cfg_kpos, pass_first;
  logic [$clog2(L+1)-1:0] cfg_ppass;
  logic [$clog2(NK+1)-1:0] cfg_nk;
  ctrl_state_e state;

  conv3d_tile #(.NPE(NPE), .ROWS(R), .COLS(C), .LAYERS(L), .DEPTH(D), .ADC_BITS(AB)) dut (.*);

  int kw [NK][32][R];
  int img [64][R];
  int cnt_dummy_bottom = 0, cnt_dummy_top = 0, cnt_mixed = 0, cnt_err_fit = 0, cnt_sat = 0;
  int cnt_host_stall = 0, cnt_pe_stall = 0, cnt_multipass = 0;

  // engine write contention, seen from inside the tile
  always @(posedge clk) if (rst_n && $countones(dut.m_req[NPE+1:2]) > 1) cnt_pe_stall++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, what); end
  endtask

  task automatic host_write(int a, logic [WD-1:0] d);
    @(negedge clk);
    host_req = 1; host_we = 1; host_addr = AW'(a); host_wdata = d;
    @(posedge clk);
    while (!host_gnt) begin cnt_host_stall += busy; @(posedge clk); end
    @(negedge clk);
    host_req = 0; host_we = 0;
  endtask

  task automatic host_read(int a, output logic [WD-1:0] d);
    @(negedge clk);
    host_req = 1; host_we = 0; host_addr = AW'(a);
    #1;
    while (!host_gnt) begin @(posedge clk); cnt_host_stall += busy; #1; end
    @(posedge clk);
    @(negedge clk);
    host_req = 0;
    check(host_rvalid, "host rvalid");
    d = host_rdata;
  endtask

  // count mapping mechanisms from the kernels themselves
  task automatic count_kernel(int j, int kp);
    int nn, np;
    nn = 0; np = 0;
    for (int q = 0; q < kp; q++) begin
      bit n, p;
      n = 0; p = 0;
      for (int i = 0; i < R; i++) begin if (kw[j][q][i] < 0) n = 1; if (kw[j][q][i] > 0) p = 1; end
      nn += n; np += (p || !n);
      cnt_mixed += (n && p);
    end
    if (nn % 2) cnt_dummy_bottom++;
    else if ((nn + np) % 2) cnt_dummy_top++;
  endtask

  task automatic run(int kp, int hw, bit hammer, bit expect_fit_err, bit check_rate, int pp = 0);
    logic [WD-1:0] d;
    int t_start, t_prev, nsteps;
    bit mp_seen;
    mp_seen = 0;
    cfg_kpos = 8'(kp); cfg_ppass = 4'(pp); cfg_nk = 3'(NK); cfg_hw = AW'(hw);
    cfg_wbase = 8'd0; cfg_ibase = 8'd170; cfg_obase = 8'd190;
    for (int j = 0; j < NK; j++) begin
      count_kernel(j, kp);
      for (int q = 0; q < kp; q++) begin
        d = '0;
        for (int i = 0; i < R; i++) d[8*i +: 8] = 8'(kw[j][q][i]);
        host_write(j * kp + q, d);
      end
    end
    for (int p = 0; p < hw; p++) begin
      d = '0;
      for (int i = 0; i < R; i++) d[8*i +: 8] = 8'(img[p][i]);
      host_write(170 + p, d);
    end
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t_start = 0; t_prev = -1; nsteps = 0;
    while (!done) begin
      logic [AW-1:0] pd;
      if (pass_first != 0 && !mp_seen) begin cnt_multipass++; mp_seen = 1; end
      pd = pixels_done;
      if (hammer && ($urandom % 2)) begin
        logic [WD-1:0] junk;
        host_read($urandom % 100, junk);
      end else @(negedge clk);
      t_start++;
      if (check_rate && pixels_done != pd) begin
        if (t_prev >= 0) begin
          check(t_start - t_prev == 5 + NPE, $sformatf("logical cycle of %0d clocks (want %0d)", t_start - t_prev, 5 + NPE));
          nsteps++;
        end
        t_prev = t_start;
      end
    end
    if (check_rate) check(nsteps == hw - 1, "logical cycles measured");
    check(done && pixels_done == AW'(hw), "all pixels done");
    check(err_fit == expect_fit_err, "err_fit");
    cnt_err_fit += err_fit;
    if (!expect_fit_err) begin
      bit any_sat;
      any_sat = 0;
      for (int p = 0; p < hw; p++) for (int e = 0; e < NPE; e++) begin
        host_read(190 + p * NPE + e, d);
        for (int jj = 0; jj < C; jj++) begin
          longint acc;
          int ex;
          logic signed [AB-1:0] got;
          acc = 0;
          for (int q = 0; q < kp; q++) for (int i = 0; i < R; i++) acc += kw[e*C + jj][q][i] * img[p][i];
          ex = (acc > 32767) ? 32767 : (acc < -32768) ? -32768 : int'(acc);
          any_sat |= (acc > 32767 || acc < -32768);
          got = d[jj*AB +: AB];
          check(int'(got) == ex, $sformatf("pixel %0d kernel %0d: got %0d want %0d", p, e*C + jj, got, ex));
        end
      end
      check(adc_sat == any_sat, "adc_sat flag");
      cnt_sat += adc_sat;
    end
  endtask

  int ex0 [9] = '{1, -2, 1, -2, 4, -2, 1, -2, 1};
  int ex1 [9] = '{1, 1, 1, 1, -8, 1, 1, 1, 1};

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // (1) paper example: kernels 0 and 1 over 3 channels, other kernels zero
    foreach (kw[j, q, i]) kw[j][q][i] = 0;
    for (int q = 0; q < 9; q++) for (int i = 0; i < 3; i++) begin kw[0][q][i] = ex0[q]; kw[1][q][i] = ex1[q]; end
    for (int q = 0; q < 9; q++) for (int i = 0; i < 3; i++) kw[2][q][i] = (q == 4) ? 2 : 0;
    foreach (img[p, i]) img[p][i] = $urandom % 256;
    run(9, 6, 0, 0, 0);
    // (2) random small kernels, host idle, rate check
    foreach (kw[j, q, i]) kw[j][q][i] = int'($urandom % 7) - 3;
    for (int q = 0; q < 4; q++) kw[0][q][0] = -1;   // keep kernel 0 in the stack
    foreach (img[p, i]) img[p][i] = $urandom % 32;
    run(4, 16, 0, 0, 1);
    // (3) large kernels with bus contention from the host
    foreach (kw[j, q, i]) kw[j][q][i] = ($urandom % 2) ? int'($urandom % 128) : -int'($urandom % 128);
    for (int j = 0; j < NK; j++) for (int q = 0; q < 4; q++) kw[j][q][0] = 50 + q;  // mostly positive positions
    foreach (img[p, i]) img[p][i] = $urandom % 256;
    run(4, 12, 1, 0, 0);
    // (4) a kernel whose 9 positions all hold both signs needs 18 layers
    foreach (kw[j, q, i]) kw[j][q][i] = (i == 0) ? -1 : 1;
    run(9, 2, 0, 1, 0);
    // (5) 5x5 kernels with mixed-sign positions in 7 passes of 4 positions
    //     (4 mixed positions need at most 8 layers plus a dummy: always fits 10)
    foreach (kw[j, q, i]) kw[j][q][i] = int'($urandom % 9) - 4;
    foreach (img[p, i]) img[p][i] = $urandom % 16;
    run(25, 6, 1, 0, 0, 4);

    $display("dummy-bottom %0d dummy-top %0d mixed %0d err_fit %0d adc_sat %0d host-stall %0d pe-stall %0d multipass %0d",
             cnt_dummy_bottom, cnt_dummy_top, cnt_mixed, cnt_err_fit, cnt_sat, cnt_host_stall, cnt_pe_stall, cnt_multipass);
    check(cnt_multipass > 0, "multi-pass run happened");
    check(cnt_dummy_bottom > 0, "dummy layer at the bottom happened");
    check(cnt_dummy_top > 0, "dummy layer at the top happened");
    check(cnt_mixed > 0, "mixed-sign position happened");
    check(cnt_err_fit > 0, "kernel too large happened");
    check(cnt_sat > 0, "ADC clipping happened");
    check(cnt_host_stall > 0, "host stalled by the tile happened");
    check(cnt_pe_stall > 0, "engine write contention happened");
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
