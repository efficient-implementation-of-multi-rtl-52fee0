// tb_pe: self-checking test of one processing engine (4 channels, 3 kernels,
// 6-layer stack, 12-bit ADC). Random conductances and random interconnect
// masks are programmed, random image columns applied, and the word written to
// the bus is compared with a reference that adds each layer's dot product
// with a sign taken from the plane the layer feeds (all voltage planes carry
// the same column), then clips to 12 bits. Also checked: the request appears
// exactly three clocks after start, the write address, that the request
// holds through a stalled grant, the saturation flags, and the addition of a
// partial word from an earlier pass (acc_we/acc_en), clipped to 12 bits.
module tb_pe;
  localparam int R = 4, C = 3, L = 6, NCP = L/2, AB = 12, AW = 6;
  localparam int WD = (R * 8 > C * AB) ? R * 8 : C * AB;
  int checks = 0, failures = 0, nsat = 0, nstall = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic prog_we = 0, cfg_we = 0, start = 0, done, bus_req, bus_gnt = 0;
  logic [$clog2(L)-1:0] prog_layer;
  logic [$clog2(C)-1:0] prog_col;
  logic [R-1:0][7:0] prog_g;
  logic [NCP-1:0] cfg_cp_pos;
  logic [R-1:0][7:0] vin;
  logic [AW-1:0] out_addr, bus_addr;
  logic [C-1:0] sat;
  logic [WD-1:0] bus_wdata, acc_data = '0;
  logic acc_we = 0, acc_en = 0;
  int nacc = 0;

  pe #(.ROWS(R), .COLS(C), .LAYERS(L), .ADC_BITS(AB), .AW(AW), .WIDTH(WD)) dut (.*);

  int unsigned gm [L][R][C];
  bit pos_m [C][NCP];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 10; round++) begin
      int gmax;
      gmax = (round < 5) ? 3 : 129;   // later rounds drive the ADC into clipping
      for (int j = 0; j < C; j++) for (int l = 0; l < L; l++) begin
        @(negedge clk);
        prog_we = 1; prog_layer = 3'(l); prog_col = 2'(j);
        for (int i = 0; i < R; i++) begin gm[l][i][j] = $urandom % gmax; prog_g[i] = 8'(gm[l][i][j]); end
        cfg_we = (l == 0);
        if (l == 0) for (int k = 0; k < NCP; k++) begin pos_m[j][k] = $urandom % 2; cfg_cp_pos[k] = pos_m[j][k]; end
      end
      @(negedge clk);
      prog_we = 0; cfg_we = 0;
      for (int t = 0; t < 20; t++) begin
        int exp_code [C];
        bit exp_sat [C];
        int stall;
        int accv [C];
        for (int i = 0; i < R; i++) vin[i] = 8'($urandom);
        out_addr = AW'($urandom);
        // every other logical cycle adds a partial word of an earlier pass
        acc_en = (t % 2 == 1);
        nacc += acc_en;
        for (int j = 0; j < C; j++) begin
          accv[j] = int'($urandom % 4096) - 2048;
          acc_data[j*AB +: AB] = AB'(accv[j]);
        end
        @(negedge clk);
        acc_we = 1;
        @(negedge clk);
        acc_we = 0;
        acc_data = '1;
        for (int j = 0; j < C; j++) begin
          longint acc;
          acc = 0;
          for (int l = 0; l < L; l++) begin
            longint dp;
            dp = 0;
            for (int i = 0; i < R; i++) dp += vin[i] * gm[l][i][j];
            acc += pos_m[j][l / 2] ? dp : -dp;
          end
          exp_sat[j] = (acc > 2047) || (acc < -2048);
          acc = (acc > 2047) ? 2047 : (acc < -2048) ? -2048 : acc;
          if (acc_en) acc += accv[j];
          exp_sat[j] |= (acc > 2047) || (acc < -2048);
          exp_code[j] = (acc > 2047) ? 2047 : (acc < -2048) ? -2048 : int'(acc);
          nsat += exp_sat[j];
        end
        start = 1;
        @(negedge clk);
        start = 0;
        vin = '1;             // inputs may move once sampled
        check(!bus_req, "no request one clock after start");
        @(negedge clk);
        check(!bus_req, "no request two clocks after start");
        @(negedge clk);
        check(bus_req, "request three clocks after start");
        stall = $urandom % 3;
        nstall += (stall > 0);
        repeat (stall) begin
          @(negedge clk);
          check(bus_req && !done, "request held while not granted");
        end
        bus_gnt = 1;
        #1;
        check(done, "done on grant");
        check(bus_addr == out_addr, "write address");
        for (int j = 0; j < C; j++) begin
          logic signed [AB-1:0] cj;
          cj = bus_wdata[j*AB +: AB];
          check(int'(cj) == exp_code[j], $sformatf("round %0d t%0d col %0d: got %0d want %0d", round, t, j, cj, exp_code[j]));
          check(sat[j] == exp_sat[j], "saturation flag");
        end
        @(negedge clk);
        bus_gnt = 0;
        check(!bus_req, "request dropped after grant");
      end
    end
    check(nsat > 0 && nstall > 0 && nacc > 0, "saturation, stalled grants and accumulation were exercised");
    $display("saturated codes %0d, stalled writes %0d", nsat, nstall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
