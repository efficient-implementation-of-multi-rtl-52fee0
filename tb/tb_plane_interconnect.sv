// tb_plane_interconnect: self-checking test of the current-plane interconnect.
// Random plane currents and random I_p/I_n masks per BL column, plus the two
// masks of the paper's example (separation at planes 2 and 1); I_p and I_n are
// compared with sums formed in the testbench.
module tb_plane_interconnect;
  localparam int C = 4, NCP = 5, CB = 20;
  int checks = 0, failures = 0;
  logic [NCP-1:0][C-1:0][CB-1:0] cp_i;
  logic [C-1:0][NCP-1:0] cp_pos;
  logic [C-1:0][CB-1:0] i_p, i_n;

  plane_interconnect #(.COLS(C), .NCP(NCP), .CUR_BITS(CB)) dut (.*);

  initial begin
    for (int t = 0; t < 500; t++) begin
      for (int k = 0; k < NCP; k++) for (int j = 0; j < C; j++) cp_i[k][j] = CB'($urandom % 100000);
      for (int j = 0; j < C; j++) cp_pos[j] = NCP'($urandom);
      if (t == 0) begin cp_pos[0] = 5'b11100; cp_pos[1] = 5'b11110; end
      #1;
      for (int j = 0; j < C; j++) begin
        longint ep, en;
        ep = 0; en = 0;
        for (int k = 0; k < NCP; k++) if (cp_pos[j][k]) ep += cp_i[k][j]; else en += cp_i[k][j];
        checks += 2;
        if (i_p[j] != CB'(ep)) begin failures++; $display("FAIL t%0d col %0d Ip %0d want %0d", t, j, i_p[j], ep); end
        if (i_n[j] != CB'(en)) begin failures++; $display("FAIL t%0d col %0d In %0d want %0d", t, j, i_n[j], en); end
      end
    end
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
