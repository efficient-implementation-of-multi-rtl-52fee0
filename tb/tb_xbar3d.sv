// tb_xbar3d: self-checking test of the 3D crossbar model. Random conductances
// are programmed column by column and random voltages applied to each voltage
// plane; every current plane is compared with a reference that walks the
// layers one by one and adds each layer's V*G to the current plane it touches
// (layer L touches voltage plane (L+1)/2 and current plane L/2).
module tb_xbar3d;
  localparam int R = 4, C = 3, L = 6, NVP = L/2 + 1, NCP = L/2, CB = 24;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic prog_we = 0;
  logic [$clog2(L)-1:0] prog_layer;
  logic [$clog2(C)-1:0] prog_col;
  logic [R-1:0][7:0] prog_g;
  logic [NVP-1:0][R-1:0][7:0] vp_v;
  logic [NCP-1:0][C-1:0][CB-1:0] cp_i;

  xbar3d #(.ROWS(R), .COLS(C), .LAYERS(L), .CUR_BITS(CB)) dut (.*);

  int unsigned gm [L][R][C];

  initial begin
    for (int round = 0; round < 20; round++) begin
      for (int l = 0; l < L; l++) for (int j = 0; j < C; j++) begin
        @(negedge clk);
        prog_we = 1; prog_layer = 3'(l); prog_col = 2'(j);
        for (int i = 0; i < R; i++) begin
          gm[l][i][j] = (round == 0 && l == 5) ? 0 : $urandom % 129;
          prog_g[i] = 8'(gm[l][i][j]);
        end
      end
      @(negedge clk) prog_we = 0;
      for (int t = 0; t < 10; t++) begin
        longint unsigned refc [NCP][C];
        for (int v = 0; v < NVP; v++) for (int i = 0; i < R; i++) vp_v[v][i] = 8'($urandom);
        #1;
        foreach (refc[a, b]) refc[a][b] = 0;
        for (int l = 0; l < L; l++)
          for (int j = 0; j < C; j++)
            for (int i = 0; i < R; i++)
              refc[l / 2][j] += vp_v[(l + 1) / 2][i] * gm[l][i][j];
        for (int k = 0; k < NCP; k++) for (int j = 0; j < C; j++) begin
          checks++;
          if (cp_i[k][j] != CB'(refc[k][j])) begin
            failures++;
            $display("FAIL round %0d plane %0d col %0d: got %0d want %0d", round, k, j, cp_i[k][j], refc[k][j]);
          end
        end
      end
    end
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
