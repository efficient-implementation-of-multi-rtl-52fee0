// tb_conv3d_tile_full: one complete operation of a tile at its default size
// (4 engines, 128 x 128 crossbars, 16 layers, 8192-word buffer): 512 random
// 3x3 kernels over 128 channels are loaded through the host port and mapped,
// then 8 image columns are streamed and all 32 output words are read back and
// compared with out[k][p] = sum_q sum_i w[k][q][i] * img[p][i], computed
// here from the kernels. Each kernel position has one sign over all
// channels, so a 3x3 kernel takes 9 layers plus at most one dummy layer. Weights and pixels are kept small enough that no
// output clips.
module tb_conv3d_tile_full;
  import conv3d_pkg::*;
  localparam int NPE = NUM_PE, R = XB_ROWS, C = XB_COLS, NK = NPE * C, KP = 9, HW = 8;
  localparam int AW = ADDR_BITS, AB = ADC_BITS;
  localparam int WD = buf_bits(R, C, AB);
  localparam int WBASE = 0, IBASE = 5000, OBASE = 6000;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic host_req = 0, host_we = 0, host_gnt, host_rvalid, start = 0, busy, done, err_fit, adc_sat;
  logic [AW-1:0] host_addr = '0, cfg_hw, cfg_wbase, cfg_ibase, cfg_obase, pixels_done;
  logic [WD-1:0] host_wdata = '0, host_rdata;
  logic [KPOS_BITS-1:0] cfg_kpos, pass_first;
  logic [$clog2(MAX_POS+1)-1:0] cfg_ppass;
  logic [$clog2(NK+1)-1:0] cfg_nk;
  ctrl_state_e state;

  conv3d_tile dut (.*);

  byte kw [NK][KP][R];
  byte img [HW][R];

  task automatic host_write(int a, logic [WD-1:0] d);
    @(negedge clk);
    host_req = 1; host_we = 1; host_addr = AW'(a); host_wdata = d;
    #1;
    while (!host_gnt) begin @(posedge clk); #1; end
    @(posedge clk);
    @(negedge clk);
    host_req = 0; host_we = 0;
  endtask

  task automatic host_read(int a, output logic [WD-1:0] d);
    @(negedge clk);
    host_req = 1; host_we = 0; host_addr = AW'(a);
    #1;
    while (!host_gnt) begin @(posedge clk); #1; end
    @(posedge clk);
    @(negedge clk);
    host_req = 0;
    d = host_rdata;
  endtask

  initial begin
    logic [WD-1:0] d;
    int cycles;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // one sign per kernel position across all channels, as in the paper's
    // example, so that 9 positions fit the 16-layer stack
    for (int j = 0; j < NK; j++) for (int q = 0; q < KP; q++) begin
      bit neg;
      neg = $urandom % 2;
      for (int i = 0; i < R; i++) kw[j][q][i] = neg ? -byte'($urandom % 4) : byte'($urandom % 4);
    end
    foreach (img[p, i]) img[p][i] = byte'($urandom % 8);
    for (int j = 0; j < NK; j++) for (int q = 0; q < KP; q++) begin
      d = '0;
      for (int i = 0; i < R; i++) d[8*i +: 8] = kw[j][q][i];
      host_write(WBASE + j * KP + q, d);
    end
    for (int p = 0; p < HW; p++) begin
      d = '0;
      for (int i = 0; i < R; i++) d[8*i +: 8] = img[p][i];
      host_write(IBASE + p, d);
    end
    cfg_kpos = KP; cfg_ppass = 0; cfg_nk = NK; cfg_hw = HW;
    cfg_wbase = WBASE; cfg_ibase = IBASE; cfg_obase = OBASE;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cycles = 0;
    while (!done) begin @(negedge clk); cycles++; end
    $display("run took %0d clocks", cycles);
    checks++;
    if (err_fit) begin failures++; $display("FAIL: err_fit"); end
    checks++;
    if (adc_sat) begin failures++; $display("FAIL: unexpected clipping"); end
    for (int p = 0; p < HW; p++) for (int e = 0; e < NPE; e++) begin
      host_read(OBASE + p * NPE + e, d);
      for (int jj = 0; jj < C; jj++) begin
        int acc;
        logic signed [AB-1:0] got;
        acc = 0;
        for (int q = 0; q < KP; q++) for (int i = 0; i < R; i++) acc += int'(kw[e*C + jj][q][i]) * int'(img[p][i]);
        got = d[jj*AB +: AB];
        checks++;
        if (int'(got) != acc) begin
          failures++;
          if (failures < 10) $display("FAIL pixel %0d kernel %0d: got %0d want %0d", p, e*C + jj, got, acc);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
