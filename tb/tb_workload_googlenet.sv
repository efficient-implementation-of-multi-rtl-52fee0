// tb_workload_googlenet: the GoogLeNet layers that fit one tile, run on a
// tile at its default size (4 engines, 128 x 128 crossbars, 16 layers,
// 8192-word buffer). The layer sizes are the usual ones for that network.
//
// Inception 3b 3x3 (128 channels, 192 kernels of 3x3, 28x28 outputs): one
// pass, each position with one sign over all channels, so 9 positions take at
// most 10 layers; its 192 kernels fill engine 0 and part of engine 1.
//
// Inception 3a 5x5 (16 input channels, 32 kernels of 5x5, 28x28 outputs): 25
// positions do not fit 16 layers, so the kernel is run in passes. The first
// run has random weights with both signs inside every position, as trained
// weights have, and uses passes of 7 positions (0-6, 7-13, 14-20, 21-24); 7 positions fit
// for any sign pattern (at most 14 layers plus one dummy layer). The second
// run gives every position one sign over all channels, as in the original
// worked example, and uses two passes of 13 and 12 positions.
//
// Only the first HW pixels of the 784 are streamed, to keep the run short. Outputs are
// compared with out[k][p] = sum_q sum_i w[k][q][i] * img[p][i], the tile's
// transfer function; values are small enough that no partial sum clips. The
// test also checks the number of passes and that no kernel was reported as
// not fitting.
module tb_workload_googlenet;
  import conv3d_pkg::*;
  localparam int NPE = NUM_PE, R = XB_ROWS, C = XB_COLS;
  localparam int MAXCH = 128, MAXNK = 192, MAXKP = 25, HW = 16;
  localparam int AW = ADDR_BITS, AB = ADC_BITS;
  localparam int WD = buf_bits(R, C, AB);
  localparam int WBASE = 0, IBASE = 3000, OBASE = 4000;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic host_req = 0, host_we = 0, host_gnt, host_rvalid, start = 0, busy, done, err_fit, adc_sat;
  logic [AW-1:0] host_addr = '0, cfg_hw, cfg_wbase, cfg_ibase, cfg_obase, pixels_done;
  logic [WD-1:0] host_wdata = '0, host_rdata;
  logic [KPOS_BITS-1:0] cfg_kpos, pass_first;
  logic [$clog2(MAX_POS+1)-1:0] cfg_ppass;
  logic [$clog2(NPE*C+1)-1:0] cfg_nk;
  ctrl_state_e state;

  conv3d_tile dut (.*);

  byte kw [MAXNK][MAXKP][MAXCH];
  byte img [HW][MAXCH];

  // passes seen: count the changes of pass_first while the tile is busy
  int passes;
  logic [KPOS_BITS-1:0] last_first = '1;
  always @(posedge clk)
    if (busy && state == ST_PE_RUN && pass_first != last_first) begin
      passes++;
      last_first <= pass_first;
    end

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

  task automatic run(string name, int CH, int NK, int KP, bit single_sign, int ppass);
    logic [WD-1:0] d;
    int cycles;
    for (int j = 0; j < NK; j++) for (int q = 0; q < KP; q++) begin
      bit neg;
      neg = 1'($urandom % 2);
      for (int i = 0; i < CH; i++)
        if (!single_sign) kw[j][q][i] = byte'(int'($urandom % 7) - 3);
        else kw[j][q][i] = neg ? -byte'($urandom % 3) : byte'($urandom % 3);
    end
    foreach (img[p, i]) img[p][i] = byte'($urandom % (CH > 64 ? 8 : 16));
    for (int j = 0; j < NK; j++) for (int q = 0; q < KP; q++) begin
      d = '0;
      for (int i = 0; i < CH; i++) d[8*i +: 8] = kw[j][q][i];
      host_write(WBASE + j * KP + q, d);
    end
    for (int p = 0; p < HW; p++) begin
      d = '0;
      for (int i = 0; i < CH; i++) d[8*i +: 8] = img[p][i];
      host_write(IBASE + p, d);
    end
    cfg_kpos = KPOS_BITS'(KP); cfg_ppass = 5'(ppass); cfg_nk = 10'(NK); cfg_hw = AW'(HW);
    cfg_wbase = AW'(WBASE); cfg_ibase = AW'(IBASE); cfg_obase = AW'(OBASE);
    passes = 0;
    last_first = '1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cycles = 0;
    while (!done) begin @(negedge clk); cycles++; end
    $display("%s: %0d pixels, %0d passes, %0d clocks", name, HW, passes, cycles);
    checks++;
    if (passes != (ppass == 0 ? 1 : (KP + ppass - 1) / ppass)) begin failures++; $display("FAIL: %0d passes", passes); end
    checks++;
    if (err_fit) begin failures++; $display("FAIL: err_fit"); end
    checks++;
    if (adc_sat) begin failures++; $display("FAIL: unexpected clipping"); end
    for (int p = 0; p < HW; p++) begin
      for (int k = 0; k < NK; k++) begin
        int acc;
        logic signed [AB-1:0] got;
        if (k % C == 0) host_read(OBASE + p * NPE + k / C, d);
        acc = 0;
        for (int q = 0; q < KP; q++) for (int i = 0; i < CH; i++) acc += int'(kw[k][q][i]) * int'(img[p][i]);
        got = d[(k % C)*AB +: AB];
        checks++;
        if (int'(got) != acc) begin
          failures++;
          if (failures < 10) $display("FAIL pixel %0d kernel %0d: got %0d want %0d", p, k, got, acc);
        end
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run("inception3b 3x3", 128, 192, 9, 1, 0);
    run("inception3a 5x5", 16, 32, 25, 0, 7);
    run("inception3a 5x5", 16, 32, 25, 1, 13);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
