// pe: one ReRAM processing engine of a tile.
//
// Datapath: image column (DAC codes) -> every voltage plane of the 3D crossbar
// -> current planes -> configurable interconnect (I_p / I_n per BL) ->
// difference circuit (I_p - I_n) -> sample-and-hold -> ADC -> one output word
// of COLS signed codes, written to the buffer over the shared bus.
// Following the paper, the WLs of all voltage planes that lie on the same
// vertical plane carry the same voltage, so one image column (one pixel, all
// channels) is applied to all voltage planes at once. The DAC is ideal: the
// pixel code is the WL value.
//
// Programming: prog_we writes one BL column of one layer; cfg_we stores the
// interconnect mask of one BL column (bit k = current plane k feeds I_p).
//
// Timing of one logical cycle: `start` (vin stable) samples the difference
// current into the S+H; one clock later the ADC converts; the clock after that
// the engine raises its bus write request (addr = out_addr captured at
// start) and holds it until gnt; `done` pulses on the grant.
//
// Multi-pass accumulation: when a kernel is run in several passes, acc_we
// loads the engine's partial output word of the earlier passes (from the
// buffer) and, with acc_en high, the word written is the column-wise sum of
// that word and the new ADC codes, clipped to ADC_BITS. `sat` flags the
// columns that clipped, in the ADC or in this addition. The digital
// accumulation is this design's choice; the paper only says that the
// computation is repeated for kernels larger than the stack.
//
// Reset: rst_n is the asynchronous reset of every register here. The
// assertions also use it in their disable condition, so lint sees it sampled
// by a clock too; the logic itself uses it only as an asynchronous reset.
module pe #(
  parameter int unsigned ROWS      = conv3d_pkg::XB_ROWS,
  parameter int unsigned COLS      = conv3d_pkg::XB_COLS,
  parameter int unsigned LAYERS    = conv3d_pkg::NUM_LAYERS,
  parameter int unsigned ADC_BITS  = conv3d_pkg::ADC_BITS,
  parameter int unsigned ADC_SHIFT = 0,
  parameter int unsigned AW        = conv3d_pkg::ADDR_BITS,
  parameter int unsigned WIDTH     = conv3d_pkg::buf_bits(ROWS, COLS, ADC_BITS),
  localparam int unsigned NVP      = LAYERS / 2 + 1,
  localparam int unsigned NCP      = LAYERS / 2,
  localparam int unsigned PIX      = conv3d_pkg::PIX_BITS,
  localparam int unsigned GB       = conv3d_pkg::G_BITS,
  localparam int unsigned CB       = conv3d_pkg::cur_bits(ROWS, LAYERS)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // crossbar and interconnect programming
  input  logic                           prog_we,
  input  logic [$clog2(LAYERS)-1:0]      prog_layer,
  input  logic [$clog2(COLS)-1:0]        prog_col,
  input  logic [ROWS-1:0][GB-1:0]        prog_g,
  input  logic                           cfg_we,
  input  logic [NCP-1:0]                 cfg_cp_pos,
  // compute
  input  logic [ROWS-1:0][PIX-1:0]       vin,
  input  logic                           start,
  input  logic [AW-1:0]                  out_addr,
  output logic                           done,
  output logic [COLS-1:0]                sat,
  // partial results of earlier passes
  input  logic                           acc_we,
  input  logic                           acc_en,
  input  logic [WIDTH-1:0]               acc_data,
  // shared-bus write port
  output logic                           bus_req,
  output logic [AW-1:0]                  bus_addr,
  output logic [WIDTH-1:0]               bus_wdata,
  input  logic                           bus_gnt
);

  // ---- interconnect configuration registers ------------------------------
  logic [COLS-1:0][NCP-1:0] cp_pos;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      cp_pos <= '0;
    else if (cfg_we) cp_pos[prog_col] <= cfg_cp_pos;
  end

  // ---- analog path -------------------------------------------------------
  logic [NVP-1:0][ROWS-1:0][PIX-1:0] vp_v;
  logic [NCP-1:0][COLS-1:0][CB-1:0]  cp_i;
  logic [COLS-1:0][CB-1:0]           i_p, i_n;
  logic signed [COLS-1:0][CB:0]      i_2, i_held;

  always_comb for (int unsigned v = 0; v < NVP; v++) vp_v[v] = vin;

  xbar3d #(.ROWS(ROWS), .COLS(COLS), .LAYERS(LAYERS), .CUR_BITS(CB)) u_xbar (
    .clk, .prog_we, .prog_layer, .prog_col, .prog_g, .vp_v, .cp_i);

  plane_interconnect #(.COLS(COLS), .NCP(NCP), .CUR_BITS(CB)) u_ic (
    .cp_i, .cp_pos, .i_p, .i_n);

  diff_amp #(.COLS(COLS), .CUR_BITS(CB)) u_diff (.i_p, .i_n, .i_2);

  logic convert, adc_valid;
  logic signed [COLS-1:0][ADC_BITS-1:0] code;
  logic [COLS-1:0] adc_sat;

  sample_hold #(.COLS(COLS), .BITS(CB + 1)) u_sh (
    .clk, .rst_n, .sample(start), .d(i_2), .q(i_held));

  adc #(.COLS(COLS), .IN_BITS(CB + 1), .OUT_BITS(ADC_BITS), .SHIFT(ADC_SHIFT)) u_adc (
    .clk, .rst_n, .convert, .a(i_held), .code, .sat(adc_sat), .valid(adc_valid));

  // ---- sequencing and bus write -------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      convert  <= 1'b0;
      bus_req  <= 1'b0;
      bus_addr <= '0;
    end else begin
      convert <= start;
      if (start) bus_addr <= out_addr;
      if (adc_valid)    bus_req <= 1'b1;
      else if (bus_gnt) bus_req <= 1'b0;
    end
  end

  // ---- accumulation over passes --------------------------------------------
  logic [COLS*ADC_BITS-1:0] acc;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      acc <= '0;
    else if (acc_we) acc <= acc_data[COLS*ADC_BITS-1:0];
  end

  localparam logic signed [ADC_BITS:0] SMAX = (ADC_BITS + 1)'((64'(1) << (ADC_BITS - 1)) - 1);
  localparam logic signed [ADC_BITS:0] SMIN = -SMAX - 1;

  always_comb begin
    bus_wdata = '0;
    sat       = adc_sat;
    for (int unsigned j = 0; j < COLS; j++) begin
      logic signed [ADC_BITS-1:0] c, a;
      logic signed [ADC_BITS:0]   s;
      c = code[j];
      a = acc[j*ADC_BITS +: ADC_BITS];
      s = acc_en ? (ADC_BITS + 1)'(c) + (ADC_BITS + 1)'(a) : (ADC_BITS + 1)'(c);
      if (s > SMAX) begin
        s = SMAX;
        sat[j] = 1'b1;
      end else if (s < SMIN) begin
        s = SMIN;
        sat[j] = 1'b1;
      end
      bus_wdata[j*ADC_BITS +: ADC_BITS] = ADC_BITS'(s);
    end
  end

  assign done = bus_req && bus_gnt;

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) adc_valid |-> !bus_req)
    else $error("pe: new result while the previous one is still waiting for the bus");

endmodule
