// conv3d_tile: one tile of the 3D ReRAM convolution accelerator (top level).
//
// A tile holds an eDRAM buffer, a shared bus, a controller and NPE processing
// engines, each built around a monolithic 3D ReRAM crossbar. Tiles are meant
// to be joined by an on-chip mesh; the mesh is not part of this RTL, and its
// access to the tile is the host_* port, one more master on the shared bus
// (used to load kernels and image and to read results).
//
// Operation: load kernel words and image columns through host_*, set the cfg_*
// inputs and pulse start. cfg_kpos is l*l; cfg_ppass (0 = all) is how many
// kernel positions one pass maps, so a kernel larger than the stack runs in
// several passes whose partial outputs the engines add up in the buffer. The controller programs every engine's crossbar from
// the kernels (negative weights below the separation plane, non-negative
// above), then streams the h*w image columns: each logical cycle one column
// goes to all engines, each engine produces its COLS kernel outputs
// (I_p - I_n, converted by its ADC) and writes them as one word. done pulses
// when all h*w pixels are written; busy is high in between.
//
// Buffer words: kernel word (j, q) at cfg_wbase + j*cfg_kpos + q holds ROWS
// signed 8-bit weights (channel i in bits [8i +: 8]); image column p at
// cfg_ibase + p holds ROWS unsigned 8-bit pixels; output word (p, e) at
// cfg_obase + p*NPE + e holds COLS signed ADC_BITS codes, code jj being
// kernel e*COLS + jj. adc_sat is set when any conversion of the run clipped.
//
// Reset: rst_n is the asynchronous reset of every register here. The
// assertions also use it in their disable condition, so lint sees it sampled
// by a clock too; the logic itself uses it only as an asynchronous reset.
module conv3d_tile
  import conv3d_pkg::*;
#(
  parameter int unsigned NPE       = conv3d_pkg::NUM_PE,
  parameter int unsigned ROWS      = conv3d_pkg::XB_ROWS,
  parameter int unsigned COLS      = conv3d_pkg::XB_COLS,
  parameter int unsigned LAYERS    = conv3d_pkg::NUM_LAYERS,
  parameter int unsigned DEPTH     = conv3d_pkg::BUF_DEPTH,
  parameter int unsigned ADC_BITS  = conv3d_pkg::ADC_BITS,
  parameter int unsigned ADC_SHIFT = 0,
  localparam int unsigned MAX_POS  = LAYERS,
  localparam int unsigned AW       = $clog2(DEPTH),
  localparam int unsigned WIDTH    = conv3d_pkg::buf_bits(ROWS, COLS, ADC_BITS),
  localparam int unsigned PB       = $clog2(MAX_POS + 1),
  localparam int unsigned KB       = conv3d_pkg::KPOS_BITS,
  localparam int unsigned NKB      = $clog2(NPE * COLS + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // mesh / host access to the buffer
  input  logic              host_req,
  input  logic              host_we,
  input  logic [AW-1:0]     host_addr,
  input  logic [WIDTH-1:0]  host_wdata,
  output logic              host_gnt,
  output logic              host_rvalid,
  output logic [WIDTH-1:0]  host_rdata,
  // run control
  input  logic              start,
  input  logic [KB-1:0]     cfg_kpos,
  input  logic [PB-1:0]     cfg_ppass,
  input  logic [NKB-1:0]    cfg_nk,
  input  logic [AW-1:0]     cfg_hw,
  input  logic [AW-1:0]     cfg_wbase,
  input  logic [AW-1:0]     cfg_ibase,
  input  logic [AW-1:0]     cfg_obase,
  output logic              busy,
  output logic              done,
  output logic              err_fit,
  output logic              adc_sat,
  output ctrl_state_e       state,
  output logic [AW-1:0]     pixels_done,
  output logic [KB-1:0]     pass_first
);

  localparam int unsigned M   = NPE + 2;   // host, controller, engines
  localparam int unsigned NCP = LAYERS / 2;

  logic [M-1:0]            m_req, m_we, m_gnt, m_rvalid;
  logic [M-1:0][AW-1:0]    m_addr;
  logic [M-1:0][WIDTH-1:0] m_wdata;
  logic [WIDTH-1:0]        m_rdata;
  logic                    b_we, b_re;
  logic [AW-1:0]           b_addr;
  logic [WIDTH-1:0]        b_wdata, b_rdata;

  edram_buffer #(.DEPTH(DEPTH), .WIDTH(WIDTH)) u_buf (
    .clk, .we(b_we), .re(b_re), .addr(b_addr), .wdata(b_wdata), .rdata(b_rdata));

  shared_bus #(.M(M), .AW(AW), .WIDTH(WIDTH)) u_bus (
    .clk, .rst_n, .m_req, .m_we, .m_addr, .m_wdata, .m_gnt, .m_rvalid, .m_rdata,
    .b_we, .b_re, .b_addr, .b_wdata, .b_rdata);

  // master 0: mesh/host port
  assign m_req[0]    = host_req;
  assign m_we[0]     = host_we;
  assign m_addr[0]   = host_addr;
  assign m_wdata[0]  = host_wdata;
  assign host_gnt    = m_gnt[0];
  assign host_rvalid = m_rvalid[0];
  assign host_rdata  = m_rdata;

  // master 1: controller (reads only)
  logic [NPE-1:0]                        prog_we, cfg_we, pe_done;
  logic [$clog2(LAYERS)-1:0]             prog_layer;
  logic [$clog2(COLS)-1:0]               prog_col;
  logic [ROWS-1:0][conv3d_pkg::G_BITS-1:0]   prog_g;
  logic [NCP-1:0]                        cfg_cp_pos;
  logic [ROWS-1:0][conv3d_pkg::PIX_BITS-1:0] vin;
  logic                                  pe_start, acc_en;
  logic [NPE-1:0]                        acc_we;
  logic [NPE-1:0][AW-1:0]                pe_out_addr;

  tile_controller #(.NPE(NPE), .ROWS(ROWS), .COLS(COLS), .LAYERS(LAYERS), .MAX_POS(MAX_POS),
                    .AW(AW), .WIDTH(WIDTH)) u_ctrl (
    .clk, .rst_n, .start, .cfg_kpos, .cfg_ppass, .cfg_nk, .cfg_hw, .cfg_wbase, .cfg_ibase, .cfg_obase,
    .busy, .done, .err_fit, .state, .pixels_done, .pass_first,
    .bus_req(m_req[1]), .bus_addr(m_addr[1]), .bus_gnt(m_gnt[1]),
    .bus_rvalid(m_rvalid[1]), .bus_rdata(m_rdata),
    .prog_we, .prog_layer, .prog_col, .prog_g, .cfg_we, .cfg_cp_pos,
    .vin, .pe_start, .pe_out_addr, .acc_we, .acc_en, .pe_done);
  assign m_we[1]    = 1'b0;
  assign m_wdata[1] = '0;

  // masters 2..: processing engines (write only)
  logic [NPE-1:0][COLS-1:0] pe_sat;
  logic                     pe_sat_seen;

  for (genvar e = 0; e < NPE; e++) begin : g_pe
    pe #(.ROWS(ROWS), .COLS(COLS), .LAYERS(LAYERS), .ADC_BITS(ADC_BITS), .ADC_SHIFT(ADC_SHIFT),
         .AW(AW), .WIDTH(WIDTH)) u_pe (
      .clk, .rst_n,
      .prog_we(prog_we[e]), .prog_layer, .prog_col, .prog_g,
      .cfg_we(cfg_we[e]), .cfg_cp_pos,
      .vin, .start(pe_start), .out_addr(pe_out_addr[e]), .done(pe_done[e]), .sat(pe_sat[e]),
      .acc_we(acc_we[e]), .acc_en, .acc_data(m_rdata),
      .bus_req(m_req[e+2]), .bus_addr(m_addr[e+2]), .bus_wdata(m_wdata[e+2]), .bus_gnt(m_gnt[e+2]));
    assign m_we[e+2] = 1'b1;
  end

  // sticky saturation flag, sampled when an engine writes its result
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) adc_sat <= 1'b0;
    else if (start && !busy) adc_sat <= 1'b0;
    else if (pe_sat_seen) adc_sat <= 1'b1;
  end
  always_comb begin
    pe_sat_seen = 1'b0;
    for (int unsigned e = 0; e < NPE; e++)
      if (pe_done[e] && |pe_sat[e]) pe_sat_seen = 1'b1;
  end

endmodule
