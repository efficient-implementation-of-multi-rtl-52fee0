// tile_controller: the tile controller. It maps a multi-kernel multi-channel
// convolution (MKMC) onto the tile's processing engines and then streams the
// image through them, repeating both steps in several passes when a kernel
// has more positions than one pass can hold.
//
// Passes: the l*l = cfg_kpos kernel positions are taken cfg_ppass at a time
// (cfg_ppass = 0 or >= cfg_kpos: a single pass). Pass k covers positions
// k*cfg_ppass .. ; its partial outputs are added to those of the earlier
// passes, which the engines read back from the buffer.
//
// Mapping phase of a pass: the tile holds NPE*COLS kernel columns (BL
// j % COLS of engine j / COLS is kernel j). For every kernel j < cfg_nk the
// controller reads the pass's kernel words (word q = the 1x1 weights of all
// channels at kernel position q, address cfg_wbase + j*cfg_kpos + q) over the
// shared bus, lets the weight mapper separate negative from non-negative
// weights, then writes the LAYERS layers of that BL column (one layer per
// clock) and its interconnect mask. Columns j >= cfg_nk are programmed to
// zero, so every cell of every crossbar is defined after this phase. A pass
// whose kernel needs more layers than the stack has sets err_fit (its extra
// layers are dropped).
//
// Compute phase of a pass: for each pixel p < cfg_hw (one logical cycle) it
// reads image column p (address cfg_ibase + p); in passes after the first it
// also reads each engine's earlier partial word (address cfg_obase + p*NPE + e)
// into that engine (acc_we, acc_en). It then pulses the engines' start and
// waits until every engine has written its output word back to the same
// address. After the last pixel of the last pass `done` pulses.
//
// The pass loop follows the paper's remark that kernels larger than the stack
// are handled by repeating the computation; the pass size rule, the phases and
// the buffer layout are this design's choices.
module tile_controller
  import conv3d_pkg::*;
#(
  parameter int unsigned NPE     = conv3d_pkg::NUM_PE,
  parameter int unsigned ROWS    = conv3d_pkg::XB_ROWS,
  parameter int unsigned COLS    = conv3d_pkg::XB_COLS,
  parameter int unsigned LAYERS  = conv3d_pkg::NUM_LAYERS,
  parameter int unsigned MAX_POS = conv3d_pkg::MAX_POS,
  parameter int unsigned AW      = conv3d_pkg::ADDR_BITS,
  parameter int unsigned WIDTH   = conv3d_pkg::buf_bits(ROWS, COLS, conv3d_pkg::ADC_BITS),
  localparam int unsigned NCP    = LAYERS / 2,
  localparam int unsigned PB     = $clog2(MAX_POS + 1),
  localparam int unsigned KB     = conv3d_pkg::KPOS_BITS,
  localparam int unsigned NKB    = $clog2(NPE * COLS + 1),
  localparam int unsigned GB     = conv3d_pkg::G_BITS,
  localparam int unsigned WB     = conv3d_pkg::W_BITS,
  localparam int unsigned PIX    = conv3d_pkg::PIX_BITS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // run configuration (held stable while busy)
  input  logic                      start,
  input  logic [KB-1:0]             cfg_kpos,   // l*l
  input  logic [PB-1:0]             cfg_ppass,  // positions per pass (0: all)
  input  logic [NKB-1:0]            cfg_nk,     // n
  input  logic [AW-1:0]             cfg_hw,     // h*w
  input  logic [AW-1:0]             cfg_wbase,
  input  logic [AW-1:0]             cfg_ibase,
  input  logic [AW-1:0]             cfg_obase,
  output logic                      busy,
  output logic                      done,
  output logic                      err_fit,
  output ctrl_state_e               state,
  output logic [AW-1:0]             pixels_done,
  output logic [KB-1:0]             pass_first, // first kernel position of this pass
  // shared-bus read port
  output logic                      bus_req,
  output logic [AW-1:0]             bus_addr,
  input  logic                      bus_gnt,
  input  logic                      bus_rvalid,
  input  logic [WIDTH-1:0]          bus_rdata,
  // engine programming
  output logic [NPE-1:0]            prog_we,
  output logic [$clog2(LAYERS)-1:0] prog_layer,
  output logic [$clog2(COLS)-1:0]   prog_col,
  output logic [ROWS-1:0][GB-1:0]   prog_g,
  output logic [NPE-1:0]            cfg_we,
  output logic [NCP-1:0]            cfg_cp_pos,
  // engine compute
  output logic [ROWS-1:0][PIX-1:0]  vin,
  output logic                      pe_start,
  output logic [NPE-1:0][AW-1:0]    pe_out_addr,
  output logic [NPE-1:0]            acc_we,     // load bus_rdata as engine e's partial word
  output logic                      acc_en,     // engines add their partial word (pass > 0)
  input  logic [NPE-1:0]            pe_done
);

  localparam int unsigned NCOL = NPE * COLS;
  localparam int unsigned JB   = $clog2(NCOL + 1);
  localparam int unsigned LB   = $clog2(LAYERS + 1);
  localparam int unsigned EB   = $clog2(NPE + 1);

  logic signed [MAX_POS-1:0][ROWS-1:0][WB-1:0] kreg;
  logic [JB-1:0]  j;          // kernel / global BL column
  logic [PB-1:0]  q;          // position being loaded, within the pass
  logic [LB-1:0]  l;          // layer being programmed
  logic [AW-1:0]  p;          // pixel
  logic [EB-1:0]  e_acc;      // engine whose partial word is being read
  logic [AW-1:0]  waddr;      // address of the next kernel word
  logic [NPE-1:0] pending;    // engines still to write this pixel
  logic           zero_col;
  logic [KB-1:0]  q0;         // first position of this pass
  logic [KB-1:0]  pass_n;     // positions in this pass

  // positions in the current pass
  always_comb begin
    logic [KB-1:0] left, ppass;
    left   = cfg_kpos - q0;
    ppass  = (cfg_ppass == '0) ? cfg_kpos : KB'(cfg_ppass);
    if (ppass > KB'(MAX_POS)) ppass = KB'(MAX_POS);
    pass_n = (left < ppass) ? left : ppass;
  end

  // ---- weight mapper --------------------------------------------------------
  logic [LAYERS-1:0][ROWS-1:0][GB-1:0] layer_g;
  logic [NCP-1:0] map_cp_pos;
  logic [LB-1:0]  sep_vp;
  logic [PB-1:0]  nneg, npos;
  logic           fits;

  weight_mapper #(.ROWS(ROWS), .LAYERS(LAYERS), .MAX_POS(MAX_POS)) u_map (
    .w(kreg), .kpos(zero_col ? '0 : PB'(pass_n)), .layer_g, .cp_pos(map_cp_pos),
    .sep_vp, .nneg, .npos, .fits);

  // ---- engine programming outputs (combinational from the PROG state) -------
  always_comb begin
    prog_we    = '0;
    cfg_we     = '0;
    acc_we     = '0;
    prog_layer = l[$clog2(LAYERS)-1:0];
    prog_col   = ($clog2(COLS))'(j % JB'(COLS));
    prog_g     = layer_g[l[$clog2(LAYERS)-1:0]];
    cfg_cp_pos = map_cp_pos;
    if (state == ST_PROG) begin
      prog_we[j / JB'(COLS)] = 1'b1;
      if (l == '0) cfg_we[j / JB'(COLS)] = 1'b1;
    end
    if (state == ST_ACC_WAIT && bus_rvalid) acc_we[e_acc] = 1'b1;
    for (int unsigned e = 0; e < NPE; e++)
      pe_out_addr[e] = cfg_obase + p * AW'(NPE) + AW'(e);
  end

  always_comb begin
    unique case (state)
      ST_IMG_REQ: bus_addr = cfg_ibase + p;
      ST_ACC_REQ: bus_addr = cfg_obase + p * AW'(NPE) + AW'(e_acc);
      default:    bus_addr = waddr;
    endcase
  end

  assign bus_req     = (state == ST_LOADW_REQ) || (state == ST_IMG_REQ) || (state == ST_ACC_REQ);
  assign busy        = (state != ST_IDLE);
  assign pixels_done = p;
  assign acc_en      = (q0 != '0);
  assign pass_first  = q0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= ST_IDLE;
      done     <= 1'b0;
      err_fit  <= 1'b0;
      pe_start <= 1'b0;
      j        <= '0;
      q        <= '0;
      q0       <= '0;
      l        <= '0;
      p        <= '0;
      e_acc    <= '0;
      waddr    <= '0;
      pending  <= '0;
      zero_col <= 1'b0;
      vin      <= '0;
      kreg     <= '0;
    end else begin
      done     <= 1'b0;
      pe_start <= 1'b0;
      unique case (state)
        ST_IDLE: if (start) begin
          err_fit  <= 1'b0;
          j        <= '0;
          p        <= '0;
          q0       <= '0;
          state    <= ST_CLEAR;
        end
        // start of one kernel column: load its words of this pass, or program zeros
        ST_CLEAR: begin
          q     <= '0;
          l     <= '0;
          waddr <= cfg_wbase + AW'(j) * AW'(cfg_kpos) + AW'(q0);
          if (j < JB'(cfg_nk) && pass_n != '0) begin
            zero_col <= 1'b0;
            state    <= ST_LOADW_REQ;
          end else begin
            zero_col <= 1'b1;
            state    <= ST_PROG;
          end
        end
        ST_LOADW_REQ: if (bus_gnt) state <= ST_LOADW_WAIT;
        ST_LOADW_WAIT: if (bus_rvalid) begin
          kreg[q] <= bus_rdata[ROWS*WB-1:0];
          waddr   <= waddr + 1'b1;
          q       <= q + 1'b1;
          state   <= (KB'(q) + 1'b1 == pass_n) ? ST_PROG : ST_LOADW_REQ;
        end
        ST_PROG: begin
          if (l == '0 && !fits) err_fit <= 1'b1;
          if (l == LB'(LAYERS - 1)) begin
            j <= j + 1'b1;
            if (j == JB'(NCOL - 1)) state <= (cfg_hw == '0) ? ST_DONE : ST_IMG_REQ;
            else                    state <= ST_CLEAR;
          end
          l <= l + 1'b1;
        end
        ST_IMG_REQ: if (bus_gnt) state <= ST_IMG_WAIT;
        ST_IMG_WAIT: if (bus_rvalid) begin
          vin   <= bus_rdata[ROWS*PIX-1:0];
          e_acc <= '0;
          if (acc_en) begin
            state <= ST_ACC_REQ;
          end else begin
            pe_start <= 1'b1;
            pending  <= '1;
            state    <= ST_PE_RUN;
          end
        end
        ST_ACC_REQ: if (bus_gnt) state <= ST_ACC_WAIT;
        ST_ACC_WAIT: if (bus_rvalid) begin
          e_acc <= e_acc + 1'b1;
          if (e_acc == EB'(NPE - 1)) begin
            pe_start <= 1'b1;
            pending  <= '1;
            state    <= ST_PE_RUN;
          end else begin
            state <= ST_ACC_REQ;
          end
        end
        ST_PE_RUN: begin
          if ((pending & ~pe_done) == '0) begin
            if (p + 1'b1 != cfg_hw) begin
              p     <= p + 1'b1;
              state <= ST_IMG_REQ;
            end else if (q0 + pass_n < cfg_kpos) begin
              // next pass: remap every column with the following positions
              q0    <= q0 + pass_n;
              p     <= '0;
              j     <= '0;
              state <= ST_CLEAR;
            end else begin
              p     <= p + 1'b1;
              state <= ST_DONE;
            end
          end
          pending <= pending & ~pe_done;
        end
        ST_DONE: begin
          done  <= 1'b1;
          q0    <= '0;
          state <= ST_IDLE;
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

endmodule
