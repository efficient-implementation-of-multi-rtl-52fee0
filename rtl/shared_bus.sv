// shared_bus: the tile's shared bus between its masters and the eDRAM buffer.
//
// M masters (here: the mesh port, the controller and the processing engines)
// each raise req with we/addr/wdata and hold them until gnt. A round-robin
// arbiter grants at most one request per clock, starting its search after the
// master granted last, so no requester waits more than M-1 grants. The granted
// request goes straight to the buffer's single port in the same clock; for a
// read, rvalid[m] pulses one clock later together with the shared rdata.
// The arbitration scheme and this handshake are this design's choice: the paper
// says only that every engine talks to the buffer over the shared bus.
//
// Reset: rst_n is the asynchronous reset of every register here. The
// assertions also use it in their disable condition, so lint sees it sampled
// by a clock too; the logic itself uses it only as an asynchronous reset.
module shared_bus #(
  parameter int unsigned M     = conv3d_pkg::NUM_PE + 2,
  parameter int unsigned AW    = conv3d_pkg::ADDR_BITS,
  parameter int unsigned WIDTH = conv3d_pkg::buf_bits(conv3d_pkg::XB_ROWS, conv3d_pkg::XB_COLS, conv3d_pkg::ADC_BITS)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // masters
  input  logic [M-1:0]              m_req,
  input  logic [M-1:0]              m_we,
  input  logic [M-1:0][AW-1:0]      m_addr,
  input  logic [M-1:0][WIDTH-1:0]   m_wdata,
  output logic [M-1:0]              m_gnt,
  output logic [M-1:0]              m_rvalid,
  output logic [WIDTH-1:0]          m_rdata,
  // buffer port
  output logic                      b_we,
  output logic                      b_re,
  output logic [AW-1:0]             b_addr,
  output logic [WIDTH-1:0]          b_wdata,
  input  logic [WIDTH-1:0]          b_rdata
);

  localparam int unsigned MB = (M > 1) ? $clog2(M) : 1;

  logic [MB-1:0] last;     // master granted last
  logic [MB-1:0] sel;
  logic          any;

  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int unsigned k = 1; k <= M; k++) begin
      int unsigned idx;
      idx = (32'(last) + k) % M;
      if (!any && m_req[idx]) begin
        any = 1'b1;
        sel = MB'(idx);
      end
    end
    m_gnt = '0;
    if (any) m_gnt[sel] = 1'b1;
    b_we    = any &&  m_we[sel];
    b_re    = any && !m_we[sel];
    b_addr  = m_addr[sel];
    b_wdata = m_wdata[sel];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last     <= MB'(M - 1);
      m_rvalid <= '0;
    end else begin
      m_rvalid <= '0;
      if (any) begin
        last <= sel;
        if (!m_we[sel]) m_rvalid[sel] <= 1'b1;
      end
    end
  end

  assign m_rdata = b_rdata;

  // a grant goes to one requesting master only
  a_onehot_gnt: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(m_gnt));
  a_gnt_req:    assert property (@(posedge clk) disable iff (!rst_n) (m_gnt & ~m_req) == '0);

endmodule
