// adc: behavioural model of the per-BL analog-to-digital converters (analog,
// modelled behaviourally).
//
// On `convert` every column's held signed current is shifted right by SHIFT
// (the full-scale setting) and clipped to a signed OUT_BITS code; `sat` marks
// columns that hit full scale. Resolution and range are not given by the paper,
// so OUT_BITS and SHIFT are this design's choices. Latency: one clock, `valid`
// pulses with the new codes.
module adc #(
  parameter int unsigned COLS     = conv3d_pkg::XB_COLS,
  parameter int unsigned IN_BITS  = conv3d_pkg::cur_bits(conv3d_pkg::XB_ROWS, conv3d_pkg::NUM_LAYERS) + 1,
  parameter int unsigned OUT_BITS = conv3d_pkg::ADC_BITS,
  parameter int unsigned SHIFT    = 0
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               convert,
  input  logic signed [COLS-1:0][IN_BITS-1:0]  a,
  output logic signed [COLS-1:0][OUT_BITS-1:0] code,
  output logic        [COLS-1:0]             sat,
  output logic                               valid
);

  localparam logic signed [IN_BITS-1:0] MAXV = IN_BITS'((64'(1) << (OUT_BITS - 1)) - 1);
  localparam logic signed [IN_BITS-1:0] MINV = -MAXV - 1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      code  <= '0;
      sat   <= '0;
      valid <= 1'b0;
    end else begin
      valid <= convert;
      if (convert) begin
        for (int unsigned j = 0; j < COLS; j++) begin
          logic signed [IN_BITS-1:0] s;
          s = $signed(a[j]) >>> SHIFT;
          if (s > MAXV) begin
            code[j] <= OUT_BITS'(MAXV);
            sat[j]  <= 1'b1;
          end else if (s < MINV) begin
            code[j] <= OUT_BITS'(MINV);
            sat[j]  <= 1'b1;
          end else begin
            code[j] <= OUT_BITS'(s);
            sat[j]  <= 1'b0;
          end
        end
      end
    end
  end

  initial assert (OUT_BITS <= IN_BITS && OUT_BITS < 64) else $error("adc: OUT_BITS out of range");

endmodule
