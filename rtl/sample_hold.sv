// sample_hold: behavioural model of the per-BL sample-and-hold stage (S+H in
// the tile drawing; analog, modelled behaviourally).
//
// On a clock edge with `sample` high it captures the difference current of
// every column and holds it until the next sample, so the ADC converts a
// stable value while the crossbar inputs move on. Held values reset to zero.
// Latency: the held value is visible one clock after `sample`.
module sample_hold #(
  parameter int unsigned COLS = conv3d_pkg::XB_COLS,
  parameter int unsigned BITS = conv3d_pkg::cur_bits(conv3d_pkg::XB_ROWS, conv3d_pkg::NUM_LAYERS) + 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          sample,
  input  logic signed [COLS-1:0][BITS-1:0] d,
  output logic signed [COLS-1:0][BITS-1:0] q
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      q <= '0;
    else if (sample) q <= d;
  end

endmodule
