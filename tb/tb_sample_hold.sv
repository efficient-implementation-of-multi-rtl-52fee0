// tb_sample_hold: self-checking test of the sample-and-hold stage: the output
// follows the input only on clocks with `sample` and holds otherwise; it is
// zero after reset.
module tb_sample_hold;
  localparam int C = 3, B = 10;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, sample = 0;
  always #5 clk = ~clk;
  logic signed [C-1:0][B-1:0] d, q;
  logic [C*B-1:0] held;

  sample_hold #(.COLS(C), .BITS(B)) dut (.*);

  initial begin
    d = '1;
    repeat (2) @(negedge clk);
    checks++; if (q != '0) begin failures++; $display("FAIL: not zero after reset"); end
    rst_n = 1;
    held = '0;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      sample = ($urandom % 3 == 0);
      d = (C*B)'({$urandom, $urandom});
      @(posedge clk);
      if (sample) held = d;
      #1;
      checks++;
      if (q != held) begin failures++; $display("FAIL t%0d: q=%h want %h", t, q, held); end
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
