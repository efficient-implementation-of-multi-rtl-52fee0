// tb_adc: self-checking test of the ADC model: codes are the input shifted by
// SHIFT and clipped to the signed OUT_BITS range, `sat` marks clipped columns,
// and `valid` follows `convert` by one clock.
module tb_adc;
  localparam int C = 4, IB = 16, OB = 8, SH = 2;
  int checks = 0, failures = 0, nsat = 0;
  logic clk = 0, rst_n = 0, convert = 0;
  always #5 clk = ~clk;
  logic signed [C-1:0][IB-1:0] a;
  logic signed [C-1:0][OB-1:0] code;
  logic [C-1:0] sat;
  logic valid;

  adc #(.COLS(C), .IN_BITS(IB), .OUT_BITS(OB), .SHIFT(SH)) dut (.*);

  initial begin
    a = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      convert = 1;
      for (int j = 0; j < C; j++) a[j] = IB'($urandom % 2048) - IB'(1024);
      @(negedge clk);
      convert = 0;
      checks++;
      if (!valid) begin failures++; $display("FAIL t%0d: valid missing", t); end
      for (int j = 0; j < C; j++) begin
        int x, e, got;
        bit s;
        logic signed [OB-1:0] cj;
        cj = code[j];
        got = int'(cj);
        begin
          logic signed [IB-1:0] aj;
          aj = a[j];
          x = int'(aj);
        end
        e = (x >= 0) ? x / 4 : -((-x + 3) / 4);    // arithmetic shift = floor division
        s = 0;
        if (e > 127) begin e = 127; s = 1; end
        if (e < -128) begin e = -128; s = 1; end
        nsat += s;
        checks += 2;
        if (got != e) begin failures++; $display("FAIL t%0d col %0d: in %0d code %0d want %0d", t, j, x, got, e); end
        if (sat[j] != s) begin failures++; $display("FAIL t%0d col %0d: sat", t, j); end
      end
      @(negedge clk);
      checks++;
      if (valid) begin failures++; $display("FAIL t%0d: valid without convert", t); end
    end
    checks++;
    if (nsat == 0) begin failures++; $display("FAIL: saturation never exercised"); end
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
