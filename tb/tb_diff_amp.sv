// tb_diff_amp: self-checking test of the difference read-out: I2 = Ip - In for
// random currents, equal currents (I2 = 0) and the extremes of the range.
module tb_diff_amp;
  localparam int C = 3, CB = 12;
  int checks = 0, failures = 0;
  logic [C-1:0][CB-1:0] i_p, i_n;
  logic signed [C-1:0][CB:0] i_2;

  diff_amp #(.COLS(C), .CUR_BITS(CB)) dut (.*);

  initial begin
    for (int t = 0; t < 1000; t++) begin
      for (int j = 0; j < C; j++) begin
        i_p[j] = CB'($urandom);
        i_n[j] = (t % 7 == 0) ? i_p[j] : CB'($urandom);
      end
      if (t == 1) begin i_p = '1; i_n = '0; end
      if (t == 2) begin i_p = '0; i_n = '1; end
      #1;
      for (int j = 0; j < C; j++) begin
        int e;
        e = int'(i_p[j]) - int'(i_n[j]);
        checks++;
        if (int'($signed(i_2[j])) != e) begin
          failures++;
          $display("FAIL t%0d col %0d: %0d - %0d gave %0d", t, j, i_p[j], i_n[j], $signed(i_2[j]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
