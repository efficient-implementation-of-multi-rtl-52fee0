// tb_edram_buffer: self-checking test of the buffer array: random writes and
// reads against a shadow copy, checking the one-clock read latency.
module tb_edram_buffer;
  localparam int D = 64, W = 40;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [$clog2(D)-1:0] addr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] shadow [D];

  edram_buffer #(.DEPTH(D), .WIDTH(W)) dut (.*);

  initial begin
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      we = 1; addr = 6'(a); wdata = W'({$urandom, $urandom}); shadow[a] = wdata;
    end
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      addr = 6'($urandom);
      we = ($urandom % 2);
      re = !we;
      wdata = W'({$urandom, $urandom});
      if (re) begin
        logic [W-1:0] e;
        e = shadow[addr];
        @(negedge clk);
        we = 0; re = 0;
        checks++;
        if (rdata != e) begin failures++; $display("FAIL t%0d addr %0d: %h want %h", t, addr, rdata, e); end
      end else begin
        shadow[addr] = wdata;
      end
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
