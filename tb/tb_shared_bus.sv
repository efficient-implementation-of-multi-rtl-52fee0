// tb_shared_bus: self-checking test of the shared bus. Three masters issue
// random reads and writes, each holding its request until granted. Checked:
// the grant matches an independently kept round-robin order, the granted
// request reaches the buffer port, read data and rvalid come back to the right
// master one clock later, and no master waits more than M-1 grants.
module tb_shared_bus;
  localparam int M = 3, AW = 4, W = 16;
  int checks = 0, failures = 0, contended = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [M-1:0] m_req = '0, m_we = '0, m_gnt, m_rvalid;
  logic [M-1:0][AW-1:0] m_addr;
  logic [M-1:0][W-1:0] m_wdata;
  logic [W-1:0] m_rdata;
  logic b_we, b_re;
  logic [AW-1:0] b_addr;
  logic [W-1:0] b_wdata, b_rdata;

  shared_bus #(.M(M), .AW(AW), .WIDTH(W)) dut (.*);

  // buffer stand-in: synchronous read, one clock
  logic [W-1:0] mem [16];
  always_ff @(posedge clk) begin
    if (b_we) mem[b_addr] <= b_wdata;
    if (b_re) b_rdata <= mem[b_addr];
  end

  logic [W-1:0] shadow [16];
  int last_ref = M - 1;
  int wait_cnt [M];
  int exp_rd_master = -1;
  logic [W-1:0] exp_rd_data;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, what); end
  endtask

  initial begin
    for (int a = 0; a < 16; a++) begin mem[a] = W'(a); shadow[a] = W'(a); end
    foreach (wait_cnt[k]) wait_cnt[k] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      // new requests from idle masters
      for (int k = 0; k < M; k++) if (!m_req[k] && ($urandom % 2)) begin
        m_req[k] = 1; m_we[k] = $urandom % 2; m_addr[k] = AW'($urandom); m_wdata[k] = W'($urandom);
      end
      #1;
      if ($countones(m_req) > 1) contended++;
      begin
        int e;
        e = -1;
        for (int s = 1; s <= M; s++) if (e < 0 && m_req[(last_ref + s) % M]) e = (last_ref + s) % M;
        for (int k = 0; k < M; k++) check(m_gnt[k] == (k == e), $sformatf("t%0d grant of master %0d", t, k));
        if (e >= 0) begin
          check(b_addr == m_addr[e] && b_we == m_we[e] && b_re == !m_we[e], "granted request on the buffer port");
          last_ref = e;
        end
        exp_rd_master = -1;
        for (int k = 0; k < M; k++) begin
          if (k == e) begin
            if (m_we[k]) shadow[m_addr[k]] = m_wdata[k];
            else begin exp_rd_master = k; exp_rd_data = shadow[m_addr[k]]; end
            wait_cnt[k] = 0;
          end else if (m_req[k]) begin
            wait_cnt[k]++;
            check(wait_cnt[k] < M, "bounded wait");
          end
        end
        @(posedge clk);
        #1;
        if (exp_rd_master >= 0) begin
          check(m_rvalid[exp_rd_master] && $countones(m_rvalid) == 1, "rvalid to the reading master");
          check(m_rdata == exp_rd_data, "read data");
        end else begin
          check(m_rvalid == '0, "no rvalid without a read");
        end
        @(negedge clk);
        if (e >= 0) m_req[e] = 0;
      end
    end
    check(contended > 100, "requests contended");
    $display("contended clocks: %0d", contended);
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
