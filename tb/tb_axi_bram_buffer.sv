// Test of axi_bram_buffer: AXI burst writes with random strobes and wait
// states, AXI burst reads with random r_ready back-pressure, native-port
// writes read back over AXI and AXI writes read back over the native port,
// all compared with a word-array model.
module tb_axi_bram_buffer;
  import axi_pkg::*;
  localparam int D = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  axi_req_t req = '0; axi_rsp_t rsp;
  logic nat_en = 0, nat_we = 0;
  logic [7:0] nat_addr = 0;
  logic [31:0] nat_wdata = 0, nat_rdata;
  logic [31:0] model [D];
  int checks = 0, failures = 0;

  axi_bram_buffer #(.DEPTH(D)) dut (.clk, .rst_n, .s_axi_req(req), .s_axi_rsp(rsp),
    .nat_en, .nat_we, .nat_addr, .nat_wdata, .nat_rdata);

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  task automatic axi_write(int w0, int n);
    @(negedge clk);
    req.aw = '0; req.aw.addr = 32'(w0 * 4); req.aw.len = 8'(n - 1); req.aw.burst = BURST_INCR;
    req.aw.size = 3'd2; req.aw_valid = 1; #1;
    while (!rsp.aw_ready) begin @(negedge clk); #1; end
    @(negedge clk); req.aw_valid = 0;
    for (int i = 0; i < n; i++) begin
      while ($urandom_range(2) == 0) @(negedge clk);
      req.w.data = $urandom; req.w.strb = 4'($urandom); req.w.last = (i == n - 1); req.w_valid = 1;
      #1; while (!rsp.w_ready) begin @(negedge clk); #1; end
      for (int b = 0; b < 4; b++) if (req.w.strb[b]) model[w0 + i][b*8 +: 8] = req.w.data[b*8 +: 8];
      @(negedge clk); req.w_valid = 0;
    end
    req.b_ready = 1; #1;
    while (!rsp.b_valid) begin @(negedge clk); #1; end
    check(rsp.b.resp == RESP_OKAY, "write response");
    @(negedge clk); req.b_ready = 0;
  endtask

  task automatic axi_read(int w0, int n);
    int got = 0;
    @(negedge clk);
    req.ar = '0; req.ar.addr = 32'(w0 * 4); req.ar.len = 8'(n - 1); req.ar.burst = BURST_INCR;
    req.ar.size = 3'd2; req.ar_valid = 1; #1;
    while (!rsp.ar_ready) begin @(negedge clk); #1; end
    @(negedge clk); req.ar_valid = 0;
    while (got < n) begin
      req.r_ready = $urandom_range(1); #1;
      if (rsp.r_valid && req.r_ready) begin
        check(rsp.r.data == model[w0 + got], $sformatf("burst read word %0d", w0 + got));
        check(rsp.r.last == (got == n - 1), "RLAST on the last beat");
        got++;
      end
      @(negedge clk);
    end
    req.r_ready = 0;
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    // fill through the native port
    for (int a = 0; a < D; a++) begin
      @(negedge clk); nat_en = 1; nat_we = 1; nat_addr = 8'(a); nat_wdata = $urandom; model[a] = nat_wdata;
    end
    @(negedge clk); nat_en = 0; nat_we = 0;
    axi_read(0, 16); axi_read(37, 5); axi_read(100, 1);
    for (int n = 0; n < 20; n++) begin
      automatic int len = $urandom_range(1, 16);
      automatic int w0 = $urandom_range(D - len);
      axi_write(w0, len);
      axi_read($urandom_range(D - 16), 16);
    end
    // native read-back of everything
    for (int a = 0; a < D; a++) begin
      @(negedge clk); nat_en = 1; nat_addr = 8'(a);
      @(negedge clk); nat_en = 0;
      check(nat_rdata == model[a], $sformatf("native read %0d", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
