// Test of param_loader against an AXI4-Lite slave model with random
// aw/w/b wait states: the stored table is replayed in order (addresses and
// data checked), the start command writes CTRL=1, and commands are ignored
// while busy. It also checks the replay rate (cycles per write).
module tb_param_loader;
  import axi_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic tbl_we = 0, cmd_load = 0, cmd_start = 0, busy;
  logic [5:0] tbl_addr = 0;
  logic [63:0] tbl_wdata = 0;
  logic [6:0] n_entries = 0;
  axil_req_t req; axil_rsp_t rsp = '0;
  int checks = 0, failures = 0;
  bit slow = 1;

  param_loader #(.DEPTH(64)) dut (.clk, .rst_n, .tbl_we, .tbl_addr, .tbl_wdata, .n_entries,
    .cmd_load, .cmd_start, .busy, .m_axil_req(req), .m_axil_rsp(rsp));

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  // slave model: accepts aw and w independently, answers with b
  logic [31:0] got_a [$], got_d [$];
  logic aw_have, w_have;
  logic [31:0] aw_a, w_d;
  always @(posedge clk) begin
    if (!rst_n) begin aw_have <= 0; w_have <= 0; rsp <= '0; end
    else begin
      if (req.aw_valid && rsp.aw_ready) begin aw_have <= 1; aw_a <= req.aw_addr; end
      if (req.w_valid && rsp.w_ready) begin w_have <= 1; w_d <= req.w_data; end
      if (rsp.b_valid && req.b_ready) rsp.b_valid <= 0;
      rsp.aw_ready <= !aw_have && !(req.aw_valid && rsp.aw_ready) && (!slow || $urandom_range(1));
      rsp.w_ready  <= !w_have && !(req.w_valid && rsp.w_ready) && (!slow || $urandom_range(1));
      if (aw_have && w_have && !rsp.b_valid && (!slow || $urandom_range(1))) begin
        got_a.push_back(aw_a); got_d.push_back(w_d);
        aw_have <= 0; w_have <= 0; rsp.b_valid <= 1; rsp.b_resp <= RESP_OKAY;
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [63:0] tbl [64];
    int t0, n;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); tbl_we = 1; tbl_addr = 6'(i); tbl_wdata = {$urandom, $urandom}; tbl[i] = tbl_wdata;
    end
    @(negedge clk); tbl_we = 0;
    for (int rnd = 0; rnd < 3; rnd++) begin
      n = (rnd == 0) ? 64 : $urandom_range(1, 40);
      slow = (rnd != 1);
      @(negedge clk); n_entries = 7'(n); cmd_load = 1; @(negedge clk); cmd_load = 0;
      t0 = $time / 10;
      check(busy, "busy after load command");
      cmd_start = 1; @(negedge clk); cmd_start = 0;   // ignored while busy
      while (busy) @(negedge clk);
      check(got_a.size() == n, $sformatf("replayed %0d of %0d writes", got_a.size(), n));
      for (int i = 0; i < got_a.size() && i < n; i++)
        check(got_a[i] == tbl[i][63:32] && got_d[i] == tbl[i][31:0], $sformatf("write %0d", i));
      if (!slow) check($time / 10 - t0 <= 5 * n + 2, $sformatf("rate: %0d cycles for %0d writes", $time / 10 - t0, n));
      got_a.delete(); got_d.delete();
    end
    @(negedge clk); cmd_start = 1; @(negedge clk); cmd_start = 0;
    while (busy) @(negedge clk);
    check(got_a.size() == 1 && got_a[0] == 0 && got_d[0] == 1, "start writes CTRL = 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
