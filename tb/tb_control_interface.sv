// Test of control_interface through its AXI4-Lite port, with address and
// data offered in random order and random response back-pressure: staging
// and committing parameter words (checked on the parameter bus field by
// field), base address registers, start/run/done sequencing with the status
// register and irq, the frame counter, and that parameter commits and a
// second start are ignored while a frame runs.
module tb_control_interface;
  import nn_pkg::*;
  import axi_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  axil_req_t req = '0; axil_rsp_t rsp;
  param_wr_t param_out;
  logic run_start, run_done = 0, irq;
  logic [31:0] img_base, res_base;
  int checks = 0, failures = 0;

  control_interface dut (.clk, .rst_n, .s_axil_req(req), .s_axil_rsp(rsp), .param_out,
    .run_start, .run_done, .img_base, .res_base, .irq);

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  param_wr_t seen [$];
  int n_start = 0, n_irq = 0;
  always @(posedge clk) begin
    if (rst_n && param_out.valid) seen.push_back(param_out);
    if (rst_n && run_start) n_start++;
    if (rst_n && irq) n_irq++;
  end

  task automatic wr(logic [31:0] a, logic [31:0] d);
    bit aw_ok = 0, w_ok = 0;
    int order = $urandom_range(2);
    @(negedge clk);
    req.aw_addr = a; req.w_data = d; req.w_strb = '1;
    req.aw_valid = (order != 1); req.w_valid = (order != 0);
    while (!(aw_ok && w_ok)) begin
      #1;
      if (req.aw_valid && rsp.aw_ready) aw_ok = 1;
      if (req.w_valid && rsp.w_ready) w_ok = 1;
      @(negedge clk);
      req.aw_valid = !aw_ok; req.w_valid = !w_ok;
    end
    req.aw_valid = 0; req.w_valid = 0;
    while ($urandom_range(1)) @(negedge clk);
    req.b_ready = 1; #1;
    while (!rsp.b_valid) begin @(negedge clk); #1; end
    check(rsp.b_resp == RESP_OKAY, "write response OKAY");
    @(negedge clk); req.b_ready = 0;
  endtask

  task automatic rd(logic [31:0] a, output logic [31:0] d);
    @(negedge clk); req.ar_addr = a; req.ar_valid = 1; #1;
    while (!rsp.ar_ready) begin @(negedge clk); #1; end
    @(negedge clk); req.ar_valid = 0;
    while ($urandom_range(1)) @(negedge clk);
    req.r_ready = 1; #1;
    while (!rsp.r_valid) begin @(negedge clk); #1; end
    d = rsp.r_data;
    @(negedge clk); req.r_ready = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] d;
    logic [PARAM_W-1:0] word;
    repeat (3) @(negedge clk); rst_n = 1;
    rd(32'h0, d); check(d[2:0] == 3'b100, "idle after reset");
    // parameter words
    for (int n = 0; n < 6; n++) begin
      for (int j = 0; j < PARAM_W / 32; j++) begin
        word[j*32 +: 32] = $urandom;
        wr(32'h20 + 4 * j, word[j*32 +: 32]);
      end
      wr(32'h10, {4'(n + 2), 1'(n % 2), 7'(n * 9), 20'(n * 1000 + 7)});
      @(negedge clk);
      check(seen.size() == 1, "one commit per PARAM_SEL write");
      if (seen.size() > 0) begin
        check(seen[0].layer == 4'(n + 2) && seen[0].bias == 1'(n % 2) && seen[0].pe == 7'(n * 9)
              && seen[0].addr == 20'(n * 1000 + 7), "commit fields");
        check(seen[0].data == word, "committed word");
      end
      seen.delete();
    end
    wr(32'h04, 32'h1234); wr(32'h08, 32'h5678);
    check(img_base == 32'h1234 && res_base == 32'h5678, "base registers");
    rd(32'h04, d); check(d == 32'h1234, "read IMG_BASE");
    // run a frame
    wr(32'h0, 32'h1);
    @(negedge clk);
    check(n_start == 1, "start pulse");
    rd(32'h0, d); check(d[2:0] == 3'b001, "busy while running");
    wr(32'h0, 32'h1);                    // ignored while busy
    wr(32'h10, 32'h1000_0000);           // ignored while busy
    check(n_start == 1 && seen.size() == 0, "start and commit ignored while busy");
    @(negedge clk); run_done = 1; @(negedge clk); run_done = 0;
    @(negedge clk);
    check(n_irq == 1, "irq pulse at done");
    rd(32'h0, d); check(d[2:0] == 3'b110, "done and idle after the frame");
    rd(32'h0C, d); check(d == 1, "frame counter");
    wr(32'h0, 32'h1);
    rd(32'h0, d); check(d[1] == 1'b0, "done cleared by the next start");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
