// Test of axi_data_interface against an AXI slave memory model in this file
// that inserts random wait states on every channel. The interface must read
// a 104-pixel image (26 words, so two bursts of 16 and 10 beats) from
// img_base and deliver it pixel by pixel, lowest byte first, with random
// back-pressure; then it must pack 7 results two per word and write 4 words
// (the last half empty) to res_base, pulse done once and drop busy. Two
// frames are run with different base addresses.
module tb_axi_data_interface;
  import nn_pkg::*;
  import axi_pkg::*;
  localparam int NPIX = 104, NRES = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done;
  logic [31:0] img_base = 0, res_base = 0;
  axi_req_t req; axi_rsp_t rsp;
  logic img_valid, img_ready = 0, res_valid = 0, res_ready;
  logic [ACT_W-1:0] img_data, res_data = 0;
  int checks = 0, failures = 0;

  axi_data_interface #(.IMG_ELEMS(NPIX), .RES_ELEMS(NRES), .RES_W(16), .BURST_LEN(16)) dut (
    .clk, .rst_n, .start, .img_base, .res_base, .busy, .done,
    .m_axi_req(req), .m_axi_rsp(rsp),
    .img_valid, .img_ready, .img_data, .res_valid, .res_ready, .res_data);

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  // ---------------- slave model ----------------
  logic [31:0] mem [1024];
  int n_bursts = 0, max_len = 0;
  initial begin
    rsp = '0;
    forever begin
      @(negedge clk);
      rsp.ar_ready = $urandom_range(1);
      rsp.aw_ready = $urandom_range(1);
      rsp.w_ready  = $urandom_range(1);
      #1;
      if (req.ar_valid && rsp.ar_ready) begin
        automatic logic [31:0] a = req.ar.addr;
        automatic int len = int'(req.ar.len);
        n_bursts++; if (len + 1 > max_len) max_len = len + 1;
        check(req.ar.burst == BURST_INCR && req.ar.size == 3'd2, "INCR burst of words");
        @(negedge clk); rsp.ar_ready = 0;
        for (int i = 0; i <= len; i++) begin
          rsp.r_valid = 1; rsp.r.data = mem[(a >> 2) + i]; rsp.r.last = (i == len);
          #1; while (!req.r_ready) begin @(negedge clk); #1; end
          @(negedge clk);
          rsp.r_valid = 0;
          while ($urandom_range(3) == 0) @(negedge clk);
        end
      end
    end
  end
  // write side: single-beat writes, response after both address and data
  logic [31:0] wa; logic got_aw = 0, got_w = 0; logic [31:0] wd;
  always @(posedge clk) begin
    if (rst_n && req.aw_valid && rsp.aw_ready) begin wa = req.aw.addr; got_aw = 1;
      check(req.aw.len == 0, "single-beat write"); end
    if (rst_n && req.w_valid && rsp.w_ready) begin wd = req.w.data; got_w = 1;
      check(req.w.last && req.w.strb == 4'hF, "write beat"); end
    if (rsp.b_valid && req.b_ready) rsp.b_valid <= 0;
    else if (got_aw && got_w && !rsp.b_valid) begin
      mem[wa >> 2] = wd; got_aw = 0; got_w = 0; rsp.b_valid <= 1;
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int n_done = 0;
  always @(posedge clk) if (rst_n && done) n_done++;

  task automatic frame(int ib, int rb, int seed);
    byte unsigned pix [NPIX];
    int got = 0, sent = 0;
    for (int i = 0; i < NPIX; i++) begin
      pix[i] = 8'(i * 3 + seed * 17);
      mem[(ib >> 2) + i / 4][(i % 4) * 8 +: 8] = pix[i];
    end
    for (int i = 0; i < 4; i++) mem[(rb >> 2) + i] = 32'hDEADBEEF;
    @(negedge clk); img_base = ib; res_base = rb; start = 1;
    @(negedge clk); start = 0;
    check(busy, "busy after start");
    while (got < NPIX) begin
      img_ready = $urandom_range(1);
      #1;
      if (img_valid && img_ready) begin
        check(img_data == ACT_W'(pix[got]), $sformatf("pixel %0d", got));
        got++;
      end
      @(negedge clk);
    end
    img_ready = 0;
    while (sent < NRES) begin
      res_valid = $urandom_range(1); res_data = ACT_W'(1000 * seed + sent);
      #1;
      if (res_valid && res_ready) sent++;
      @(negedge clk);
    end
    res_valid = 0;
    while (busy) @(negedge clk);
    for (int i = 0; i < NRES; i++)
      check(mem[(rb >> 2) + i / 2][(i % 2) * 16 +: 16] == 16'(1000 * seed + i), $sformatf("result %0d", i));
    check(mem[(rb >> 2) + 3][31:16] == 16'h0, "partial last word padded with zero");
    check(mem[(rb >> 2) + 4] != 32'(1000 * seed), "nothing written past the results");
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    frame(32'h100, 32'h800, 1);
    frame(32'h040, 32'h600, 2);
    @(negedge clk);
    check(n_done == 2, "one done pulse per frame");
    check(n_bursts == 4 && max_len == 16, $sformatf("two bursts per frame, 16 beats max (%0d, %0d)", n_bursts, max_len));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
