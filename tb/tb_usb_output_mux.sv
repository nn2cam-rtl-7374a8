// Test of usb_output_mux: in pixel mode the pixel stream is passed through
// unchanged; in result mode a read-out request streams the requested words
// of a buffer model (one-cycle read latency) in order under random
// usb_ready back-pressure, holding data while not accepted, with res_busy
// covering the transfer. The back-to-back rate is one word per cycle.
module tb_usb_output_mux;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic mode = 0, pix_valid = 0, res_req = 0, res_busy, buf_en, usb_valid, usb_ready = 0;
  logic [7:0] pix_data = 0;
  logic [8:0] res_words = 0;
  logic [7:0] buf_addr;
  logic [31:0] buf_rdata, usb_data;
  logic [31:0] mem [256];
  int checks = 0, failures = 0;

  usb_output_mux #(.RES_AW(8)) dut (.clk, .rst_n, .mode, .pix_valid, .pix_data, .res_req,
    .res_words, .res_busy, .buf_en, .buf_addr, .buf_rdata, .usb_valid, .usb_ready, .usb_data);

  always @(posedge clk) if (buf_en) buf_rdata <= mem[buf_addr];

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int got, t0;
    logic [31:0] last_d; bit last_held;
    foreach (mem[i]) mem[i] = $urandom;
    repeat (3) @(negedge clk); rst_n = 1;
    // pixel mode
    for (int i = 0; i < 50; i++) begin
      @(negedge clk); pix_valid = $urandom_range(1); pix_data = 8'($urandom); #1;
      check(usb_valid == pix_valid && usb_data == 32'(pix_data), "pixel pass-through");
    end
    pix_valid = 0;
    // result mode
    for (int rnd = 0; rnd < 4; rnd++) begin
      automatic int n = (rnd == 0) ? 200 : $urandom_range(1, 256);
      @(negedge clk); mode = 1; res_words = 9'(n); res_req = 1;
      @(negedge clk); res_req = 0;
      check(res_busy, "busy after request");
      got = 0; last_held = 0; t0 = $time / 10;
      while (got < n) begin
        usb_ready = (rnd == 0) ? 1 : $urandom_range(1); #1;
        if (last_held) check(usb_valid && usb_data == last_d, "data held while not accepted");
        if (usb_valid && usb_ready) begin
          check(usb_data == mem[got], $sformatf("result word %0d", got));
          got++;
        end
        last_held = usb_valid && !usb_ready; last_d = usb_data;
        @(negedge clk);
        if ($time / 10 - t0 > 2000) break;
      end
      if (rnd == 0) check($time / 10 - t0 <= n + 3, $sformatf("rate: %0d cycles for %0d words", $time / 10 - t0, n));
      usb_ready = 0; #1;
      check(!usb_valid && !res_busy, "transfer ends after the last word");
    end
    mode = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
