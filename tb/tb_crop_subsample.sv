// Test of crop_subsample: several sensor frames with random pixel gaps and
// different crop origins, steps and window sizes. Every buffer write is
// compared with a model that picks the kept pixels and packs them four per
// word; the number of words, the frame_done pulse and its position are
// checked, and so is the rate: the block must keep up with one pixel per
// cycle (it has no ready signal, so a dropped pixel shows as a data error).
module tb_crop_subsample;
  import nn_pkg::*;
  localparam int SW = 40, SH = 30;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic pix_valid = 0, pix_sof = 0, pix_eol = 0;
  logic [7:0] pix_data = 0;
  logic [15:0] crop_x0, crop_y0, win_dim;
  logic [7:0] crop_step;
  logic [11:0] buf_base;
  logic buf_we, frame_done;
  logic [11:0] buf_addr;
  logic [31:0] buf_wdata;
  int checks = 0, failures = 0;

  crop_subsample #(.SENSOR_W(SW), .SENSOR_H(SH), .BUF_AW(12)) dut (.clk, .rst_n, .pix_valid,
    .pix_sof, .pix_eol, .pix_data, .crop_x0, .crop_y0, .crop_step, .win_dim, .buf_base,
    .buf_we, .buf_addr, .buf_wdata, .frame_done);

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  logic [31:0] exp_q [$];
  int n_words, n_done;
  bit done_ok;
  always @(posedge clk) begin
    if (rst_n && buf_we) begin
      check(exp_q.size() > 0, "unexpected buffer write");
      if (exp_q.size() > 0) begin
        check(buf_wdata == exp_q[0], $sformatf("word %0d data %h exp %h", n_words, buf_wdata, exp_q[0]));
        check(buf_addr == buf_base + 12'(n_words), "word address");
        void'(exp_q.pop_front());
      end
      n_words++;
    end
    if (rst_n && frame_done) begin
      n_done++;
      done_ok = buf_we && exp_q.size() == 0;
    end
  end

  task automatic frame(int x0, int y0, int st, int wd, int base, bit gaps);
    logic [7:0] img [SH][SW];
    logic [7:0] kept [$];
    crop_x0 = 16'(x0); crop_y0 = 16'(y0); crop_step = 8'(st); win_dim = 16'(wd);
    buf_base = 12'(base);
    for (int y = 0; y < SH; y++) for (int x = 0; x < SW; x++) img[y][x] = 8'($urandom);
    for (int i = 0; i < wd; i++) for (int j = 0; j < wd; j++) kept.push_back(img[y0 + i * st][x0 + j * st]);
    for (int w = 0; w < wd * wd / 4; w++)
      exp_q.push_back({kept[4*w+3], kept[4*w+2], kept[4*w+1], kept[4*w]});
    n_words = 0; n_done = 0; done_ok = 0;
    for (int y = 0; y < SH; y++)
      for (int x = 0; x < SW; x++) begin
        @(negedge clk);
        while (gaps && $urandom_range(3) == 0) begin pix_valid = 0; pix_data = 8'($urandom); @(negedge clk); end
        pix_valid = 1; pix_sof = (x == 0 && y == 0); pix_eol = (x == SW - 1); pix_data = img[y][x];
      end
    @(negedge clk); pix_valid = 0; pix_sof = 0; pix_eol = 0;
    repeat (3) @(negedge clk);
    check(n_words == wd * wd / 4, $sformatf("word count %0d", n_words));
    check(n_done == 1 && done_ok, "one frame_done with the last word");
    check(exp_q.size() == 0, "all words written");
    exp_q.delete();
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    frame(0, 0, 1, 12, 0, 0);          // back-to-back pixels: one pixel per cycle
    frame(5, 3, 2, 12, 100, 1);
    frame(1, 2, 3, 8, 7, 1);
    frame(10, 0, 1, 28, 200, 0);       // the network's 28 x 28 window
    frame(0, 1, 2, 14, 50, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
