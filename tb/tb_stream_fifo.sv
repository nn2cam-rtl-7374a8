// Test of stream_fifo: random pushes and pops against a queue model; checks
// order, data, the occupancy count, that the FIFO refuses input exactly when
// it holds DEPTH words, and that a word written into an empty FIFO is visible
// one cycle later.
module tb_stream_fifo;
  localparam int W = 12, D = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = 0, out_data;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  bit held = 0;
  logic [W-1:0] q [$];

  stream_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk);
    check(!out_valid && count == 0, "empty after reset");
    // latency: push into empty FIFO, visible next cycle
    in_valid = 1; in_data = 12'h5A5;
    @(negedge clk); in_valid = 0;
    check(out_valid && out_data == 12'h5A5, "one-cycle latency");
    out_ready = 1; @(negedge clk); out_ready = 0;
    for (int n = 0; n < 3000; n++) begin
      if (!held) begin
        in_valid  = ($urandom_range(3) != 0) && (n < 2900 || in_valid);
        in_data   = W'($urandom);
      end
      out_ready = (n % 400 < 200) ? ($urandom_range(3) == 0) : ($urandom_range(3) != 0);
      #1;
      check(in_ready == (q.size() < D), "in_ready matches occupancy");
      check(count == q.size(), "count matches occupancy");
      check(out_valid == (q.size() != 0), "out_valid matches occupancy");
      if (out_valid && out_ready) begin
        check(out_data == q[0], "data order");
        void'(q.pop_front());
      end
      if (in_valid && in_ready) q.push_back(in_data);
      held = in_valid && !in_ready;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
