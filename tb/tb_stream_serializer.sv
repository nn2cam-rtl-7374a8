// Test of stream_serializer: random wide words with random gaps and output
// back-pressure; the elements must leave lane 0 first, in order, and a full
// rate output (one element per cycle) must be sustained when the input
// always has the next word ready.
module tb_stream_serializer;
  localparam int EW = 8, N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [N*EW-1:0] in_data = 0;
  logic [EW-1:0] out_data;
  int checks = 0, failures = 0;
  bit held = 0;
  logic [EW-1:0] q [$];

  stream_serializer #(.ELEM_W(EW), .N(N)) dut (.*);

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int elems = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      automatic bit full_rate = (n >= 3000);
      if (!held) begin
        in_valid  = full_rate ? 1'b1 : ($urandom_range(3) == 0);
        in_data   = {$urandom, $urandom};
      end
      out_ready = full_rate ? 1'b1 : ($urandom_range(2) != 0);
      #1;
      if (out_valid && out_ready) begin
        check(q.size() > 0 && out_data == q[0], "element order");
        if (q.size() > 0) void'(q.pop_front());
        if (full_rate && n > 3010) elems++;
      end
      if (in_valid && in_ready) for (int j = 0; j < N; j++) q.push_back(in_data[j*EW +: EW]);
      held = in_valid && !in_ready;
      @(negedge clk);
    end
    check(elems == 989, $sformatf("one element per cycle at full rate (%0d)", elems));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
