// Test of stream_deserializer: random element stream with random input gaps
// and output back-pressure; every output word must hold the next N elements,
// the first one in lane 0. With both sides always ready, N elements must
// produce a word every N cycles (no bubbles).
module tb_stream_deserializer;
  localparam int EW = 8, N = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [EW-1:0] in_data = 0;
  logic [N*EW-1:0] out_data;
  int checks = 0, failures = 0;
  bit held = 0;
  logic [EW-1:0] q [$];

  stream_deserializer #(.ELEM_W(EW), .N(N)) dut (.*);

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int words = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      automatic bit full_rate = (n >= 3000);
      if (!held) begin
        in_valid  = full_rate ? 1'b1 : ($urandom_range(2) != 0);
        in_data   = EW'($urandom);
      end
      out_ready = full_rate ? 1'b1 : ($urandom_range(2) != 0);
      #1;
      if (out_valid && out_ready) begin
        logic [N*EW-1:0] exp;
        for (int j = 0; j < N; j++) exp[j*EW +: EW] = q.pop_front();
        check(out_data == exp, "packed word");
        if (full_rate) words++;
      end
      if (in_valid && in_ready) q.push_back(in_data);
      if (full_rate) check(in_ready, "no bubble at full rate");
      held = in_valid && !in_ready;
      @(negedge clk);
    end
    check(words >= 1000 / N - 2, "one word every N cycles at full rate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
