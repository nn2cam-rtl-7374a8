// Test of param_memory: fills all words with random data through the write
// port, then reads them back in random order and checks the data one cycle
// after the address (registered read); also checks that rdata holds while
// re is low.
module tb_param_memory;
  localparam int W = 20, D = 12;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [3:0] waddr = 0, raddr = 0;
  logic [W-1:0] wdata = 0, rdata;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  param_memory #(.WIDTH(W), .DEPTH(D)) dut (.*);

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int a = 0; a < D; a++) begin
      @(negedge clk); we = 1; waddr = 4'(a); wdata = W'($urandom); model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 200; n++) begin
      automatic int a = $urandom_range(D - 1);
      @(negedge clk); re = 1; raddr = 4'(a);
      // a write to another word in the same cycle must not disturb the read
      we = 1; waddr = 4'((a + 1) % D); wdata = W'($urandom); model[(a + 1) % D] = wdata;
      @(negedge clk); re = 0; we = 0;
      check(rdata == model[a], $sformatf("read word %0d", a));
      raddr = 4'((a + 3) % D);
      @(negedge clk);
      check(rdata == model[a], "rdata holds without re");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
