// Test of avgpool_layer: 2x2 pooling with stride 2 on a 6x6x4 map, 2
// channels per word, signed 16-bit activations; two frames with random input
// gaps and output back-pressure. Each output must equal the integer average
// (sum / 4, truncated towards zero) of its channel's window, in channel-first
// order.
module tb_avgpool_layer;
  import nn_pkg::*;
  localparam int DIM = 6, CH = 4, K = 2, S = 2, SI = 2, OD = DIM / 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [ACT_W-1:0] in_data = 0, out_data;
  int checks = 0, failures = 0;
  bit held = 0;

  avgpool_layer #(.DIM(DIM), .CH(CH), .K(K), .STRIDE(S), .PAD(0), .SIMD(SI), .A_BITS(16)) dut (.*);

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  int img [2][DIM*DIM*CH];
  int expq [$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int sent = 0, got = 0, cyc = 0;
    for (int fr = 0; fr < 2; fr++) begin
      for (int e = 0; e < DIM * DIM * CH; e++) img[fr][e] = int'($urandom_range(2000)) - 1000;
      for (int oy = 0; oy < OD; oy++) for (int ox = 0; ox < OD; ox++)
        for (int c = 0; c < CH; c++) begin
          automatic int sum = 0;
          for (int ky = 0; ky < K; ky++) for (int kx = 0; kx < K; kx++)
            sum += img[fr][((oy * S + ky) * DIM + ox * S + kx) * CH + c];
          expq.push_back(sum / (K * K));
        end
    end
    repeat (3) @(negedge clk); rst_n = 1;
    while (got < 2 * OD * OD * CH && cyc < 50000) begin
      if (!held) begin
        in_valid = (sent < 2 * DIM * DIM * CH) && ($urandom_range(3) != 0);
        if (in_valid) in_data = ACT_W'(img[sent / (DIM*DIM*CH)][sent % (DIM*DIM*CH)]);
      end
      out_ready = ($urandom_range(2) != 0);
      #1;
      if (out_valid && out_ready) begin
        check($signed(out_data) == expq[0], $sformatf("output %0d: got %0d expected %0d",
              got, $signed(out_data), expq[0]));
        void'(expq.pop_front());
        got++;
      end
      if (in_valid && in_ready) sent++;
      held = in_valid && !in_ready;
      cyc++;
      @(negedge clk);
    end
    check(got == 2 * OD * OD * CH, "all outputs of two frames");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
