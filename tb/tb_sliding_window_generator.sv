// Test of sliding_window_generator with stride 2, padding 1, 2 channel groups
// and 2 folds, over two frames, with random input gaps and random output
// back-pressure. The expected word sequence comes from the loop nest
// oy, ox, fold, ky, kx, channel group (zero outside the image). A third frame
// is run with both sides always ready to check the rate: after the first
// window rows are in, one word per cycle.
module tb_sliding_window_generator;
  localparam int DIM = 7, CH = 4, K = 3, S = 2, P = 1, SIMD = 2, F = 2, EW = 16;
  localparam int CG = CH / SIMD, OD = (DIM + 2 * P - K) / S + 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, out_last;
  logic [SIMD*EW-1:0] in_data = 0, out_data;
  int checks = 0, failures = 0;
  bit held = 0;

  sliding_window_generator #(.DIM(DIM), .CH(CH), .K(K), .STRIDE(S), .PAD(P),
    .SIMD(SIMD), .FOLDS(F), .ELEM_W(EW)) dut (.*);

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  function automatic logic [EW-1:0] pix(int fr, int y, int x, int c);
    return EW'(fr * 4096 + y * 512 + x * 32 + c + 1);
  endfunction

  logic [SIMD*EW-1:0] expq [$];
  logic               lastq [$];

  task automatic expect_frame(int fr);
    for (int oy = 0; oy < OD; oy++)
      for (int ox = 0; ox < OD; ox++)
        for (int f = 0; f < F; f++)
          for (int ky = 0; ky < K; ky++)
            for (int kx = 0; kx < K; kx++)
              for (int g = 0; g < CG; g++) begin
                automatic logic [SIMD*EW-1:0] w = '0;
                automatic int y = oy * S - P + ky, x = ox * S - P + kx;
                for (int j = 0; j < SIMD; j++)
                  if (y >= 0 && y < DIM && x >= 0 && x < DIM) w[j*EW +: EW] = pix(fr, y, x, g * SIMD + j);
                expq.push_back(w);
                lastq.push_back(ky == K - 1 && kx == K - 1 && g == CG - 1);
              end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int n_out = 0;
  initial begin
    int fr_in = 0, y = 0, x = 0, g = 0, cyc = 0, first_out = -1, last_out = 0;
    for (int fr = 0; fr < 3; fr++) expect_frame(fr);
    repeat (3) @(negedge clk); rst_n = 1;
    while (expq.size() > 0 && cyc < 50000) begin
      automatic bit fast = (fr_in == 2);
      if (!held) begin
        if (fr_in < 3 && (fast || $urandom_range(2) != 0)) begin
          in_valid = 1;
          for (int j = 0; j < SIMD; j++) in_data[j*EW +: EW] = pix(fr_in, y, x, g * SIMD + j);
        end else in_valid = 0;
      end
      out_ready = (n_out >= 2 * OD * OD * F * K * K * CG) ? 1'b1 : ($urandom_range(3) != 0);
      #1;
      if (out_valid && out_ready) begin
        check(out_data == expq[0], $sformatf("window word %0d", n_out));
        check(out_last == lastq[0], "last flag");
        void'(expq.pop_front()); void'(lastq.pop_front());
        n_out++;
        if (n_out > 2 * OD * OD * F * K * K * CG) begin
          if (first_out < 0) first_out = cyc;
          last_out = cyc;
        end
      end
      if (in_valid && in_ready) begin
        if (g == CG - 1) begin
          g = 0;
          if (x == DIM - 1) begin
            x = 0;
            if (y == DIM - 1) begin y = 0; fr_in++; end else y++;
          end else x++;
        end else g++;
      end
      held = in_valid && !in_ready;
      cyc++;
      @(negedge clk);
    end
    check(expq.size() == 0, "all windows of three frames produced");
    // rate of the third frame: every output word in one cycle, except the
    // waits for input rows (input arrives at one word per cycle, each output
    // row needs S new rows of DIM*CG words)
    check(last_out - first_out + 1 <= OD * OD * F * K * K * CG + OD * S * DIM * CG,
          $sformatf("rate: %0d cycles for %0d words", last_out - first_out + 1, OD * OD * F * K * K * CG));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
