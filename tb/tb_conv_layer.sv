// Test of conv_layer: a 3x3 convolution with padding 1 on a 6x6x4 input,
// 6 output channels on 3 PEs (2 folds), 2 input channels per cycle, 8-bit
// fixed point with ReLU. Weights and biases are loaded through the parameter
// bus in the documented memory layout, then three frames are streamed
// through with random input gaps and output back-pressure (the last frame at
// full rate). Outputs are compared with a direct loop-nest model of the
// convolution, and the full-rate frame's outputs must follow each other within the layer's
// compute time OD*OD*(OCH/PE)*(K*K*ICH/SIMD) plus the fill of its first rows.
module tb_conv_layer;
  import nn_pkg::*;
  localparam int DIM = 6, IC = 4, OC = 6, K = 3, S = 1, P = 1, PE = 3, SI = 2;
  localparam int AB = 8, AF = 2, WB = 8, WF = 2, BB = 12, OB = 8, OF = 2;
  localparam int OD = (DIM + 2 * P - K) / S + 1, NF = OC / PE, CG = IC / SI, KW = K * K * CG;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [ACT_W-1:0] in_data = 0, out_data;
  param_wr_t param_in = '0;
  int checks = 0, failures = 0;
  bit held = 0;

  conv_layer #(.LAYER_ID(3), .DIM(DIM), .ICH(IC), .OCH(OC), .K(K), .STRIDE(S), .PAD(P),
    .PE(PE), .SIMD(SI), .A_BITS(AB), .A_FRAC(AF), .A_BIN(0), .W_BITS(WB), .W_FRAC(WF),
    .W_BIN(0), .B_BITS(BB), .O_BITS(OB), .O_FRAC(OF), .O_BIN(0), .RELU(1)) dut (.*);

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  int img [3][DIM*DIM*IC];
  int w [OC][K][K][IC];
  int b [OC];
  int expq [$];

  function automatic int satv(longint v, int bits);
    longint mx = (longint'(1) <<< (bits - 1)) - 1, mn = -(longint'(1) <<< (bits - 1));
    return int'((v > mx) ? mx : (v < mn) ? mn : v);
  endfunction

  task automatic model(int fr);
    for (int oy = 0; oy < OD; oy++)
      for (int ox = 0; ox < OD; ox++)
        for (int oc = 0; oc < OC; oc++) begin
          longint sum = b[oc];
          for (int ky = 0; ky < K; ky++)
            for (int kx = 0; kx < K; kx++)
              for (int ic = 0; ic < IC; ic++) begin
                int y = oy * S - P + ky, x = ox * S - P + kx;
                if (y >= 0 && y < DIM && x >= 0 && x < DIM)
                  sum += longint'(img[fr][(y * DIM + x) * IC + ic]) * w[oc][ky][kx][ic];
              end
          if (sum < 0) sum = 0;
          expq.push_back(satv(sum >>> (AF + WF - OF), OB));
        end
  endtask

  task automatic load_params();
    for (int p = 0; p < PE; p++)
      for (int f = 0; f < NF; f++) begin
        for (int i = 0; i < KW; i++) begin
          @(negedge clk);
          param_in = '0; param_in.valid = 1; param_in.layer = 4'd3; param_in.pe = 7'(p);
          param_in.addr = 20'(f * KW + i);
          for (int j = 0; j < SI; j++)
            param_in.data[j*WB +: WB] = WB'(w[f*PE+p][(i/CG)/K][(i/CG)%K][(i%CG)*SI+j]);
        end
        @(negedge clk);
        param_in = '0; param_in.valid = 1; param_in.layer = 4'd3; param_in.pe = 7'(p);
        param_in.bias = 1; param_in.addr = 20'(f); param_in.data[BB-1:0] = BB'(b[f*PE+p]);
      end
    // a write for another layer must be ignored
    @(negedge clk);
    param_in = '0; param_in.valid = 1; param_in.layer = 4'd2; param_in.bias = 1;
    param_in.data = '1;
    @(negedge clk); param_in = '0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int sent = 0, got = 0, cyc = 0, t_start = 0, t_end = 0;
    for (int oc = 0; oc < OC; oc++) begin
      b[oc] = int'($urandom_range(400)) - 200;
      for (int ky = 0; ky < K; ky++) for (int kx = 0; kx < K; kx++)
        for (int ic = 0; ic < IC; ic++) w[oc][ky][kx][ic] = int'($urandom_range(255)) - 128;
    end
    for (int fr = 0; fr < 3; fr++) begin
      for (int e = 0; e < DIM * DIM * IC; e++) img[fr][e] = int'($urandom_range(255)) - 128;
      model(fr);
    end
    repeat (3) @(negedge clk); rst_n = 1;
    load_params();
    while (got < 3 * OD * OD * OC && cyc < 100000) begin
      automatic bit fast = (sent >= 2 * DIM * DIM * IC);
      if (!held) begin
        in_valid = (sent < 3 * DIM * DIM * IC) && (fast || $urandom_range(3) != 0);
        if (in_valid) in_data = ACT_W'(img[sent / (DIM*DIM*IC)][sent % (DIM*DIM*IC)]);
      end
      out_ready = (got >= 2 * OD * OD * OC) ? 1'b1 : ($urandom_range(2) != 0);
      #1;
      if (out_valid && out_ready) begin
        check($signed(out_data) == expq[0], $sformatf("output %0d: got %0d expected %0d",
              got, $signed(out_data), expq[0]));
        void'(expq.pop_front());
        got++;
        if (got == 2 * OD * OD * OC) t_start = cyc;
        if (got == 3 * OD * OD * OC) t_end = cyc;
      end
      if (in_valid && in_ready) sent++;
      held = in_valid && !in_ready;
      cyc++;
      @(negedge clk);
    end
    check(got == 3 * OD * OD * OC, "all outputs of three frames");
    $display("full-rate frame: %0d cycles, compute bound %0d", t_end - t_start, OD * OD * NF * KW);
    check(t_end - t_start <= OD * OD * NF * KW + 2 * DIM * IC + 3 * PE + 10,
          "full-rate frame within compute time plus row fill");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
