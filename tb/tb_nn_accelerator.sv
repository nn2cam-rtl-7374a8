// Test of nn_accelerator on its own, with the all-16-bit variant of the OCR
// network (OCR28_16B), small FIFOs (depth 4) and 8-beat bursts, so that this
// test covers the fixed-point path that the camera test (binary network) does
// not. The accelerator is driven through its AXI4-Lite port by a master
// model (parameter words, base registers, start, status polling) and serves
// an AXI4 memory model with random ar/aw/w ready and r/b valid gaps. Two
// images are processed; the results written to memory are compared with a
// behavioural model of the network, and the frame latency is checked against
// the per-layer cycle counts (layers must overlap).
module tb_nn_accelerator;
  import nn_pkg::*;
  import axi_pkg::*;

  localparam int NL = OCR_LAYERS;
  localparam layer_cfg_t [NL-1:0] NETC = OCR28_16B;
  localparam int MAXE = 16384;
  localparam int MEMW = 4096;
  localparam int IMG_B = 32'h100, RES_B = 32'h2000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  axil_req_t lreq = '0; axil_rsp_t lrsp;
  axi_req_t  mreq;      axi_rsp_t  mrsp;
  logic irq;

  nn_accelerator #(.N_LAYERS(NL), .NET(NETC), .FIFO_DEPTH(4), .BURST_LEN(8)) dut (
    .clk, .rst_n, .s_axil_req(lreq), .s_axil_rsp(lrsp), .m_axi_req(mreq), .m_axi_rsp(mrsp), .irq);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ---------------- AXI4 memory model ----------------
  logic [31:0] mem [MEMW];
  logic [31:0] r_addr, w_addr;
  int r_left, w_left;
  bit r_act, w_act, b_pend;
  int n_r_beats = 0, n_w_beats = 0, n_bursts = 0;
  always @(posedge clk) begin
    if (!rst_n) begin
      mrsp <= '0; r_act <= 0; w_act <= 0; b_pend <= 0;
    end else begin
      // read channel
      if (mreq.ar_valid && mrsp.ar_ready) begin
        r_act <= 1; r_addr <= mreq.ar.addr; r_left <= int'(mreq.ar.len) + 1; n_bursts++;
        check(mreq.ar.burst == BURST_INCR && mreq.ar.size == 3'd2, "read burst type");
      end
      mrsp.ar_ready <= !r_act && !(mreq.ar_valid && mrsp.ar_ready) && $urandom_range(1);
      if (mrsp.r_valid && mreq.r_ready) begin
        mrsp.r_valid <= 0;
        n_r_beats++;
      end
      if (r_act && (!mrsp.r_valid || mreq.r_ready) && $urandom_range(3) != 0) begin
        mrsp.r_valid  <= 1;
        mrsp.r.data   <= mem[r_addr[13:2]];
        mrsp.r.last   <= (r_left == 1);
        mrsp.r.resp   <= RESP_OKAY;
        r_addr <= r_addr + 4;
        r_left <= r_left - 1;
        if (r_left == 1) r_act <= 0;
      end
      // write channel
      if (mreq.aw_valid && mrsp.aw_ready) begin
        w_act <= 1; w_addr <= mreq.aw.addr; w_left <= int'(mreq.aw.len) + 1;
      end
      mrsp.aw_ready <= !w_act && !b_pend && !(mreq.aw_valid && mrsp.aw_ready) && $urandom_range(1);
      if (mreq.w_valid && mrsp.w_ready) begin
        for (int b = 0; b < 4; b++)
          if (mreq.w.strb[b]) mem[w_addr[13:2]][b*8 +: 8] <= mreq.w.data[b*8 +: 8];
        check(mreq.w.last == (w_left == 1), "WLAST on the last write beat");
        w_addr <= w_addr + 4; w_left <= w_left - 1; n_w_beats++;
        if (w_left == 1) begin w_act <= 0; b_pend <= 1; end
      end
      mrsp.w_ready <= w_act && !(mreq.w_valid && mrsp.w_ready && w_left == 1) && $urandom_range(1);
      if (mrsp.b_valid && mreq.b_ready) mrsp.b_valid <= 0;
      if (b_pend && !mrsp.b_valid && $urandom_range(1)) begin
        mrsp.b_valid <= 1; mrsp.b.resp <= RESP_OKAY; b_pend <= 0;
      end
    end
  end

  // ---------------- AXI4-Lite master ----------------
  task automatic lwr(logic [31:0] a, logic [31:0] d);
    bit aw_ok = 0, w_ok = 0;
    @(negedge clk);
    lreq.aw_addr = a; lreq.w_data = d; lreq.w_strb = '1; lreq.aw_valid = 1; lreq.w_valid = 1;
    while (!(aw_ok && w_ok)) begin
      #1;
      if (lreq.aw_valid && lrsp.aw_ready) aw_ok = 1;
      if (lreq.w_valid && lrsp.w_ready) w_ok = 1;
      @(negedge clk);
      lreq.aw_valid = !aw_ok; lreq.w_valid = !w_ok;
    end
    lreq.b_ready = 1; #1;
    while (!lrsp.b_valid) begin @(negedge clk); #1; end
    @(negedge clk); lreq.b_ready = 0;
  endtask

  task automatic lrd(logic [31:0] a, output logic [31:0] d);
    @(negedge clk); lreq.ar_addr = a; lreq.ar_valid = 1; #1;
    while (!lrsp.ar_ready) begin @(negedge clk); #1; end
    @(negedge clk); lreq.ar_valid = 0; lreq.r_ready = 1; #1;
    while (!lrsp.r_valid) begin @(negedge clk); #1; end
    d = lrsp.r_data;
    @(negedge clk); lreq.r_ready = 0;
  endtask

  // ---------------- behavioural network model ----------------
  int act [NL+1][MAXE];
  int wts [NL][MAXE];
  int bia [NL][64];

  function automatic int sat(longint v, int bits);
    longint mx = (longint'(1) <<< (bits - 1)) - 1;
    longint mn = -(longint'(1) <<< (bits - 1));
    if (v > mx) return int'(mx);
    if (v < mn) return int'(mn);
    return int'(v);
  endfunction

  task automatic model_layer(int l);
    layer_cfg_t c = NETC[l];
    int D = int'(c.dim), IC = int'(c.ich), OC = int'(c.och), K = int'(c.k);
    int S = int'(c.stride), P = int'(c.pad), OD = out_dim(c);
    for (int oy = 0; oy < OD; oy++)
      for (int ox = 0; ox < OD; ox++)
        for (int oc = 0; oc < OC; oc++) begin
          longint sum = 0;
          for (int ky = 0; ky < K; ky++)
            for (int kx = 0; kx < K; kx++) begin
              int y = oy * S - P + ky, x = ox * S - P + kx;
              if (c.kind == L_POOL) begin
                if (y >= 0 && y < D && x >= 0 && x < D) sum += act[l][(y * D + x) * IC + oc];
              end else
                for (int ic = 0; ic < IC; ic++)
                  if (y >= 0 && y < D && x >= 0 && x < D)
                    sum += longint'(act[l][(y * D + x) * IC + ic]) * wts[l][((oc * K + ky) * K + kx) * IC + ic];
            end
          if (c.kind == L_POOL) act[l+1][(oy * OD + ox) * OC + oc] = int'(sum / (K * K));
          else begin
            sum += bia[l][oc];
            if (c.relu && sum < 0) sum = 0;
            sum = sum >>> (int'(c.a_frac) + int'(c.w_frac) - int'(c.o_frac));
            act[l+1][(oy * OD + ox) * OC + oc] = sat(sum, int'(c.o_bits));
          end
        end
  endtask

  task automatic load_params();
    for (int l = 0; l < NL; l++) begin
      layer_cfg_t c = NETC[l];
      int K = int'(c.k), IC = int'(c.ich), OC = int'(c.och);
      int PE = int'(c.pe), SI = int'(c.simd), WB = int'(c.w_bits);
      int CG = IC / SI, KW = K * K * CG, NF = OC / PE;
      if (c.kind == L_POOL) continue;
      for (int oc = 0; oc < OC; oc++) begin
        for (int e = 0; e < K * K * IC; e++) wts[l][oc * K * K * IC + e] = int'($urandom_range(63)) - 32;
        bia[l][oc] = int'($urandom_range(4000)) - 2000;
      end
      for (int p = 0; p < PE; p++)
        for (int f = 0; f < NF; f++) begin
          int oc = f * PE + p;
          for (int i = 0; i < KW; i++) begin
            logic [PARAM_W-1:0] word = '0;
            int kk = i / CG, cg = i % CG;
            int ky = kk / K, kx = kk % K;
            for (int j = 0; j < SI; j++) begin
              int w = wts[l][((oc * K + ky) * K + kx) * IC + cg * SI + j];
              for (int b = 0; b < WB; b++) word[j * WB + b] = w[b];
            end
            for (int ch = 0; ch < (SI * WB + 31) / 32; ch++) lwr(32'h20 + 4 * ch, word[ch * 32 +: 32]);
            lwr(32'h10, (l << 28) | (p << 20) | (f * KW + i));
          end
          lwr(32'h20, bia[l][oc]);
          lwr(32'h10, (l << 28) | (1 << 27) | (p << 20) | f);
        end
    end
  endtask

  function automatic int layer_cycles(int l);
    layer_cfg_t c = NETC[l];
    int od = out_dim(c);
    if (c.kind == L_POOL) return od * od * int'(c.k) * int'(c.k) * int'(c.ich) / int'(c.simd);
    return od * od * (int'(c.och) / int'(c.pe)) * int'(c.k) * int'(c.k) * int'(c.ich) / int'(c.simd);
  endfunction

  int n_stall = 0;
  always @(posedge clk) if (rst_n && dut.f_valid[1] && !dut.f_ready[1]) n_stall++;

  task automatic run_image(int seed);
    int D0 = int'(NETC[0].dim), OD = out_dim(NETC[NL-1]), NO = OD * OD * int'(NETC[NL-1].och);
    int t0, lat, sum_cyc = 0, max_cyc = 0, nz = 0;
    logic [31:0] d;
    for (int i = 0; i < D0 * D0; i++) act[0][i] = int'($urandom_range(255));
    for (int w = 0; w < D0 * D0 / 4; w++)
      mem[IMG_B / 4 + w] = {8'(act[0][4*w+3]), 8'(act[0][4*w+2]), 8'(act[0][4*w+1]), 8'(act[0][4*w])};
    for (int w = 0; w < 64; w++) mem[RES_B / 4 + w] = 32'hDEADBEEF;
    for (int l = 0; l < NL; l++) model_layer(l);
    lwr(32'h0, 32'h1);
    t0 = $time / 10;
    @(posedge irq);
    lat = $time / 10 - t0;
    lrd(32'h0, d);
    check(d[2:0] == 3'b110, $sformatf("status %b: done and idle after irq", d[2:0]));
    for (int l = 0; l < NL; l++) begin
      sum_cyc += layer_cycles(l);
      if (layer_cycles(l) > max_cyc) max_cyc = layer_cycles(l);
    end
    $display("image %0d: latency %0d cycles, slowest layer %0d, sum %0d", seed, lat, max_cyc, sum_cyc);
    check(lat >= max_cyc && lat < sum_cyc, "layers overlap: max layer <= latency < sum of layers");
    $write("image %0d results:", seed);
    for (int r = 0; r < NO; r++) begin
      logic [15:0] v = mem[RES_B / 4 + r / 2][(r % 2) * 16 +: 16];
      $write(" %0d", $signed(v));
      if (act[NL][r] != 0) nz++;
      check($signed(v) == 16'(act[NL][r]),
            $sformatf("image %0d result %0d: got %0d expected %0d", seed, r, $signed(v), act[NL][r]));
    end
    $write("\n");
    check(nz >= 2, "results are not trivially zero");
    check(mem[RES_B / 4 + (NO + 1) / 2] == 32'hDEADBEEF, "no write past the result block");
  endtask

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] d;
    repeat (4) @(negedge clk); rst_n = 1;
    lrd(32'h0, d); check(d[2:0] == 3'b100, "idle after reset");
    lwr(32'h04, IMG_B); lwr(32'h08, RES_B);
    load_params();
    run_image(1);
    run_image(2);
    lrd(32'h0C, d); check(d == 2, "frame counter");
    check(n_bursts == 2 * ((784 / 4 + 7) / 8), $sformatf("read bursts %0d", n_bursts));
    check(n_stall > 0, "back-pressure stall seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
