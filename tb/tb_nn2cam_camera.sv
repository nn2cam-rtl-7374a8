// End-to-end test of the camera image-analysis path at its default sizes.
//
// The test loads a random parameter file for the default 5-layer OCR network
// through the parameter store, sends two 64x64 sensor frames, lets the image
// preparation crop and subsample them (origin (5,3), step 2) to 28x28, runs
// the accelerator on each and reads the 11 results out through the output
// mux with random back-pressure. Expected results come from a behavioural
// model of the network in this file (plain nested loops over the layer
// definitions, no reuse of the design's arithmetic). It also checks the raw
// pixel mode of the mux, that the layers overlap in time (frame latency below
// the sum of the layers' own cycle counts), and that every mechanism of the
// design occurred: back-pressure stalls, zero padding, output-channel folds,
// XNOR layers, pooling, mode switches and read-out back-pressure.
module tb_nn2cam_camera;
  import nn_pkg::*;

  localparam int NL   = OCR_LAYERS;
  localparam int MAXE = 16384;
  localparam int SW   = 64, SH = 64;     // sensor frame sent by the test
  localparam int X0 = 5, Y0 = 3, STEP = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        pix_valid = 0, pix_sof = 0, pix_eol = 0;
  logic [7:0]  pix_data = 0;
  logic        frame_ready;
  logic        tbl_we = 0;
  logic [13:0] tbl_addr = 0;
  logic [63:0] tbl_wdata = 0;
  logic [14:0] n_entries = 0;
  logic        cmd_load = 0, cmd_start = 0, loader_busy, nn_irq;
  logic        usb_mode = 0, res_req = 0, res_busy, usb_valid, usb_ready = 0;
  logic [15:0] res_words = 0;
  logic [31:0] usb_data;

  nn2cam_camera dut (
    .clk, .rst_n,
    .pix_valid, .pix_sof, .pix_eol, .pix_data,
    .crop_x0(16'(X0)), .crop_y0(16'(Y0)), .crop_step(8'(STEP)), .frame_ready,
    .tbl_we, .tbl_addr, .tbl_wdata, .n_entries, .cmd_load, .cmd_start,
    .loader_busy, .nn_irq,
    .usb_mode, .res_req, .res_words, .res_busy, .usb_valid, .usb_ready, .usb_data
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- behavioural network model ----------------
  int act [NL+1][MAXE];     // act[l]: input of layer l, channel-first order
  int wts [NL][MAXE];       // raw weights [oc][ky][kx][ic]
  int bia [NL][64];         // raw biases
  byte unsigned sensor [SH][SW];

  function automatic int dec(int raw, bit bin);
    return bin ? ((raw & 1) ? 1 : -1) : raw;
  endfunction

  function automatic int sat(longint v, int bits);
    longint mx = (longint'(1) <<< (bits - 1)) - 1;
    longint mn = -(longint'(1) <<< (bits - 1));
    if (v > mx) return int'(mx);
    if (v < mn) return int'(mn);
    return int'(v);
  endfunction

  task automatic model_layer(int l);
    layer_cfg_t c = OCR28_BIN[l];
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
              end else begin
                for (int ic = 0; ic < IC; ic++) begin
                  int raw = (y >= 0 && y < D && x >= 0 && x < D) ? act[l][(y * D + x) * IC + ic] : 0;
                  sum += longint'(dec(raw, c.a_bin)) *
                         dec(wts[l][((oc * K + ky) * K + kx) * IC + ic], c.w_bin);
                end
              end
            end
          if (c.kind == L_POOL) begin
            act[l+1][(oy * OD + ox) * OC + oc] = int'(sum / (K * K));
          end else begin
            sum += bia[l][oc];
            if (c.o_bin) act[l+1][(oy * OD + ox) * OC + oc] = (sum >= 0) ? 1 : 0;
            else begin
              if (c.relu && sum < 0) sum = 0;
              sum = sum >>> (int'(c.a_frac) + int'(c.w_frac) - int'(c.o_frac));
              act[l+1][(oy * OD + ox) * OC + oc] = sat(sum, int'(c.o_bits));
            end
          end
        end
  endtask

  // ---------------- parameter file ----------------
  logic [63:0] file [$];

  task automatic add_wr(int addr, int data);
    file.push_back({32'(addr), 32'(data)});
  endtask

  task automatic make_params();
    add_wr(32'h04, 0);   // image base
    add_wr(32'h08, 0);   // result base
    for (int l = 0; l < NL; l++) begin
      layer_cfg_t c = OCR28_BIN[l];
      int K = int'(c.k), IC = int'(c.ich), OC = int'(c.och);
      int PE = int'(c.pe), SI = int'(c.simd), WB = int'(c.w_bits);
      int CG = IC / SI, KW = K * K * CG, NF = OC / PE;
      if (c.kind == L_POOL) continue;
      for (int oc = 0; oc < OC; oc++) begin
        for (int e = 0; e < K * K * IC; e++) begin
          int r;
          if (c.w_bin) r = $urandom_range(1);
          else         r = int'($urandom_range(31)) - 16;
          wts[l][oc * K * K * IC + e] = r;
        end
        bia[l][oc] = c.o_bin ? int'($urandom_range(40)) - 20 : int'($urandom_range(400)) - 200;
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
            for (int ch = 0; ch < (SI * WB + 31) / 32; ch++)
              add_wr(32'h20 + 4 * ch, int'(word[ch * 32 +: 32]));
            add_wr(32'h10, (l << 28) | (p << 20) | (f * KW + i));
          end
          add_wr(32'h20, bia[l][oc]);
          add_wr(32'h10, (l << 28) | (1 << 27) | (p << 20) | f);
        end
    end
  endtask

  // ---------------- mechanism counters ----------------
  int n_stall = 0, n_pad = 0, n_fold = 0, n_xnor = 0, n_pool = 0, n_usb_bp = 0, n_mode = 0;
  logic mode_q = 0;
  always @(posedge clk) begin
    if (dut.u_acc.f_valid[1] && !dut.u_acc.f_ready[1]) n_stall++;
    if (dut.u_acc.g_layer[2].g_conv.u_layer.u_swg.step && dut.u_acc.g_layer[2].g_conv.u_layer.u_swg.rpad) n_pad++;
    if (dut.u_acc.g_layer[1].g_conv.u_layer.adv && dut.u_acc.g_layer[1].g_conv.u_layer.sw_valid &&
        dut.u_acc.g_layer[1].g_conv.u_layer.f_cnt != 0 && dut.u_acc.g_layer[1].g_conv.u_layer.i_cnt == 0) n_fold++;
    if (dut.u_acc.s_valid[2] && dut.u_acc.s_ready[2]) n_xnor++;
    if (dut.u_acc.s_valid[4] && dut.u_acc.s_ready[4]) n_pool++;
    if (usb_mode && usb_valid && !usb_ready) n_usb_bp++;
    if (usb_mode != mode_q) n_mode++;
    mode_q <= usb_mode;
  end

  // Cycles one layer needs on its own: outputs x folds x words per kernel.
  function automatic int layer_cycles(int l);
    layer_cfg_t c = OCR28_BIN[l];
    int od = out_dim(c);
    if (c.kind == L_POOL) return od * od * int'(c.k) * int'(c.k) * int'(c.ich) / int'(c.simd);
    return od * od * (int'(c.och) / int'(c.pe)) * int'(c.k) * int'(c.k) * int'(c.ich) / int'(c.simd);
  endfunction

  // ---------------- test sequence ----------------
  task automatic send_frame(int seed, bit check_raw);
    int raw_ok = 1;
    for (int y = 0; y < SH; y++)
      for (int x = 0; x < SW; x++)
        sensor[y][x] = 8'((x * 7 + y * 13 + seed * 31 + ((x * y) >> 3)) ^ $urandom_range(15));
    for (int y = 0; y < SH; y++)
      for (int x = 0; x < SW; x++) begin
        @(negedge clk);
        pix_valid = 1; pix_sof = (x == 0 && y == 0); pix_eol = (x == SW - 1);
        pix_data = sensor[y][x];
        if (check_raw) begin
          #1;
          if (!(usb_valid && usb_data == 32'(sensor[y][x]))) raw_ok = 0;
        end
      end
    @(negedge clk);
    pix_valid = 0; pix_sof = 0; pix_eol = 0;
    if (check_raw) check(raw_ok == 1, "raw mode passes sensor pixels to the USB side");
  endtask

  task automatic run_frame(int seed);
    int t0, lat, sum_cyc, max_cyc, got;
    int D0 = int'(OCR28_BIN[0].dim);
    logic [31:0] words [$];
    fork
      send_frame(seed, seed == 2);
      begin
        @(posedge frame_ready);
      end
    join
    check(1'b1, "frame prepared");
    for (int y = 0; y < D0; y++)
      for (int x = 0; x < D0; x++) act[0][y * D0 + x] = sensor[Y0 + STEP * y][X0 + STEP * x];
    for (int l = 0; l < NL; l++) model_layer(l);
    // start the accelerator
    @(negedge clk); cmd_start = 1; @(negedge clk); cmd_start = 0;
    t0 = $time / 10;
    @(posedge nn_irq);
    lat = $time / 10 - t0;
    sum_cyc = 0; max_cyc = 0;
    for (int l = 0; l < NL; l++) begin
      sum_cyc += layer_cycles(l);
      if (layer_cycles(l) > max_cyc) max_cyc = layer_cycles(l);
    end
    $display("frame %0d: latency %0d cycles, slowest layer %0d, sum of layers %0d",
             seed, lat, max_cyc, sum_cyc);
    check(lat >= max_cyc && lat < sum_cyc, "layers overlap: max layer <= latency < sum of layers");
    // read out the results
    @(negedge clk); usb_mode = 1; res_words = 16'd6; res_req = 1;
    @(negedge clk); res_req = 0;
    got = 0;
    while (got < 6) begin
      @(negedge clk);
      usb_ready = ($urandom_range(3) != 0);
      #1;
      if (usb_valid && usb_ready) begin words.push_back(usb_data); got++; end
    end
    @(negedge clk); usb_ready = 0; usb_mode = 0;
    $write("frame %0d results:", seed);
    for (int r = 0; r < 11; r++) $write(" %0d", act[NL][r]);
    $write("\n");
    for (int r = 0; r < 11; r++) begin
      logic [15:0] v = words[r / 2][(r % 2) * 16 +: 16];
      check($signed(v) == 16'(act[NL][r]),
            $sformatf("frame %0d result %0d: got %0d expected %0d", seed, r, $signed(v), act[NL][r]));
    end
  endtask

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    make_params();
    repeat (4) @(negedge clk);
    rst_n = 1;
    foreach (file[i]) begin
      @(negedge clk); tbl_we = 1; tbl_addr = 14'(i); tbl_wdata = file[i];
    end
    @(negedge clk); tbl_we = 0; n_entries = 15'(file.size());
    cmd_load = 1; @(negedge clk); cmd_load = 0;
    @(negedge clk);
    while (loader_busy) @(negedge clk);
    $display("parameter file: %0d register writes", file.size());
    run_frame(1);
    run_frame(2);
    check(n_stall > 0, "back-pressure stall seen");
    check(n_pad > 0, "zero padding seen");
    check(n_fold > 0, "output-channel fold seen");
    check(n_xnor > 0, "XNOR layer output seen");
    check(n_pool > 0, "pooling output seen");
    check(n_usb_bp > 0, "read-out back-pressure seen");
    check(n_mode >= 2, "output mux mode switch seen");
    $display("mechanisms: stall=%0d pad=%0d fold=%0d xnor=%0d pool=%0d usb_bp=%0d mode=%0d",
             n_stall, n_pad, n_fold, n_xnor, n_pool, n_usb_bp, n_mode);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
