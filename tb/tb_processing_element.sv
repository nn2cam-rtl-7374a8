// Test of processing_element in three precision settings:
//   pe_fix : 16-bit activations (4 fractional bits) x 8-bit weights (3), ReLU,
//            8-bit output with 2 fractional bits -> truncation and saturation
//   pe_xnor: binary activations and weights (XNOR/popcount), binary output
//   pe_bw  : 16-bit activations x binary weights, 16-bit output, no ReLU
// Random kernels are fed with random enable gaps; each result is compared
// with a model that decodes every operand to an integer and sums products.
module tb_processing_element;
  localparam int EW = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  // ---------------- DUTs ----------------
  logic en = 0, vld = 0, first = 0, last = 0;
  logic [8*EW-1:0] act = 0;
  logic [7:0] wbin = 0;
  logic [3*8-1:0] wfix = 0;
  logic [11:0] bfix = 0;
  logic [15:0] bbin = 0;
  logic ov_fix, ov_xnor, ov_bw;
  logic [7:0] o_fix; logic [0:0] o_xnor; logic [15:0] o_bw;

  processing_element #(.SIMD(3), .KSIZE(9), .A_BITS(16), .A_FRAC(4), .A_BIN(0),
    .W_BITS(8), .W_FRAC(3), .W_BIN(0), .B_BITS(12), .O_BITS(8), .O_FRAC(2), .O_BIN(0),
    .RELU(1), .ELEM_W(EW)) pe_fix (
    .clk, .rst_n, .en, .in_valid(vld), .in_first(first), .in_last(last),
    .act(act[3*EW-1:0]), .wgt(wfix), .bias(bfix), .out_valid(ov_fix), .out_data(o_fix));
  processing_element #(.SIMD(8), .KSIZE(32), .A_BITS(1), .A_FRAC(0), .A_BIN(1),
    .W_BITS(1), .W_FRAC(0), .W_BIN(1), .B_BITS(16), .O_BITS(1), .O_FRAC(0), .O_BIN(1),
    .RELU(0), .ELEM_W(EW)) pe_xnor (
    .clk, .rst_n, .en, .in_valid(vld), .in_first(first), .in_last(last),
    .act(act), .wgt(wbin), .bias(bbin), .out_valid(ov_xnor), .out_data(o_xnor));
  processing_element #(.SIMD(2), .KSIZE(6), .A_BITS(16), .A_FRAC(0), .A_BIN(0),
    .W_BITS(1), .W_FRAC(0), .W_BIN(1), .B_BITS(16), .O_BITS(16), .O_FRAC(0), .O_BIN(0),
    .RELU(0), .ELEM_W(EW)) pe_bw (
    .clk, .rst_n, .en, .in_valid(vld), .in_first(first), .in_last(last),
    .act(act[2*EW-1:0]), .wgt(wbin[1:0]), .bias(bbin), .out_valid(ov_bw), .out_data(o_bw));

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int satv(longint v, int bits);
    longint mx = (longint'(1) <<< (bits - 1)) - 1, mn = -(longint'(1) <<< (bits - 1));
    return int'((v > mx) ? mx : (v < mn) ? mn : v);
  endfunction

  // Runs one kernel of `words` words on all three PEs (same stimulus, each PE
  // uses its own lanes), with random gaps; returns after the result.
  int n_sat = 0, n_relu = 0, n_pos = 0, n_neg = 0;
  task automatic run_kernel(int mode);
    // mode 0: pe_fix (3 words), 1: pe_xnor (4 words), 2: pe_bw (3 words)
    int words = (mode == 1) ? 4 : 3;
    longint sum = 0;
    int exp;
    bfix = 12'($urandom); bbin = 16'($urandom_range(16)) - 16'd8;
    if (mode == 2) bbin = 16'($urandom);
    for (int i = 0; i < words; i++) begin
      // random idle cycles (valid low or enable low)
      while ($urandom_range(2) == 0) begin
        @(negedge clk); vld = $urandom_range(1); en = 0;
      end
      @(negedge clk);
      en = 1; vld = 1; first = (i == 0); last = (i == words - 1);
      for (int j = 0; j < 8; j++) act[j*EW +: EW] = 16'($urandom);
      if (mode == 0 && $urandom_range(3) == 0)
        for (int j = 0; j < 3; j++) act[j*EW +: EW] = 16'h7F00 + 16'($urandom_range(255));
      wfix = 24'($urandom); wbin = 8'($urandom);
      for (int j = 0; j < 8; j++) begin
        if (mode == 0 && j < 3) sum += longint'($signed(act[j*EW +: EW])) * $signed(wfix[j*8 +: 8]);
        if (mode == 1) sum += ((act[j*EW] ~^ wbin[j]) ? 1 : -1);
        if (mode == 2 && j < 2) sum += (wbin[j] ? 1 : -1) * longint'($signed(act[j*EW +: EW]));
      end
    end
    @(negedge clk); vld = 0; en = $urandom_range(1);
    case (mode)
      0: begin
        sum += $signed(bfix);
        if (sum < 0) begin sum = 0; n_relu++; end
        exp = satv(sum >>> 5, 8);
        if (exp == 127) n_sat++;
        check(o_fix == 8'(exp), $sformatf("fixed PE: got %0d expected %0d", $signed(o_fix), exp));
      end
      1: begin
        sum += $signed(bbin);
        if (sum >= 0) n_pos++; else n_neg++;
        check(o_xnor == (sum >= 0), "XNOR PE sign output");
      end
      default: begin
        sum += $signed(bbin);
        check($signed(o_bw) == satv(sum, 16), $sformatf("binary-weight PE: got %0d expected %0d", $signed(o_bw), sum));
      end
    endcase
  endtask

  // out_valid must pulse exactly once per kernel
  int n_valid = 0;
  always @(posedge clk) if (rst_n && ov_fix) n_valid++;

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 600; n++) run_kernel(n % 3);
    @(negedge clk);
    check(n_valid == 600, $sformatf("one result per kernel (%0d)", n_valid));
    check(n_sat > 0 && n_relu > 0 && n_pos > 0 && n_neg > 0, "saturation, ReLU and both signs exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
