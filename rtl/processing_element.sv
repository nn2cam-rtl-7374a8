// Processing element (PE): #SIMD-wide multiply-accumulate for one output
// channel at a time.
//
// The PE multiplies the #SIMD activations of each incoming window word with
// the #SIMD weights read from its memory in the same order and accumulates
// the products. With in_first the accumulator restarts; with in_last (the
// end of a kernel, after KERNEL_SIZE/#SIMD words) it adds the bias, applies
// the output function and registers the result in out_data with a one-cycle
// out_valid pulse.
//
// Arithmetic. A fixed-point operand is a signed two's complement value; a
// binary operand (A_BIN / W_BIN) is one bit, 1 meaning +1 and 0 meaning -1.
// If both operands are binary the dot product is computed as XNOR and
// popcount: sum = 2 * popcount(~(a ^ w)) - SIMD, without multipliers.
// Otherwise each lane is a signed multiplication. The bias has
// A_FRAC + W_FRAC fractional bits, like the accumulator. Output functions:
//   O_BIN = 1 : out = (acc + bias >= 0), one bit (binary sign activation)
//   O_BIN = 0 : optional ReLU, then conversion to O_BITS bits with O_FRAC
//               fractional bits: extra fractional bits are truncated (arith-
//               metic shift right, i.e. rounding towards minus infinity) and
//               values beyond the output range saturate to its min/max.
// The accumulator is sized so it cannot overflow for a kernel of KSIZE
// elements. The datapath is combinational between the input register of
// the layer and out_data; en freezes the PE during output back-pressure.
//
// Multiply-accumulate in arrival order, bias at the end of the kernel,
// then the activation, XNOR-popcount for fully binary layers, truncation
// and saturation follow the paper; the binary encoding, the threshold at
// zero and the accumulator sizing are this design's choices.
module processing_element #(
  parameter int SIMD   = 4,
  parameter int KSIZE  = 9,      // elements of one kernel (K*K*C_in)
  parameter int A_BITS = 16,
  parameter int A_FRAC = 0,
  parameter bit A_BIN  = 1'b0,
  parameter int W_BITS = 16,
  parameter int W_FRAC = 8,
  parameter bit W_BIN  = 1'b0,
  parameter int B_BITS = 16,
  parameter int O_BITS = 16,
  parameter int O_FRAC = 0,
  parameter bit O_BIN  = 1'b0,
  parameter bit RELU   = 1'b1,
  parameter int ELEM_W = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   en,
  input  logic                   in_valid,
  input  logic                   in_first,
  input  logic                   in_last,
  input  logic [SIMD*ELEM_W-1:0] act,
  input  logic [SIMD*W_BITS-1:0] wgt,
  input  logic [B_BITS-1:0]      bias,
  output logic                   out_valid,
  output logic [O_BITS-1:0]      out_data
);
  localparam int AV     = A_BIN ? 2 : A_BITS;   // signed width of a decoded operand
  localparam int WV     = W_BIN ? 2 : W_BITS;
  localparam int ACC_W  = AV + WV + $clog2(KSIZE + 1) + 2;
  localparam int SUM_W  = (ACC_W > B_BITS) ? ACC_W + 1 : B_BITS + 1;
  localparam int SHIFT  = A_FRAC + W_FRAC - O_FRAC;
  localparam bit XNOR   = A_BIN && W_BIN;

  initial begin
    assert (SHIFT >= 0) else $fatal(1, "output needs fewer fractional bits than the accumulator");
  end

  logic signed [ACC_W-1:0] acc;
  logic signed [ACC_W-1:0] dot;
  logic signed [ACC_W-1:0] acc_next;
  logic signed [SUM_W-1:0] sum;

  // Dot product of one word.
  always_comb begin
    dot = '0;
    if (XNOR) begin
      for (int j = 0; j < SIMD; j++)
        dot += (act[j*ELEM_W] ~^ wgt[j*W_BITS]) ? ACC_W'(1) : ACC_W'(-1);
    end else begin
      for (int j = 0; j < SIMD; j++) begin
        logic signed [AV-1:0] a;
        logic signed [WV-1:0] w;
        if (A_BIN) a = act[j*ELEM_W] ? AV'(1) : AV'(-1);
        else       a = AV'($signed(act[j*ELEM_W +: A_BITS]));
        if (W_BIN) w = wgt[j*W_BITS] ? WV'(1) : WV'(-1);
        else       w = WV'($signed(wgt[j*W_BITS +: W_BITS]));
        dot += ACC_W'(a * w);
      end
    end
    acc_next = (in_first ? '0 : acc) + dot;
    sum      = SUM_W'(acc_next) + SUM_W'($signed(bias));
  end

  // Output function.
  logic [O_BITS-1:0] res;
  always_comb begin
    logic signed [SUM_W-1:0] v;
    if (O_BIN) begin
      res = O_BITS'(sum >= 0);
    end else begin
      v = (RELU && sum < 0) ? '0 : sum;
      v = v >>> SHIFT;
      if (v > SUM_W'((2 ** (O_BITS - 1)) - 1))
        res = {1'b0, {(O_BITS-1){1'b1}}};
      else if (v < -SUM_W'(2 ** (O_BITS - 1)))
        res = {1'b1, {(O_BITS-1){1'b0}}};
      else
        res = v[O_BITS-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= 1'b0;
      if (en && in_valid) begin
        acc <= acc_next;
        if (in_last) begin
          out_valid <= 1'b1;
          out_data  <= res;
        end
      end
    end
  end

endmodule
