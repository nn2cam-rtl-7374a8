// Layer processing block for a convolution or fully-connected layer.
//
// Data path (one block per network layer):
//   input stream (one activation per beat)
//   -> stream_deserializer      : #SIMD channels per word
//   -> sliding_window_generator : each K x K window, replayed OCH/#PE times
//   -> input register + weight/bias memory read (one cycle)
//   -> #PE processing elements  : all see the same window word, each with
//                                 its own weights (output-channel parallelism)
//   -> result register -> stream_serializer : #PE results, one per beat.
// A fully-connected layer is the special case K == DIM, PAD == 0.
//
// Ordering. PE p computes output channels f*#PE + p for folds
// f = 0 .. OCH/#PE-1. Its weight memory holds, at address f*KW + i
// (KW = K*K*ICH/#SIMD), the #SIMD weights that meet window word i, so the
// weights are read in the same order the window words arrive; its bias
// memory holds the bias of fold f at address f. All folds of an output pixel
// finish before the window moves, so the output stream is channel-first, the
// same order as the input stream, and the next layer can consume it directly.
//
// Timing: one window word per cycle enters the PEs while the window generator
// has data and the output side is not stalled. An output position takes
// (OCH/#PE) * KW cycles. When the serializer cannot take a finished result
// the whole block holds (back-pressure).
// Parameters are written through param_in while the layer is idle; LAYER_ID
// selects which words on the shared load bus belong to this layer.
//
// The chain de-serializer, sliding window generator, PEs with local
// weight and bias memories, serializer follows the paper's layer block;
// the weight ordering and the fold schedule are this design's choices.
module conv_layer
  import nn_pkg::*;
#(
  parameter int LAYER_ID = 0,
  parameter int DIM      = 28,
  parameter int ICH      = 1,
  parameter int OCH      = 16,
  parameter int K        = 3,
  parameter int STRIDE   = 1,
  parameter int PAD      = 0,
  parameter int PE       = 16,
  parameter int SIMD     = 1,
  parameter int A_BITS   = 16,
  parameter int A_FRAC   = 0,
  parameter bit A_BIN    = 1'b0,
  parameter int W_BITS   = 1,
  parameter int W_FRAC   = 0,
  parameter bit W_BIN    = 1'b1,
  parameter int B_BITS   = 16,
  parameter int O_BITS   = 1,
  parameter int O_FRAC   = 0,
  parameter bit O_BIN    = 1'b1,
  parameter bit RELU     = 1'b0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [ACT_W-1:0]  in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [ACT_W-1:0]  out_data,
  input  param_wr_t         param_in
);
  localparam int NF    = OCH / PE;
  localparam int KW    = K * K * ICH / SIMD;
  localparam int WDEP  = NF * KW;
  localparam int WAW   = (WDEP > 1) ? $clog2(WDEP) : 1;
  localparam int BAW   = (NF > 1) ? $clog2(NF) : 1;
  localparam int WW    = SIMD * W_BITS;

  initial begin
    assert (OCH % PE == 0) else $fatal(1, "PE must divide the output channels");
    assert (ICH % SIMD == 0) else $fatal(1, "SIMD must divide the input channels");
    assert (WW <= PARAM_W && B_BITS <= PARAM_W) else $fatal(1, "parameter word too wide");
  end

  // ---------------- de-serializer and window generator ----------------
  logic                   ds_valid, ds_ready;
  logic [SIMD*ACT_W-1:0]  ds_data;
  logic                   sw_valid, sw_ready, sw_last;
  logic [SIMD*ACT_W-1:0]  sw_data;

  stream_deserializer #(.ELEM_W(ACT_W), .N(SIMD)) u_deser (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data,
    .out_valid(ds_valid), .out_ready(ds_ready), .out_data(ds_data)
  );

  sliding_window_generator #(
    .DIM(DIM), .CH(ICH), .K(K), .STRIDE(STRIDE), .PAD(PAD),
    .SIMD(SIMD), .FOLDS(NF), .ELEM_W(ACT_W)
  ) u_swg (
    .clk, .rst_n,
    .in_valid(ds_valid), .in_ready(ds_ready), .in_data(ds_data),
    .out_valid(sw_valid), .out_ready(sw_ready), .out_data(sw_data),
    .out_last(sw_last)
  );

  // ---------------- input register and parameter read ----------------
  logic adv;           // pipeline advances
  logic res_valid;     // #PE results waiting for the serializer
  logic ser_ready;
  int unsigned   i_cnt, f_cnt;
  logic          a_valid, a_first, a_last;
  logic [SIMD*ACT_W-1:0] a_act;

  assign adv      = !res_valid || ser_ready;
  assign sw_ready = adv;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_cnt <= 0; f_cnt <= 0;
      a_valid <= 1'b0; a_first <= 1'b0; a_last <= 1'b0; a_act <= '0;
    end else if (adv) begin
      a_valid <= sw_valid;
      if (sw_valid) begin
        a_act   <= sw_data;
        a_first <= (i_cnt == 0);
        a_last  <= (i_cnt == KW - 1);
        if (i_cnt == KW - 1) begin
          i_cnt <= 0;
          f_cnt <= (f_cnt == NF - 1) ? 0 : f_cnt + 1;
        end else begin
          i_cnt <= i_cnt + 1;
        end
      end
    end
  end

  // Window and weight counters must agree on where a kernel ends.
  a_window_end: assert property (@(posedge clk) disable iff (!rst_n)
    sw_valid && sw_ready |-> (sw_last == (i_cnt == KW - 1)));

  // ---------------- PEs with their memories ----------------
  logic [PE-1:0]        pe_valid;
  logic [PE*ACT_W-1:0]  res_vec;
  logic                 this_layer;
  assign this_layer = param_in.valid && (int'(param_in.layer) == LAYER_ID);

  for (genvar p = 0; p < PE; p++) begin : g_pe
    logic [WW-1:0]     w_word;
    logic [B_BITS-1:0] b_word;
    logic [O_BITS-1:0] o_word;
    logic              sel;
    assign sel = this_layer && (int'(param_in.pe) == p);

    param_memory #(.WIDTH(WW), .DEPTH(WDEP)) u_wmem (
      .clk,
      .we(sel && !param_in.bias), .waddr(WAW'(param_in.addr)), .wdata(param_in.data[WW-1:0]),
      .re(adv && sw_valid), .raddr(WAW'(f_cnt * KW + i_cnt)), .rdata(w_word)
    );
    param_memory #(.WIDTH(B_BITS), .DEPTH(NF)) u_bmem (
      .clk,
      .we(sel && param_in.bias), .waddr(BAW'(param_in.addr)), .wdata(param_in.data[B_BITS-1:0]),
      .re(adv && sw_valid), .raddr(BAW'(f_cnt)), .rdata(b_word)
    );
    processing_element #(
      .SIMD(SIMD), .KSIZE(K * K * ICH),
      .A_BITS(A_BITS), .A_FRAC(A_FRAC), .A_BIN(A_BIN),
      .W_BITS(W_BITS), .W_FRAC(W_FRAC), .W_BIN(W_BIN), .B_BITS(B_BITS),
      .O_BITS(O_BITS), .O_FRAC(O_FRAC), .O_BIN(O_BIN), .RELU(RELU), .ELEM_W(ACT_W)
    ) u_pe (
      .clk, .rst_n, .en(adv),
      .in_valid(a_valid), .in_first(a_first), .in_last(a_last),
      .act(a_act), .wgt(w_word), .bias(b_word),
      .out_valid(pe_valid[p]), .out_data(o_word)
    );
    // Binary results are 0/1; fixed-point results are sign-extended.
    assign res_vec[p*ACT_W +: ACT_W] = O_BIN ? ACT_W'(o_word[0])
                                             : ACT_W'($signed(o_word));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)            res_valid <= 1'b0;
    else if (pe_valid[0])  res_valid <= 1'b1;
    else if (ser_ready)    res_valid <= 1'b0;
  end

  // ---------------- serializer ----------------
  stream_serializer #(.ELEM_W(ACT_W), .N(PE)) u_ser (
    .clk, .rst_n,
    .in_valid(res_valid), .in_ready(ser_ready), .in_data(res_vec),
    .out_valid, .out_ready, .out_data
  );

endmodule
