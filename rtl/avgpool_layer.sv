// Layer processing block for channel-wise average pooling.
//
// The pooling layer reuses the front end of a convolution block
// (de-serializer and sliding window generator, one replay per window) but
// instead of multiplying with weights it adds up, for each channel
// separately, the K*K activations of the window and divides the sum by K*K.
// Window words arrive in the order ky, kx, channel group, so word number
// j of a window belongs to channel group j mod (CH/SIMD); one accumulator per
// channel collects them. When the last word of a window arrives, all CH
// averages are registered at once and leave through a serializer, one per beat
// in channel order, which is again the channel-first stream order.
//
// Arithmetic: inputs are signed A_BITS fixed-point activations; the result
// has the same format. The division truncates towards zero (integer
// division); after a ReLU layer all inputs are non-negative and this equals
// truncation of the fractional bits. No parameters are needed.
// Timing: one window word per cycle; a window takes K*K*CH/SIMD cycles,
// then CH beats on the output, overlapped with the next window.
//
// The paper defines average pooling as a channel-wise average over the
// window; realising it with accumulators instead of PEs, and rounding the
// division toward zero, are this design's choices.
module avgpool_layer
  import nn_pkg::*;
#(
  parameter int DIM    = 12,
  parameter int CH     = 32,
  parameter int K      = 2,
  parameter int STRIDE = 2,
  parameter int PAD    = 0,
  parameter int SIMD   = 4,
  parameter int A_BITS = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [ACT_W-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [ACT_W-1:0] out_data
);
  localparam int CG    = CH / SIMD;
  localparam int KK    = K * K;
  localparam int SUM_W = A_BITS + $clog2(KK + 1) + 1;

  logic                  ds_valid, ds_ready;
  logic [SIMD*ACT_W-1:0] ds_data;
  logic                  sw_valid, sw_ready, sw_last;
  logic [SIMD*ACT_W-1:0] sw_data;

  stream_deserializer #(.ELEM_W(ACT_W), .N(SIMD)) u_deser (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data,
    .out_valid(ds_valid), .out_ready(ds_ready), .out_data(ds_data)
  );

  sliding_window_generator #(
    .DIM(DIM), .CH(CH), .K(K), .STRIDE(STRIDE), .PAD(PAD),
    .SIMD(SIMD), .FOLDS(1), .ELEM_W(ACT_W)
  ) u_swg (
    .clk, .rst_n,
    .in_valid(ds_valid), .in_ready(ds_ready), .in_data(ds_data),
    .out_valid(sw_valid), .out_ready(sw_ready), .out_data(sw_data),
    .out_last(sw_last)
  );

  logic signed [SUM_W-1:0] acc [CH];
  logic signed [SUM_W-1:0] acc_next [CH];
  logic [CH*ACT_W-1:0]     res_vec;
  logic                    res_valid, ser_ready, take;
  int unsigned             grp;     // channel group of the current word
  int unsigned             kpos;    // window element of the current word

  assign sw_ready = !res_valid || ser_ready;
  assign take     = sw_valid && sw_ready;

  always_comb begin
    for (int c = 0; c < CH; c++) begin
      acc_next[c] = acc[c];
      if (c / SIMD == int'(grp))
        acc_next[c] = ((kpos == 0) ? '0 : acc[c])
                      + SUM_W'($signed(sw_data[(c % SIMD)*ACT_W +: A_BITS]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      grp <= 0; kpos <= 0;
      res_valid <= 1'b0;
      res_vec   <= '0;
      for (int c = 0; c < CH; c++) acc[c] <= '0;
    end else begin
      if (ser_ready) res_valid <= 1'b0;
      if (take) begin
        for (int c = 0; c < CH; c++) acc[c] <= acc_next[c];
        if (grp == CG - 1) begin
          grp  <= 0;
          kpos <= (kpos == KK - 1) ? 0 : kpos + 1;
        end else begin
          grp <= grp + 1;
        end
        if (sw_last) begin
          res_valid <= 1'b1;
          for (int c = 0; c < CH; c++)
            res_vec[c*ACT_W +: ACT_W] <= ACT_W'(acc_next[c] / SUM_W'(KK));
        end
      end
    end
  end

  stream_serializer #(.ELEM_W(ACT_W), .N(CH)) u_ser (
    .clk, .rst_n,
    .in_valid(res_valid), .in_ready(ser_ready), .in_data(res_vec),
    .out_valid, .out_ready, .out_data
  );

endmodule
