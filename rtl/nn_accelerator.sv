// Network-specific streaming accelerator.
//
// One processing block per network layer, all running at the same time
// (inter-layer pipelining), connected by stream FIFOs:
//
//   image memory --AXI--> data interface --FIFO--> layer 0 --FIFO--> layer 1
//     ... --FIFO--> layer N-1 --FIFO--> data interface --AXI--> result memory
//
// Each layer starts working as soon as its sliding window has enough rows and
// stalls only when its input FIFO is empty or its output FIFO is full, so the
// layers of one frame overlap in time. The network is given by the NET
// parameter, one nn_pkg::layer_cfg_t per layer (layer 0 in element 0); a
// convolution or fully-connected entry becomes a conv_layer, a pooling entry
// an avgpool_layer. The per-layer #PE and #SIMD in NET set the intra-layer
// parallelism; choosing them so the layers' rates match is the job of the
// tool that generates NET, not of this hardware.
//
// Interfaces: s_axil is the control port (parameter loading, start, status,
// see control_interface); m_axi is the data port (image reads, result
// writes, see axi_data_interface). irq pulses when a frame's results are all
// written. The default network is the 5-layer binary OCR network for 28x28
// images (nn_pkg::OCR28_BIN).
//
// One block per layer joined by FIFOs, with a data port and a control
// port, follows the paper; the default network's layer shapes and
// parallelism are this design's choice (the paper gives none).
module nn_accelerator
  import nn_pkg::*;
  import axi_pkg::*;
#(
  parameter int                         N_LAYERS   = OCR_LAYERS,
  parameter layer_cfg_t [N_LAYERS-1:0]  NET        = OCR28_BIN,
  parameter int                         FIFO_DEPTH = 32,
  parameter int                         BURST_LEN  = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t s_axil_req,
  output axil_rsp_t s_axil_rsp,
  output axi_req_t  m_axi_req,
  input  axi_rsp_t  m_axi_rsp,
  output logic      irq
);
  localparam layer_cfg_t L0 = NET[0];
  localparam layer_cfg_t LN = NET[N_LAYERS-1];
  localparam int IMG_ELEMS = int'(L0.dim) * int'(L0.dim) * int'(L0.ich);
  localparam int RES_ELEMS = out_dim(LN) * out_dim(LN) * int'(LN.och);

  param_wr_t     param_bus;
  logic          run_start, run_done, dif_busy;
  logic [AW-1:0] img_base, res_base;

  control_interface u_ctrl (
    .clk, .rst_n,
    .s_axil_req, .s_axil_rsp,
    .param_out(param_bus),
    .run_start, .run_done,
    .img_base, .res_base, .irq
  );

  // Streams: s_* [l] is the input of layer l, s_* [N_LAYERS] the result.
  // f_* [l] is the FIFO output feeding layer l (or the result side).
  logic             s_valid [N_LAYERS+1];
  logic             s_ready [N_LAYERS+1];
  logic [ACT_W-1:0] s_data  [N_LAYERS+1];
  logic             f_valid [N_LAYERS+1];
  logic             f_ready [N_LAYERS+1];
  logic [ACT_W-1:0] f_data  [N_LAYERS+1];

  axi_data_interface #(
    .IMG_ELEMS(IMG_ELEMS), .RES_ELEMS(RES_ELEMS), .RES_W(ACT_W), .BURST_LEN(BURST_LEN)
  ) u_data (
    .clk, .rst_n,
    .start(run_start), .img_base, .res_base,
    .busy(dif_busy), .done(run_done),
    .m_axi_req, .m_axi_rsp,
    .img_valid(s_valid[0]), .img_ready(s_ready[0]), .img_data(s_data[0]),
    .res_valid(f_valid[N_LAYERS]), .res_ready(f_ready[N_LAYERS]), .res_data(f_data[N_LAYERS])
  );

  for (genvar l = 0; l <= N_LAYERS; l++) begin : g_fifo
    stream_fifo #(.WIDTH(ACT_W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid(s_valid[l]), .in_ready(s_ready[l]), .in_data(s_data[l]),
      .out_valid(f_valid[l]), .out_ready(f_ready[l]), .out_data(f_data[l]),
      .count()
    );
  end

  for (genvar l = 0; l < N_LAYERS; l++) begin : g_layer
    localparam layer_cfg_t C = NET[l];
    if (C.kind == L_POOL) begin : g_pool
      avgpool_layer #(
        .DIM(int'(C.dim)), .CH(int'(C.ich)), .K(int'(C.k)), .STRIDE(int'(C.stride)),
        .PAD(int'(C.pad)), .SIMD(int'(C.simd)), .A_BITS(int'(C.a_bits))
      ) u_layer (
        .clk, .rst_n,
        .in_valid(f_valid[l]), .in_ready(f_ready[l]), .in_data(f_data[l]),
        .out_valid(s_valid[l+1]), .out_ready(s_ready[l+1]), .out_data(s_data[l+1])
      );
    end else begin : g_conv
      conv_layer #(
        .LAYER_ID(l),
        .DIM(int'(C.dim)), .ICH(int'(C.ich)), .OCH(int'(C.och)), .K(int'(C.k)),
        .STRIDE(int'(C.stride)), .PAD(int'(C.pad)), .PE(int'(C.pe)), .SIMD(int'(C.simd)),
        .A_BITS(int'(C.a_bits)), .A_FRAC(int'(C.a_frac)), .A_BIN(C.a_bin),
        .W_BITS(int'(C.w_bits)), .W_FRAC(int'(C.w_frac)), .W_BIN(C.w_bin),
        .B_BITS(int'(C.b_bits)),
        .O_BITS(int'(C.o_bits)), .O_FRAC(int'(C.o_frac)), .O_BIN(C.o_bin), .RELU(C.relu)
      ) u_layer (
        .clk, .rst_n,
        .in_valid(f_valid[l]), .in_ready(f_ready[l]), .in_data(f_data[l]),
        .out_valid(s_valid[l+1]), .out_ready(s_ready[l+1]), .out_data(s_data[l+1]),
        .param_in(param_bus)
      );
    end
  end

  // Consecutive layers must agree on the feature map they exchange.
  for (genvar l = 1; l < N_LAYERS; l++) begin : g_check
    initial begin
      assert (int'(NET[l].dim) == out_dim(NET[l-1]) && NET[l].ich == NET[l-1].och)
        else $fatal(1, "layer %0d does not match the output of layer %0d", l, l - 1);
    end
  end

endmodule
