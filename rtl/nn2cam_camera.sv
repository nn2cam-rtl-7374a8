// Image-analysis path of the smart camera around the generated accelerator.
//
//   sorted sensor pixels --> crop_subsample --> image buffer (block RAM)
//                                                   | AXI read
//   parameter store --AXI-Lite--> nn_accelerator <--+
//                                   | AXI write
//                                   v
//                              result buffer (block RAM) --> output mux --> USB
//   sorted sensor pixels ---------------------------------------^ (raw mode)
//
// A frame is processed as follows: the camera's control side loads the
// parameter file once (cmd_load; the file also sets the accelerator's image
// and result base addresses), then for each frame the image preparation
// crops/subsamples the sensor stream into the image buffer and raises
// frame_ready; a cmd_start then makes the accelerator read the image, stream
// it through all layers and write the results into the result buffer; nn_irq
// pulses when they are complete. The results are read out through the output
// mux in result mode (usb_mode = 1, res_req), while usb_mode = 0 sends the raw
// sensor stream to the USB side as the original camera does.
//
// The accelerator's AXI data port is split by channel: its reads go to the
// image buffer, its writes to the result buffer, so no address decoder is
// needed. The image sensor, the sensor interface with its pixel sorting, the
// camera control block, the USB interface with its DRAM and the application
// are outside this module; their signals are the ports.
//
// The blocks and their order follow the paper's camera integration; buffer
// sizes, the parameter table and all port formats are this design's
// choices, and the sensor, USB and camera control parts are left outside.
module nn2cam_camera
  import nn_pkg::*;
  import axi_pkg::*;
#(
  parameter int IMG_WORDS  = 102400,  // 640x640 8-bit pixels
  parameter int RES_WORDS  = 33462,   // 78x78x11 16-bit results
  parameter int TBL_DEPTH  = 16384,
  localparam int IMG_AW    = $clog2(IMG_WORDS),
  localparam int RES_AW    = $clog2(RES_WORDS),
  localparam int TA        = $clog2(TBL_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // sorted pixel stream from the sensor interface
  input  logic              pix_valid,
  input  logic              pix_sof,
  input  logic              pix_eol,
  input  logic [PIX_W-1:0]  pix_data,
  // image preparation settings from the camera control
  input  logic [15:0]       crop_x0,
  input  logic [15:0]       crop_y0,
  input  logic [7:0]        crop_step,
  output logic              frame_ready,
  // parameter file and commands
  input  logic              tbl_we,
  input  logic [TA-1:0]     tbl_addr,
  input  logic [63:0]       tbl_wdata,
  input  logic [TA:0]       n_entries,
  input  logic              cmd_load,
  input  logic              cmd_start,
  output logic              loader_busy,
  output logic              nn_irq,
  // output towards the USB interface
  input  logic              usb_mode,
  input  logic              res_req,
  input  logic [RES_AW:0]   res_words,
  output logic              res_busy,
  output logic              usb_valid,
  input  logic              usb_ready,
  output logic [31:0]       usb_data
);
  localparam layer_cfg_t L0 = OCR28_BIN[0];

  // ---------------- image preparation ----------------
  logic              img_we;
  logic [IMG_AW-1:0] img_waddr;
  logic [31:0]       img_wdata;

  crop_subsample #(.BUF_AW(IMG_AW)) u_prep (
    .clk, .rst_n,
    .pix_valid, .pix_sof, .pix_eol, .pix_data,
    .crop_x0, .crop_y0, .crop_step,
    .win_dim(L0.dim), .buf_base('0),
    .buf_we(img_we), .buf_addr(img_waddr), .buf_wdata(img_wdata),
    .frame_done(frame_ready)
  );

  // ---------------- accelerator and its buffers ----------------
  axi_req_t  acc_req, img_req, res_req_axi;
  axi_rsp_t  acc_rsp, img_rsp, res_rsp;
  axil_req_t ctl_req;
  axil_rsp_t ctl_rsp;

  nn_accelerator u_acc (
    .clk, .rst_n,
    .s_axil_req(ctl_req), .s_axil_rsp(ctl_rsp),
    .m_axi_req(acc_req), .m_axi_rsp(acc_rsp),
    .irq(nn_irq)
  );

  // Read channels to the image buffer, write channels to the result buffer.
  always_comb begin
    img_req          = '0;
    img_req.ar       = acc_req.ar;
    img_req.ar_valid = acc_req.ar_valid;
    img_req.r_ready  = acc_req.r_ready;
    res_req_axi          = '0;
    res_req_axi.aw       = acc_req.aw;
    res_req_axi.aw_valid = acc_req.aw_valid;
    res_req_axi.w        = acc_req.w;
    res_req_axi.w_valid  = acc_req.w_valid;
    res_req_axi.b_ready  = acc_req.b_ready;
    acc_rsp          = '0;
    acc_rsp.ar_ready = img_rsp.ar_ready;
    acc_rsp.r        = img_rsp.r;
    acc_rsp.r_valid  = img_rsp.r_valid;
    acc_rsp.aw_ready = res_rsp.aw_ready;
    acc_rsp.w_ready  = res_rsp.w_ready;
    acc_rsp.b        = res_rsp.b;
    acc_rsp.b_valid  = res_rsp.b_valid;
  end

  logic [31:0] img_rdata_unused;
  axi_bram_buffer #(.DEPTH(IMG_WORDS)) u_img_buf (
    .clk, .rst_n,
    .s_axi_req(img_req), .s_axi_rsp(img_rsp),
    .nat_en(img_we), .nat_we(img_we), .nat_addr(img_waddr), .nat_wdata(img_wdata),
    .nat_rdata(img_rdata_unused)
  );

  logic              rb_en;
  logic [RES_AW-1:0] rb_addr;
  logic [31:0]       rb_rdata;
  axi_bram_buffer #(.DEPTH(RES_WORDS)) u_res_buf (
    .clk, .rst_n,
    .s_axi_req(res_req_axi), .s_axi_rsp(res_rsp),
    .nat_en(rb_en), .nat_we(1'b0), .nat_addr(rb_addr), .nat_wdata('0),
    .nat_rdata(rb_rdata)
  );

  // ---------------- parameter control ----------------
  param_loader #(.DEPTH(TBL_DEPTH)) u_loader (
    .clk, .rst_n,
    .tbl_we, .tbl_addr, .tbl_wdata, .n_entries,
    .cmd_load, .cmd_start,
    .busy(loader_busy),
    .m_axil_req(ctl_req), .m_axil_rsp(ctl_rsp)
  );

  // ---------------- output multiplexer ----------------
  usb_output_mux #(.RES_AW(RES_AW)) u_mux (
    .clk, .rst_n,
    .mode(usb_mode),
    .pix_valid, .pix_data,
    .res_req, .res_words, .res_busy,
    .buf_en(rb_en), .buf_addr(rb_addr), .buf_rdata(rb_rdata),
    .usb_valid, .usb_ready, .usb_data
  );

endmodule
