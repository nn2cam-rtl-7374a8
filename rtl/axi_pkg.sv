// AXI4 and AXI4-Lite channel types used between the accelerator, its image
// and result buffers and the parameter loader. A request struct bundles all
// master-driven signals, a response struct all slave-driven ones.
//
// The paper only says the accelerator has two standard AXI4 ports; the
// widths and the subset of AXI kept here are this design's choices.
package axi_pkg;

  localparam int AW  = 32;  // address bits (byte address)
  localparam int DW  = 32;  // data bits
  localparam int IDW = 2;   // transaction id bits

  localparam logic [1:0] BURST_INCR = 2'b01;
  localparam logic [1:0] RESP_OKAY  = 2'b00;
  localparam logic [1:0] RESP_SLVERR = 2'b10;

  typedef struct packed {
    logic [IDW-1:0] id;
    logic [AW-1:0]  addr;
    logic [7:0]     len;    // beats - 1
    logic [2:0]     size;   // log2(bytes per beat)
    logic [1:0]     burst;
  } ax_chan_t;

  typedef struct packed {
    logic [DW-1:0]   data;
    logic [DW/8-1:0] strb;
    logic            last;
  } w_chan_t;

  typedef struct packed {
    logic [IDW-1:0] id;
    logic [1:0]     resp;
  } b_chan_t;

  typedef struct packed {
    logic [IDW-1:0] id;
    logic [DW-1:0]  data;
    logic [1:0]     resp;
    logic           last;
  } r_chan_t;

  typedef struct packed {
    ax_chan_t aw;
    logic     aw_valid;
    w_chan_t  w;
    logic     w_valid;
    logic     b_ready;
    ax_chan_t ar;
    logic     ar_valid;
    logic     r_ready;
  } axi_req_t;

  typedef struct packed {
    logic    aw_ready;
    logic    w_ready;
    b_chan_t b;
    logic    b_valid;
    logic    ar_ready;
    r_chan_t r;
    logic    r_valid;
  } axi_rsp_t;

  typedef struct packed {
    logic [AW-1:0]   aw_addr;
    logic            aw_valid;
    logic [DW-1:0]   w_data;
    logic [DW/8-1:0] w_strb;
    logic            w_valid;
    logic            b_ready;
    logic [AW-1:0]   ar_addr;
    logic            ar_valid;
    logic            r_ready;
  } axil_req_t;

  typedef struct packed {
    logic          aw_ready;
    logic          w_ready;
    logic [1:0]    b_resp;
    logic          b_valid;
    logic          ar_ready;
    logic [DW-1:0] r_data;
    logic [1:0]    r_resp;
    logic          r_valid;
  } axil_rsp_t;

endpackage
