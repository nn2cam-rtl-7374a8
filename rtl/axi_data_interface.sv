// Data interface of the accelerator: one AXI4 master port for the data.
//
// Read side (image -> network): after start, the image of IMG_ELEMS pixels is
// read from the image memory starting at byte address img_base, with INCR
// bursts of up to BURST_LEN 32-bit beats, one burst in flight at a time. Each
// beat holds DW/PIX_W pixels, lowest byte first; the data serializer splits
// it into one pixel per stream beat, zero-extended to the stream element
// width, towards the first layer. The image memory stores the pixels in the
// order the first layer expects them (channel first, row-major).
//
// Write side (network -> results): the last layer's stream is packed by the
// data de-serializer, DW/RES_W results per word, lowest first, and each word
// is written with a single-beat AXI write to res_base + 4*word. The last
// word is written even if it is only partly filled (unused lanes are zero).
// done pulses for one cycle after the write response of the last word; busy
// is high from start to done. A start while busy is ignored.
// Burst length, packing and single outstanding transactions are this design's
// choices; the paper only says the block has an AXI4 data port.
module axi_data_interface
  import nn_pkg::*;
  import axi_pkg::*;
#(
  parameter int IMG_ELEMS = 784,   // pixels read per frame
  parameter int RES_ELEMS = 11,    // results written per frame
  parameter int RES_W     = 16,    // bits per stored result
  parameter int BURST_LEN = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [AW-1:0]    img_base,
  input  logic [AW-1:0]    res_base,
  output logic             busy,
  output logic             done,
  output axi_req_t         m_axi_req,
  input  axi_rsp_t         m_axi_rsp,
  // stream to the first layer
  output logic             img_valid,
  input  logic             img_ready,
  output logic [ACT_W-1:0] img_data,
  // stream from the last layer
  input  logic             res_valid,
  output logic             res_ready,
  input  logic [ACT_W-1:0] res_data
);
  localparam int PPW       = DW / PIX_W;                    // pixels per word
  localparam int RPW       = DW / RES_W;                    // results per word
  localparam int IMG_WORDS = IMG_ELEMS / PPW;
  localparam int RES_WORDS = (RES_ELEMS + RPW - 1) / RPW;

  initial begin
    assert (IMG_ELEMS % PPW == 0) else $fatal(1, "image must fill whole words");
  end

  // ---------------- read side ----------------
  int unsigned   rd_left;        // words not yet requested
  logic [AW-1:0] rd_addr;
  logic          ar_valid, rd_inflight;
  logic [7:0]    ar_len;
  logic          ser_in_ready, ser_valid;
  logic [PIX_W-1:0] ser_data;

  always_comb begin
    ar_len = (rd_left >= BURST_LEN) ? 8'(BURST_LEN - 1) : 8'(rd_left - 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_left <= 0; rd_addr <= '0; ar_valid <= 1'b0; rd_inflight <= 1'b0;
    end else begin
      if (start && !busy) begin
        rd_left <= IMG_WORDS;
        rd_addr <= img_base;
      end else if (ar_valid && m_axi_rsp.ar_ready) begin
        ar_valid    <= 1'b0;
        rd_inflight <= 1'b1;
        rd_left     <= rd_left - (int'(ar_len) + 1);
        rd_addr     <= rd_addr + AW'((int'(ar_len) + 1) * (DW / 8));
      end else if (!ar_valid && !rd_inflight && rd_left != 0) begin
        ar_valid <= 1'b1;
      end
      if (m_axi_rsp.r_valid && m_axi_req.r_ready && m_axi_rsp.r.last)
        rd_inflight <= 1'b0;
    end
  end

  stream_serializer #(.ELEM_W(PIX_W), .N(PPW)) u_data_ser (
    .clk, .rst_n,
    .in_valid(m_axi_rsp.r_valid), .in_ready(ser_in_ready), .in_data(m_axi_rsp.r.data),
    .out_valid(ser_valid), .out_ready(img_ready), .out_data(ser_data)
  );
  assign img_valid = ser_valid;
  assign img_data  = ACT_W'(ser_data);

  // ---------------- write side (data de-serializer) ----------------
  int unsigned     res_cnt;       // results taken this frame
  int unsigned     wr_cnt;        // words acknowledged this frame
  logic [DW-1:0]   pack;
  int unsigned     lane;
  logic            wpend, aw_done, w_done;
  logic [AW-1:0]   wr_addr;

  assign res_ready = busy && !wpend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0;
      res_cnt <= 0; wr_cnt <= 0; pack <= '0; lane <= 0;
      wpend <= 1'b0; aw_done <= 1'b0; w_done <= 1'b0; wr_addr <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        res_cnt <= 0; wr_cnt <= 0; lane <= 0; pack <= '0;
        wr_addr <= res_base;
      end
      if (res_valid && res_ready) begin
        pack[lane*RES_W +: RES_W] <= res_data[RES_W-1:0];
        res_cnt <= res_cnt + 1;
        if (lane == RPW - 1 || res_cnt == RES_ELEMS - 1) begin
          wpend <= 1'b1; aw_done <= 1'b0; w_done <= 1'b0;
          lane  <= 0;
        end else begin
          lane <= lane + 1;
        end
      end
      if (wpend) begin
        if (m_axi_rsp.aw_ready) aw_done <= 1'b1;
        if (m_axi_rsp.w_ready)  w_done  <= 1'b1;
        if (m_axi_rsp.b_valid && m_axi_req.b_ready) begin
          wpend   <= 1'b0;
          pack    <= '0;
          wr_addr <= wr_addr + AW'(DW / 8);
          wr_cnt  <= wr_cnt + 1;
          if (wr_cnt == RES_WORDS - 1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  always_comb begin
    m_axi_req = '0;
    m_axi_req.ar.addr  = rd_addr;
    m_axi_req.ar.len   = ar_len;
    m_axi_req.ar.size  = 3'($clog2(DW / 8));
    m_axi_req.ar.burst = BURST_INCR;
    m_axi_req.ar_valid = ar_valid;
    m_axi_req.r_ready  = ser_in_ready;
    m_axi_req.aw.addr  = wr_addr;
    m_axi_req.aw.len   = 8'd0;
    m_axi_req.aw.size  = 3'($clog2(DW / 8));
    m_axi_req.aw.burst = BURST_INCR;
    m_axi_req.aw_valid = wpend && !aw_done;
    m_axi_req.w.data   = pack;
    m_axi_req.w.strb   = '1;
    m_axi_req.w.last   = 1'b1;
    m_axi_req.w_valid  = wpend && !w_done;
    m_axi_req.b_ready  = wpend && (aw_done || m_axi_rsp.aw_ready) && (w_done || m_axi_rsp.w_ready);
  end

  // AXI: a request is held until it is accepted.
  a_ar_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_axi_req.ar_valid && !m_axi_rsp.ar_ready |=> m_axi_req.ar_valid && $stable(m_axi_req.ar));
  a_aw_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_axi_req.aw_valid && !m_axi_rsp.aw_ready |=> m_axi_req.aw_valid && $stable(m_axi_req.aw));

endmodule
