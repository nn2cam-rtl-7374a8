// Output multiplexer in front of the camera's USB interface.
//
// In raw mode (mode = 0) the sorted sensor pixels go to the USB side as they
// arrive, one pixel per word (the USB interface has its own DRAM buffer, so
// this stream is not back-pressured). In result mode (mode = 1) a pulse on
// res_req makes the block read res_words words from the result buffer,
// starting at word 0, through the buffer's native port and send them one per
// beat with a valid/ready handshake; res_busy is high until the last word is
// taken. A new read-out request is ignored while one runs. The buffer read
// has one cycle of latency and the buffer keeps its read data while not
// enabled, so that output acts as a second pipeline stage: a word waiting
// there (pend) moves to the output register when it is free or being
// emptied, and the next word is fetched when the waiting slot is empty or
// being vacated. This gives one word per cycle under a ready consumer.
// The mode input is driven by the camera's control block.
//
// The paper's camera has a multiplexer between raw image data and results
// in front of USB; the read-out handshake is this design's choice.
module usb_output_mux
  import nn_pkg::*;
#(
  parameter int RES_AW = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              mode,
  // raw pixel stream
  input  logic              pix_valid,
  input  logic [PIX_W-1:0]  pix_data,
  // result read-out
  input  logic              res_req,
  input  logic [RES_AW:0]   res_words,
  output logic              res_busy,
  output logic              buf_en,
  output logic [RES_AW-1:0] buf_addr,
  input  logic [31:0]       buf_rdata,
  // towards the USB interface
  output logic              usb_valid,
  input  logic              usb_ready,
  output logic [31:0]       usb_data
);
  logic [RES_AW:0] issued;     // words read from the buffer
  logic [RES_AW:0] sent;       // words taken by the USB side
  logic            pend;       // a read is in flight
  logic            hold_v;
  logic [31:0]     hold_d;

  logic cap, fetch;
  assign cap      = pend && (!hold_v || (usb_ready && mode));
  assign fetch    = res_busy && (issued < res_words) && (!pend || cap);
  assign buf_en   = fetch;
  assign buf_addr = issued[RES_AW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issued <= '0; sent <= '0; pend <= 1'b0; res_busy <= 1'b0;
      hold_v <= 1'b0; hold_d <= '0;
    end else begin
      if (!res_busy && res_req && mode && res_words != '0) begin
        res_busy <= 1'b1; issued <= '0; sent <= '0;
      end
      if (fetch) begin
        pend   <= 1'b1;
        issued <= issued + 1'b1;
      end else if (cap) begin
        pend   <= 1'b0;
      end
      if (hold_v && usb_ready && mode) begin
        hold_v <= 1'b0;
        sent   <= sent + 1'b1;
        if (sent + 1'b1 == res_words) res_busy <= 1'b0;
      end
      if (cap) begin
        hold_v <= 1'b1;
        hold_d <= buf_rdata;
      end
    end
  end

  always_comb begin
    if (mode) begin
      usb_valid = hold_v;
      usb_data  = hold_d;
    end else begin
      usb_valid = pix_valid;
      usb_data  = 32'(pix_data);
    end
  end

endmodule
