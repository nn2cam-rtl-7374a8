// Image preparation: cropping and subsampling of the sensor stream.
//
// The camera's sorted pixel stream (one pixel per pix_valid, frame start
// marked by pix_sof on the first pixel, line end by pix_eol on the last pixel
// of a line) is cut down to the network's input: starting at column crop_x0
// and row crop_y0, every crop_step-th pixel of every crop_step-th line is kept
// until win_dim x win_dim pixels are collected. Kept pixels are packed four
// per 32-bit word, first pixel in the lowest byte, and written to the image
// buffer from word address buf_base on, in row-major order, which is the
// order the first layer expects. frame_done pulses in the same cycle as the
// buffer write of the last word of a frame. win_dim*win_dim must be a
// multiple of four (28 x 28 is).
//
// The block never stalls the sensor: it keeps no more than one word in flight.
// Pixels are monochrome and PIX_W bits wide. The crop window and step are
// runtime inputs, set by the camera's control block; the step is realised
// with phase counters, so no division is needed. The stream format and the
// register inputs are this design's choices (the block is only named).
module crop_subsample
  import nn_pkg::*;
#(
  parameter int SENSOR_W = 1024,   // 1-megapixel sensor, assumed 1024 x 1024
  parameter int SENSOR_H = 1024,
  parameter int BUF_AW   = 17
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              pix_valid,
  input  logic              pix_sof,
  input  logic              pix_eol,
  input  logic [PIX_W-1:0]  pix_data,
  input  logic [15:0]       crop_x0,
  input  logic [15:0]       crop_y0,
  input  logic [7:0]        crop_step,
  input  logic [15:0]       win_dim,
  input  logic [BUF_AW-1:0] buf_base,
  output logic              buf_we,
  output logic [BUF_AW-1:0] buf_addr,
  output logic [31:0]       buf_wdata,
  output logic              frame_done
);
  localparam int XW = $clog2(SENSOR_W + 1);
  localparam int YW = $clog2(SENSOR_H + 1);

  // Registered position state; a start of frame restarts it at (0,0).
  logic [XW-1:0] x_q;   logic [YW-1:0] y_q;
  logic [7:0]    xph_q, yph_q;      // subsampling phases
  logic [15:0]   xo_q,  yo_q;       // pixels kept in this line / lines kept
  logic [1:0]    lane;
  logic [23:0]   pack;
  logic [BUF_AW-1:0] waddr;
  logic          active;

  logic [XW-1:0] x;   logic [YW-1:0] y;
  logic [7:0]    xph, yph;
  logic [15:0]   xo,  yo;
  logic          in_x, in_y, keep;
  logic [1:0]    ln;
  logic [BUF_AW-1:0] wa;
  always_comb begin
    x   = pix_sof ? '0 : x_q;    y   = pix_sof ? '0 : y_q;
    xph = pix_sof ? '0 : xph_q;  yph = pix_sof ? '0 : yph_q;
    xo  = pix_sof ? '0 : xo_q;   yo  = pix_sof ? '0 : yo_q;
    ln  = pix_sof ? '0 : lane;   wa  = pix_sof ? buf_base : waddr;
    in_x = (32'(x) >= 32'(crop_x0)) && (xph == 8'd0) && (xo < win_dim);
    in_y = (32'(y) >= 32'(crop_y0)) && (yph == 8'd0) && (yo < win_dim);
    keep = (active || pix_sof) && in_x && in_y;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q <= '0; y_q <= '0; xph_q <= '0; yph_q <= '0; xo_q <= '0; yo_q <= '0;
      lane <= '0; pack <= '0; waddr <= '0; active <= 1'b0;
      buf_we <= 1'b0; buf_addr <= '0; buf_wdata <= '0; frame_done <= 1'b0;
    end else begin
      buf_we     <= 1'b0;
      frame_done <= 1'b0;
      if (pix_valid) begin
        if (pix_sof) active <= 1'b1;
        // column bookkeeping
        if (pix_eol) begin
          x_q <= '0; xph_q <= '0; xo_q <= '0;
        end else begin
          x_q <= x + 1'b1;
          xph_q <= (32'(x) < 32'(crop_x0)) ? 8'd0
                 : (xph == crop_step - 8'd1) ? 8'd0 : xph + 8'd1;
          xo_q  <= (32'(x) >= 32'(crop_x0) && xph == 8'd0) ? xo + 16'd1 : xo;
        end
        // line bookkeeping at the end of each line
        if (pix_eol) begin
          y_q   <= y + 1'b1;
          yph_q <= (32'(y) < 32'(crop_y0)) ? 8'd0
                 : (yph == crop_step - 8'd1) ? 8'd0 : yph + 8'd1;
          yo_q  <= (32'(y) >= 32'(crop_y0) && yph == 8'd0) ? yo + 16'd1 : yo;
        end else begin
          y_q <= y; yph_q <= yph; yo_q <= yo;
        end
        // packing and buffer write
        lane  <= ln;
        waddr <= wa;
        if (keep) begin
          if (ln == 2'd3) begin
            buf_we    <= 1'b1;
            buf_addr  <= wa;
            buf_wdata <= {8'(pix_data), pack};
            waddr     <= wa + 1'b1;
            lane      <= 2'd0;
            if (xo == win_dim - 16'd1 && yo == win_dim - 16'd1) begin
              frame_done <= 1'b1;
              active     <= 1'b0;
            end
          end else begin
            pack[ln*8 +: 8] <= 8'(pix_data);
            lane <= ln + 1'b1;
          end
        end
      end
    end
  end

endmodule
