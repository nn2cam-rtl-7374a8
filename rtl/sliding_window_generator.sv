// Sliding window generator of a layer processing block.
//
// Input: the layer's input feature map as a stream of #SIMD-channel words in
// channel-first order (all channel groups of pixel (0,0), then (0,1), ...,
// row by row). Output: for every output position (oy, ox) in row-major order,
// the K x K window is sent FOLDS times (once per group of #PE output
// channels), each time as K*K*CH/SIMD words in the order ky, kx, channel
// group. Window positions outside the image (zero padding) read as zero.
//
// The buffer holds K + STRIDE input rows, the rows needed for two consecutive
// output rows: while the K rows of the current output row are read, the next
// STRIDE rows are written into the remaining space, so the next output row can
// start as soon as the current one ends. A row is buffered in slot
// (row mod (K + STRIDE)). The reader starts an output row only when all input
// rows it needs are complete; the writer only overwrites a slot whose row is
// no longer needed. At the end of a frame the reader waits until the writer
// has taken the whole input frame (rows beyond the last window are read and
// dropped), then both restart for the next frame.
//
// Timing: the buffer is read synchronously; out_data is a register that is
// refilled whenever it is empty or taken, so one word per cycle leaves while
// the needed rows are present. out_last marks the last word of each window
// replay. Handshakes are valid/ready.
//
// A row buffer that overwrites rows no longer needed and supports side
// padding follows the paper; the K+STRIDE row ring, the read order and
// the raw-zero padding value are this design's choices.
module sliding_window_generator #(
  parameter int DIM    = 28,   // input width = height
  parameter int CH     = 1,    // input channels
  parameter int K      = 3,    // kernel size
  parameter int STRIDE = 1,
  parameter int PAD    = 0,
  parameter int SIMD   = 1,    // channels per word
  parameter int FOLDS  = 1,    // window replays per output position
  parameter int ELEM_W = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [SIMD*ELEM_W-1:0] in_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [SIMD*ELEM_W-1:0] out_data,
  output logic                   out_last
);
  localparam int CG        = CH / SIMD;
  localparam int ODIM      = (DIM + 2 * PAD - K) / STRIDE + 1;
  localparam int ROWS      = K + STRIDE;
  localparam int ROW_WORDS = DIM * CG;
  localparam int DEPTH     = ROWS * ROW_WORDS;
  localparam int AWID      = $clog2(DEPTH);
  localparam int SW        = $clog2(ROWS + 1);

  initial begin
    assert (CH % SIMD == 0) else $fatal(1, "SIMD must divide the channel count");
    assert (K <= DIM + 2 * PAD) else $fatal(1, "kernel larger than padded input");
  end

  logic [SIMD*ELEM_W-1:0] mem [DEPTH];

  // ---------------- writer ----------------
  int unsigned wx, wc, wy;          // next input position to be written
  logic [SW-1:0] wslot;             // wy mod ROWS
  // ---------------- reader ----------------
  int unsigned ox, oy, f, ky, kx, rc;
  int          lo;                  // oy*STRIDE - PAD: first input row
  int          xb;                  // ox*STRIDE - PAD: first input column
  logic [SW-1:0] bslot;             // lo mod ROWS
  logic          rdone;             // all windows of this frame were sent

  // Rows the reader needs before it can start, and rows still in use.
  int hi_row, lo_clamped;
  always_comb begin
    hi_row     = lo + K - 1;
    if (hi_row > DIM - 1) hi_row = DIM - 1;
    lo_clamped = (lo < 0) ? 0 : lo;
  end

  logic wr_room, rd_rows_ok;
  assign wr_room    = (wy < DIM) && (rdone || (int'(wy) - lo_clamped < ROWS));
  assign rd_rows_ok = !rdone && (int'(wy) > hi_row);
  assign in_ready   = wr_room;

  // Address of the current window word.
  int          ry, rx;
  logic [SW-1:0] rslot;
  logic        rpad;
  logic [AWID-1:0] raddr;
  always_comb begin
    ry    = lo + int'(ky);
    rx    = xb + int'(kx);
    rslot = ((int'(bslot) + int'(ky)) >= ROWS) ? SW'(int'(bslot) + int'(ky) - ROWS)
                                               : SW'(int'(bslot) + int'(ky));
    rpad  = (ry < 0) || (ry >= DIM) || (rx < 0) || (rx >= DIM);
    raddr = rpad ? '0 : AWID'(int'(rslot) * ROW_WORDS + rx * CG + int'(rc));
  end

  logic adv, step;
  assign adv  = !out_valid || out_ready;
  assign step = adv && rd_rows_ok;

  logic last_word;
  assign last_word = (rc == CG - 1) && (kx == K - 1) && (ky == K - 1);

  // Buffer write port.
  always_ff @(posedge clk) begin
    if (in_valid && in_ready)
      mem[AWID'(int'(wslot) * ROW_WORDS + int'(wx) * CG + int'(wc))] <= in_data;
  end

  // Buffer read port (registered output).
  always_ff @(posedge clk) begin
    if (step) out_data <= rpad ? '0 : mem[raddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wx <= 0; wc <= 0; wy <= 0; wslot <= '0;
      ox <= 0; oy <= 0; f <= 0; ky <= 0; kx <= 0; rc <= 0;
      lo <= -PAD; xb <= -PAD;
      bslot <= SW'((ROWS - (PAD % ROWS)) % ROWS);
      rdone <= 1'b0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
    end else begin
      // ---- writer ----
      if (in_valid && in_ready) begin
        if (wc == CG - 1) begin
          wc <= 0;
          if (wx == DIM - 1) begin
            wx <= 0;
            wy <= wy + 1;
            wslot <= (wslot == SW'(ROWS - 1)) ? '0 : wslot + 1'b1;
          end else begin
            wx <= wx + 1;
          end
        end else begin
          wc <= wc + 1;
        end
      end
      // ---- frame restart: reader finished and whole frame consumed ----
      if (rdone && wy == DIM) begin
        rdone <= 1'b0;
        wy    <= 0;
        wslot <= '0;
      end
      // ---- reader ----
      if (adv) out_valid <= rd_rows_ok;
      if (step) begin
        out_last <= last_word;
        if (rc != CG - 1) rc <= rc + 1;
        else begin
          rc <= 0;
          if (kx != K - 1) kx <= kx + 1;
          else begin
            kx <= 0;
            if (ky != K - 1) ky <= ky + 1;
            else begin
              ky <= 0;
              if (f != FOLDS - 1) f <= f + 1;
              else begin
                f <= 0;
                if (ox != ODIM - 1) begin
                  ox <= ox + 1;
                  xb <= xb + STRIDE;
                end else begin
                  ox <= 0;
                  xb <= -PAD;
                  if (oy != ODIM - 1) begin
                    oy <= oy + 1;
                    lo <= lo + STRIDE;
                    bslot <= SW'((int'(bslot) + STRIDE) % ROWS);
                  end else begin
                    oy <= 0;
                    lo <= -PAD;
                    bslot <= SW'((ROWS - (PAD % ROWS)) % ROWS);
                    rdone <= 1'b1;
                  end
                end
              end
            end
          end
        end
      end
    end
  end

endmodule
