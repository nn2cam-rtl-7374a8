// Stream de-serializer: packs N consecutive stream elements into one word.
//
// A layer processing block receives its input one activation per beat and
// hands the sliding window generator #SIMD channels at a time; this block
// gathers them. The first element received lands in lane 0 (bits
// ELEM_W-1:0), the N-th in lane N-1. Input and output use valid/ready. The
// packed word is held in an output register; while it waits, the next word
// can already be collected if the consumer takes the current one in the same
// cycle, so a word of N elements leaves N cycles after its first element
// arrived and a full-rate input keeps going without bubbles.
//
// The paper names the de-serializer; lane order and handshake are this
// design's choices.
module stream_deserializer #(
  parameter int ELEM_W = 16,
  parameter int N      = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [ELEM_W-1:0]   in_data,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [N*ELEM_W-1:0] out_data
);
  localparam int CW = (N > 1) ? $clog2(N) : 1;

  logic [N*ELEM_W-1:0] acc;
  logic [CW-1:0]       cnt;
  logic                take;

  // Room for a new element unless the last lane would complete a word
  // while the previous word is still waiting.
  assign in_ready = !(out_valid && !out_ready && cnt == CW'(N - 1));
  assign take     = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      cnt       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        acc[cnt*ELEM_W +: ELEM_W] <= in_data;
        if (cnt == CW'(N - 1)) begin
          cnt       <= '0;
          out_valid <= 1'b1;
          out_data  <= acc;
          out_data[cnt*ELEM_W +: ELEM_W] <= in_data;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

endmodule
