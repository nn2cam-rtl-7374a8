// Stream serializer: splits one wide word into N consecutive stream elements.
//
// Used at the output of a layer processing block, where #PE results of one
// output fold arrive together and leave as one activation per beat in
// output-channel order, and at the data interface, where one AXI word of
// pixels becomes single-pixel stream elements. Lane 0 (bits ELEM_W-1:0)
// leaves first. Valid/ready on both sides. A new word is accepted in the cycle
// the last element of the previous one is taken, so a continuous output of one
// element per cycle is possible.
//
// The paper names the serializers; lane order and handshake are this
// design's choices.
module stream_serializer #(
  parameter int ELEM_W = 16,
  parameter int N      = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [N*ELEM_W-1:0] in_data,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [ELEM_W-1:0]   out_data
);
  localparam int CW = (N > 1) ? $clog2(N) : 1;

  logic [N*ELEM_W-1:0] buf_q;
  logic [CW-1:0]       idx;
  logic                last_taken;

  assign out_data   = buf_q[idx*ELEM_W +: ELEM_W];
  assign last_taken = out_valid && out_ready && (idx == CW'(N - 1));
  assign in_ready   = !out_valid || last_taken;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q     <= '0;
      idx       <= '0;
      out_valid <= 1'b0;
    end else if (in_valid && in_ready) begin
      buf_q     <= in_data;
      idx       <= '0;
      out_valid <= 1'b1;
    end else if (out_valid && out_ready) begin
      if (idx == CW'(N - 1)) out_valid <= 1'b0;
      else                   idx <= idx + 1'b1;
    end
  end

endmodule
