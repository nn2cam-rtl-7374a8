// Stream FIFO between two stages of the streaming pipeline.
//
// Each stream of the accelerator (data interface to first layer, layer to
// layer, last layer to data interface) is decoupled by one of these FIFOs: the
// producer pushes whenever there is room, the consumer pops when it needs the
// next element. The storage is a circular buffer of DEPTH words with a
// first-word-fall-through output: out_data shows the oldest word whenever
// out_valid is high. Both sides use a valid/ready handshake; a word moves
// when valid and ready are high in the same cycle. A push and a pop may happen
// in the same cycle. Latency from push to out_valid is one cycle.
// The depth is this design's choice (the FIFOs' sizes are not specified).
module stream_fifo #(
  parameter int WIDTH = 16,
  parameter int DEPTH = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wptr, rptr;
  logic             push, pop;

  assign in_ready  = (count < ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= (wptr == PW'(DEPTH - 1)) ? '0 : wptr + 1'b1;
      if (pop)  rptr <= (rptr == PW'(DEPTH - 1)) ? '0 : rptr + 1'b1;
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  // A producer must hold its word until it is taken.
  a_in_stable: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && !in_ready |=> in_valid && $stable(in_data));

endmodule
