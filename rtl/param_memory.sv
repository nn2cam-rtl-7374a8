// Parameter memory of one processing element (weights or biases).
//
// Every PE owns one weight memory and one bias memory (a dedicated block-RAM
// instance per PE, so all PEs read in the same cycle). Word a of a weight
// memory holds #SIMD weights, lane 0 in the low bits; the words of one kernel
// follow each other in the order of the sliding-window stream, then the next
// kernel handled by the same PE. A bias memory holds one bias per kernel.
// The write port is used while the parameters are loaded through the control
// interface; the read port has one cycle of latency (registered read data,
// block-RAM style) and is used while the layer runs.
//
// One memory per PE follows the paper; widths and depths are set by the
// layer.
module param_memory #(
  parameter int WIDTH = 16,
  parameter int DEPTH = 16,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [AW-1:0]         waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     re,
  input  logic [AW-1:0]         raddr,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
