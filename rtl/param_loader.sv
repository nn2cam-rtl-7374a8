// Parameter control of the camera: parameter store and loader.
//
// Holds the accelerator's parameter file as a list of register writes
// (entry = {byte address [63:32], data [31:0]}) in a table memory that the
// camera fills through the tbl_* port, and replays it on the accelerator's
// AXI4-Lite control port when cmd_load pulses: entries 0 .. n_entries-1 are
// written in order, one write at a time (address and data offered together,
// next entry after the write response). cmd_start writes 1 to the
// accelerator's CTRL register (start a frame). busy is high while a command
// runs; a command that arrives while busy is ignored. Commands come from the
// camera's control block or the application.
// Timing: about 3 cycles per entry (table read, handshake, response).
//
// The paper has a parameter loader that feeds the accelerator through its
// control port at start-up; the table of register writes is this design's
// choice.
module param_loader
  import axi_pkg::*;
#(
  parameter int DEPTH = 16384,
  localparam int TA   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          tbl_we,
  input  logic [TA-1:0] tbl_addr,
  input  logic [63:0]   tbl_wdata,
  input  logic [TA:0]   n_entries,
  input  logic          cmd_load,
  input  logic          cmd_start,
  output logic          busy,
  output axil_req_t     m_axil_req,
  input  axil_rsp_t     m_axil_rsp
);
  typedef enum logic [1:0] {S_IDLE, S_FETCH, S_WRITE, S_RESP} state_e;
  state_e state;

  logic [63:0]   tbl [DEPTH];
  logic [63:0]   entry;
  logic [TA:0]   idx;
  logic          loading;        // 1: table replay, 0: single start write
  logic          aw_done, w_done;
  logic [AW-1:0] wa;
  logic [DW-1:0] wd;

  always_ff @(posedge clk) begin
    if (tbl_we) tbl[tbl_addr] <= tbl_wdata;
  end

  always_ff @(posedge clk) begin
    if (state == S_FETCH) entry <= tbl[idx[TA-1:0]];
  end

  assign busy = (state != S_IDLE);
  assign wa   = loading ? entry[63:32] : 32'h0;
  assign wd   = loading ? entry[31:0]  : 32'h1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; idx <= '0; loading <= 1'b0; aw_done <= 1'b0; w_done <= 1'b0;
    end else begin
      case (state)
        S_IDLE: begin
          if (cmd_load && n_entries != '0) begin
            loading <= 1'b1; idx <= '0; state <= S_FETCH;
          end else if (cmd_start) begin
            loading <= 1'b0; state <= S_WRITE; aw_done <= 1'b0; w_done <= 1'b0;
          end
        end
        S_FETCH: begin
          state <= S_WRITE; aw_done <= 1'b0; w_done <= 1'b0;
        end
        S_WRITE: begin
          if (m_axil_rsp.aw_ready) aw_done <= 1'b1;
          if (m_axil_rsp.w_ready)  w_done  <= 1'b1;
          if ((aw_done || m_axil_rsp.aw_ready) && (w_done || m_axil_rsp.w_ready))
            state <= S_RESP;
        end
        S_RESP: begin
          if (m_axil_rsp.b_valid) begin
            if (loading && idx + 1'b1 < n_entries) begin
              idx <= idx + 1'b1; state <= S_FETCH;
            end else begin
              state <= S_IDLE;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    m_axil_req          = '0;
    m_axil_req.aw_addr  = wa;
    m_axil_req.aw_valid = (state == S_WRITE) && !aw_done;
    m_axil_req.w_data   = wd;
    m_axil_req.w_strb   = '1;
    m_axil_req.w_valid  = (state == S_WRITE) && !w_done;
    m_axil_req.b_ready  = (state == S_RESP);
  end

endmodule
