// Block-RAM frame buffer with an AXI4 slave port and a native camera port.
//
// Used twice in the camera: as the image buffer (the camera writes the
// prepared image through the native port, the accelerator reads it over AXI)
// and as the result buffer (the accelerator writes over AXI, the camera reads
// the results through the native port for the USB link and the application).
// DEPTH words of DW bits; AXI byte address a maps to word a/4.
//
// AXI side: INCR bursts of any length for reads and writes, one read and one
// write transaction in progress at a time; read data leave from a register
// one cycle after the address phase, then one beat per cycle while r_ready is
// high; a write response follows the last write beat. Strobes are honoured
// per byte. Out-of-range addresses wrap (address taken modulo DEPTH).
// Native side: one access per cycle, nat_rdata valid one cycle after nat_en.
// If the AXI and the native side write the same word in the same cycle, the
// AXI write wins.
//
// The paper places the image and result buffers in block RAM next to the
// accelerator; the dual-port arrangement, the AXI subset and the native
// port are this design's choices.
module axi_bram_buffer
  import axi_pkg::*;
#(
  parameter int DEPTH = 102400,   // words: a 640x640 8-bit image
  localparam int WA   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  axi_req_t      s_axi_req,
  output axi_rsp_t      s_axi_rsp,
  input  logic          nat_en,
  input  logic          nat_we,
  input  logic [WA-1:0] nat_addr,
  input  logic [DW-1:0] nat_wdata,
  output logic [DW-1:0] nat_rdata
);
  logic [DW-1:0] mem [DEPTH];

  function automatic logic [WA-1:0] widx(logic [AW-1:0] a);
    return WA'((a >> 2) % DEPTH);
  endfunction

  // ---------------- read engine ----------------
  logic          rd_act;        // burst in progress
  logic [AW-1:0] rd_addr;
  logic [7:0]    rd_left;       // beats still to be fetched - 1
  logic [IDW-1:0] rd_id;
  logic          r_valid_q, r_last_q;
  logic [DW-1:0] r_data_q;
  logic          rd_fetch;

  assign rd_fetch = rd_act && (!r_valid_q || s_axi_req.r_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_act <= 1'b0; rd_addr <= '0; rd_left <= '0; rd_id <= '0;
      r_valid_q <= 1'b0; r_last_q <= 1'b0;
    end else begin
      if (s_axi_req.ar_valid && s_axi_rsp.ar_ready) begin
        rd_act  <= 1'b1;
        rd_addr <= s_axi_req.ar.addr;
        rd_left <= s_axi_req.ar.len;
        rd_id   <= s_axi_req.ar.id;
      end
      if (r_valid_q && s_axi_req.r_ready) r_valid_q <= 1'b0;
      if (rd_fetch) begin
        r_valid_q <= 1'b1;
        r_last_q  <= (rd_left == 8'd0);
        rd_addr   <= rd_addr + AW'(DW / 8);
        if (rd_left == 8'd0) rd_act <= 1'b0;
        else                 rd_left <= rd_left - 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rd_fetch) r_data_q <= mem[widx(rd_addr)];
  end

  // ---------------- write engine ----------------
  logic          wr_act, b_pend;
  logic [AW-1:0] wr_addr;
  logic [IDW-1:0] wr_id;
  logic          w_take;

  assign w_take = wr_act && s_axi_req.w_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_act <= 1'b0; b_pend <= 1'b0; wr_addr <= '0; wr_id <= '0;
    end else begin
      if (s_axi_req.aw_valid && s_axi_rsp.aw_ready) begin
        wr_act  <= 1'b1;
        wr_addr <= s_axi_req.aw.addr;
        wr_id   <= s_axi_req.aw.id;
      end
      if (w_take) begin
        wr_addr <= wr_addr + AW'(DW / 8);
        if (s_axi_req.w.last) begin
          wr_act <= 1'b0;
          b_pend <= 1'b1;
        end
      end
      if (b_pend && s_axi_req.b_ready) b_pend <= 1'b0;
    end
  end

  // ---------------- memory ----------------
  always_ff @(posedge clk) begin
    if (w_take) begin
      for (int b = 0; b < DW / 8; b++)
        if (s_axi_req.w.strb[b]) mem[widx(wr_addr)][b*8 +: 8] <= s_axi_req.w.data[b*8 +: 8];
    end else if (nat_en && nat_we) begin
      mem[nat_addr] <= nat_wdata;
    end
  end

  always_ff @(posedge clk) begin
    if (nat_en) nat_rdata <= mem[nat_addr];
  end

  always_comb begin
    s_axi_rsp          = '0;
    s_axi_rsp.ar_ready = !rd_act && !r_valid_q;
    s_axi_rsp.r_valid  = r_valid_q;
    s_axi_rsp.r.data   = r_data_q;
    s_axi_rsp.r.last   = r_last_q;
    s_axi_rsp.r.id     = rd_id;
    s_axi_rsp.r.resp   = RESP_OKAY;
    s_axi_rsp.aw_ready = !wr_act && !b_pend;
    s_axi_rsp.w_ready  = wr_act;
    s_axi_rsp.b_valid  = b_pend;
    s_axi_rsp.b.id     = wr_id;
    s_axi_rsp.b.resp   = RESP_OKAY;
  end

  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axi_rsp.r_valid && !s_axi_req.r_ready |=> s_axi_rsp.r_valid && $stable(s_axi_rsp.r));

endmodule
