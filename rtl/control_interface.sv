// Control interface and control block of the accelerator.
//
// An AXI4-Lite slave through which the camera loads the network parameters
// and runs the network. Register map (byte addresses, 32-bit registers):
//   0x00 CTRL      write: bit 0 = start a frame (ignored while busy)
//                  read : bit 0 = busy, bit 1 = done (sticky until the next
//                         start), bit 2 = idle
//   0x04 IMG_BASE  byte address of the image in the image memory
//   0x08 RES_BASE  byte address of the results in the result memory
//   0x0C FRAMES    read: frames completed since reset
//   0x10 PARAM_SEL write: commits the staged parameter word to
//                  layer [31:28], bias (1) / weight (0) memory [27],
//                  PE [26:20], word address [19:0]
//   0x20 + 4*j     PARAM_DATA[j], j = 0 .. PARAM_W/32-1: 32-bit slices of
//                  the staged parameter word, slice 0 = bits 31:0
// A parameter word is loaded by writing its slices, then PARAM_SEL; the
// commit appears on param_out for one cycle. Writes to PARAM_SEL while busy
// are ignored, so parameters cannot change during a frame.
//
// Run state machine: IDLE -> (start) RUN: run_start pulses to the data
// interface -> (run_done) DONE for one cycle -> IDLE; irq pulses with
// done. DONE counts as idle (status bit 2, start accepted), so a status
// read in the cycle after irq already reports idle. AW and W may arrive in any order; the write completes when both were
// taken, and the response follows one cycle later. Reads answer one cycle
// after the address. Unmapped addresses read as zero and answer OKAY.
// The register layout is this design's choice.
module control_interface
  import nn_pkg::*;
  import axi_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  axil_req_t     s_axil_req,
  output axil_rsp_t     s_axil_rsp,
  output param_wr_t     param_out,
  output logic          run_start,
  input  logic          run_done,
  output logic [AW-1:0] img_base,
  output logic [AW-1:0] res_base,
  output logic          irq
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;
  state_e state;

  logic [PARAM_W-1:0] stage;
  logic               done_flag;
  logic [31:0]        frames;

  // ---------------- write channel ----------------
  logic          aw_got, w_got, b_pend;
  logic [AW-1:0] aw_addr_q;
  logic [DW-1:0] w_data_q;
  logic          wr_fire;

  assign wr_fire = aw_got && w_got && !b_pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aw_got <= 1'b0; w_got <= 1'b0; b_pend <= 1'b0;
      aw_addr_q <= '0; w_data_q <= '0;
      stage <= '0; img_base <= '0; res_base <= '0;
      param_out <= '0;
      run_start <= 1'b0;
    end else begin
      param_out.valid <= 1'b0;
      run_start <= 1'b0;
      if (s_axil_req.aw_valid && s_axil_rsp.aw_ready) begin
        aw_got <= 1'b1; aw_addr_q <= s_axil_req.aw_addr;
      end
      if (s_axil_req.w_valid && s_axil_rsp.w_ready) begin
        w_got <= 1'b1; w_data_q <= s_axil_req.w_data;
      end
      if (wr_fire) begin
        aw_got <= 1'b0; w_got <= 1'b0; b_pend <= 1'b1;
        case (aw_addr_q[7:0])
          8'h00: if (w_data_q[0] && state != S_RUN) run_start <= 1'b1;
          8'h04: img_base <= w_data_q;
          8'h08: res_base <= w_data_q;
          8'h10: if (state != S_RUN) begin
            param_out.valid <= 1'b1;
            param_out.layer <= w_data_q[31:28];
            param_out.bias  <= w_data_q[27];
            param_out.pe    <= w_data_q[26:20];
            param_out.addr  <= w_data_q[19:0];
            param_out.data  <= stage;
          end
          default: begin
            if (aw_addr_q[7:5] == 3'b001 && int'(aw_addr_q[4:2]) < PARAM_W / 32)
              stage[aw_addr_q[4:2]*32 +: 32] <= w_data_q;
          end
        endcase
      end
      if (b_pend && s_axil_req.b_ready) b_pend <= 1'b0;
    end
  end

  // ---------------- read channel ----------------
  logic          r_pend;
  logic [DW-1:0] r_data_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_pend <= 1'b0; r_data_q <= '0;
    end else begin
      if (s_axil_req.ar_valid && s_axil_rsp.ar_ready) begin
        r_pend <= 1'b1;
        case (s_axil_req.ar_addr[7:0])
          8'h00:   r_data_q <= {29'd0, state != S_RUN, done_flag, state == S_RUN};
          8'h04:   r_data_q <= img_base;
          8'h08:   r_data_q <= res_base;
          8'h0C:   r_data_q <= frames;
          default: r_data_q <= '0;
        endcase
      end else if (r_pend && s_axil_req.r_ready) begin
        r_pend <= 1'b0;
      end
    end
  end

  always_comb begin
    s_axil_rsp          = '0;
    s_axil_rsp.aw_ready = !aw_got && !b_pend;
    s_axil_rsp.w_ready  = !w_got && !b_pend;
    s_axil_rsp.b_valid  = b_pend;
    s_axil_rsp.b_resp   = RESP_OKAY;
    s_axil_rsp.ar_ready = !r_pend;
    s_axil_rsp.r_valid  = r_pend;
    s_axil_rsp.r_data   = r_data_q;
    s_axil_rsp.r_resp   = RESP_OKAY;
  end

  // ---------------- run state machine ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done_flag <= 1'b0; frames <= '0; irq <= 1'b0;
    end else begin
      irq <= 1'b0;
      case (state)
        S_IDLE, S_DONE:
                if (run_start) begin state <= S_RUN; done_flag <= 1'b0; end
                else state <= S_IDLE;
        S_RUN:  if (run_done) begin
                  state <= S_DONE; done_flag <= 1'b1; irq <= 1'b1;
                  frames <= frames + 1'b1;
                end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
