// decoupled_ecc_ctrl: read-side control of decoupled ChipKill.
//
// A normal read returns the eight data symbols and the first check symbol p0 of
// each codeword; the second check symbol p1 stays in the write-only ECC chip.
//   1. DETECT: the first check equation is evaluated (ssc_detector). If it holds
//      for all 8 codewords the line is returned as CLEAN one cycle later.
//   2. FETCH:  otherwise the write-only chip is asked for p1 of the same line
//      (p1_req_o, one-cycle pulse) and stall_o is held high so the regular chips
//      stop serving other requests until p1 arrives (p1_valid_i).
//   3. CORRECT: the full SSC decoder (ssc_corrector) runs on data, p0 and p1 and
//      the line is returned as CORRECTED or DUE one cycle later.
// The flow is the paper's; the handshake (valid-only read return, request pulse,
// one-line-at-a-time operation with rd_ready_o) is this design's choice.
// Event counters report how often each outcome happened.
module decoupled_ecc_ctrl
  import screme_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // read data returning from the regular chips
  input  logic              rd_valid_i,
  output logic              rd_ready_o,
  input  logic [ADDR_W-1:0] rd_addr_i,
  input  logic [LINE_W-1:0] rd_data_i,
  input  logic [PAR_W-1:0]  rd_p0_i,
  // fetch of the remaining check symbol from the write-only chip
  output logic              p1_req_o,
  output logic [ADDR_W-1:0] p1_addr_o,
  input  logic              p1_valid_i,
  input  logic [PAR_W-1:0]  p1_i,
  output logic              stall_o,
  // response to the requester
  output logic              resp_valid_o,
  output logic [ADDR_W-1:0] resp_addr_o,
  output logic [LINE_W-1:0] resp_data_o,
  output ecc_status_e       resp_status_o,
  output logic [3:0]        err_chip_o,
  output logic              err_chip_vld_o,
  // statistics
  output logic [31:0]       n_detected_o,
  output logic [31:0]       n_corrected_o,
  output logic [31:0]       n_due_o
);

  typedef enum logic [1:0] {S_IDLE, S_FETCH, S_CORRECT} state_e;
  state_e state;

  logic [ADDR_W-1:0] addr_q;
  logic [LINE_W-1:0] data_q;
  logic [PAR_W-1:0]  p0_q, p1_q;

  logic              detected;
  logic [N_CW-1:0]   err_cw;
  logic [LINE_W-1:0] corr_data;
  ecc_status_e       corr_status;
  logic [N_CW-1:0]   due_cw;
  logic [3:0]        corr_chip;
  logic              corr_chip_vld;

  ssc_detector u_det (
    .data_i(rd_data_i), .p0_i(rd_p0_i), .err_cw_o(err_cw), .detected_o(detected)
  );

  ssc_corrector u_cor (
    .data_i(data_q), .p0_i(p0_q), .p1_i(p1_q), .data_o(corr_data),
    .status_o(corr_status), .due_cw_o(due_cw), .err_chip_o(corr_chip),
    .err_chip_vld_o(corr_chip_vld)
  );

  assign rd_ready_o = (state == S_IDLE);
  assign stall_o    = (state != S_IDLE);
  assign p1_addr_o  = addr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      addr_q         <= '0;
      data_q         <= '0;
      p0_q           <= '0;
      p1_q           <= '0;
      p1_req_o       <= 1'b0;
      resp_valid_o   <= 1'b0;
      resp_addr_o    <= '0;
      resp_data_o    <= '0;
      resp_status_o  <= ECC_CLEAN;
      err_chip_o     <= '0;
      err_chip_vld_o <= 1'b0;
      n_detected_o   <= '0;
      n_corrected_o  <= '0;
      n_due_o        <= '0;
    end else begin
      p1_req_o       <= 1'b0;
      resp_valid_o   <= 1'b0;
      err_chip_vld_o <= 1'b0;
      unique case (state)
        S_IDLE: if (rd_valid_i) begin
          if (!detected) begin
            resp_valid_o  <= 1'b1;
            resp_addr_o   <= rd_addr_i;
            resp_data_o   <= rd_data_i;
            resp_status_o <= ECC_CLEAN;
          end else begin
            addr_q       <= rd_addr_i;
            data_q       <= rd_data_i;
            p0_q         <= rd_p0_i;
            p1_req_o     <= 1'b1;
            n_detected_o <= n_detected_o + 1;
            state        <= S_FETCH;
          end
        end
        S_FETCH: if (p1_valid_i) begin
          p1_q  <= p1_i;
          state <= S_CORRECT;
        end
        S_CORRECT: begin
          resp_valid_o   <= 1'b1;
          resp_addr_o    <= addr_q;
          resp_data_o    <= corr_data;
          resp_status_o  <= corr_status;
          err_chip_o     <= corr_chip;
          err_chip_vld_o <= corr_chip_vld;
          if (corr_status == ECC_DUE) n_due_o <= n_due_o + 1;
          else                        n_corrected_o <= n_corrected_o + 1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a read may only be presented while the controller is idle
  a_rd_when_ready: assert property (@(posedge clk) disable iff (!rst_n)
                                    rd_valid_i |-> rd_ready_o);

endmodule
