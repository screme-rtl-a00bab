// screme_top: one DDR5 sub-channel with SCREME resilience support.
//
// The controller side keeps ChipKill protection (8 data + 2 check symbols per
// codeword) but treats the second check symbol p1 as write-only:
//   * writes enter the write queue; at the same time p1 of the line is computed
//     and put into the parity data buffer. The burst scheduler drains writes in
//     bursts; each data write (data + p0, 16 beats) goes to the regular chips and
//     releases its p1 to the slow parity writer, which stores it at the slow rate
//     (32 cycles per line) while the regular chips go on to a read burst. The next
//     write burst waits until the slow side is idle (slow-write stall).
//   * reads fetch data + p0 only. The decoupled ECC controller checks the first
//     check equation; on a failure it stalls the channel, fetches p1 (from the
//     parity buffer if still there, else from its storage) and runs full SSC
//     correction.
// The module side contains the reconfiguration logic: framework_cfg turns the
// mode and failure inputs into chip roles and I/O widths (chip_cfg_o, to the
// chips), the lane swap of SCREME-I/O (col), the spare switch; rank_reorg maps
// logical ranks onto surviving chip rows (SCREME-I/O row). The write-only
// storage reached through this block is one of:
//   - the slow ECC chip of column 9 (x4 at half rate, its I/O gating inside),
//   - the spare pool behind the switch array and the rate-matching data buffer
//     (x2 at full rate on the channel, x4 at half rate at the spare chip),
//   - a regular chip reconfigured to x2 (x2 at full rate on wire pair pair_*).
// DRAM arrays are outside: the regular chips are reached at line level through
// the dram_* port (one 64-bit lane per physical column, each chip row storing the
// half of every lane selected by dram_row_side_o), the slow chip and the spare
// pool through array-side ports slow_arr_* / spare_arr_*.
// Address map (own choice): bank = addr[4:0], logical rank = addr[6:5],
// row/column = addr[31:7]. One read is in flight at a time (own choice).
module screme_top
  import screme_pkg::*;
#(
  parameter int unsigned WQ_DEPTH = 32,
  parameter int unsigned SLOW_DIV = 2,
  parameter int unsigned HI_WM    = 24,
  parameter int unsigned LO_WM    = 8,
  parameter int unsigned T_BURST  = 16,
  parameter int unsigned BUF_LAT  = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration / failure state
  input  fw_mode_e          mode_i,
  input  logic              col_fail_en_i,
  input  logic [3:0]        failed_col_i,
  input  logic              failed_pair_i,
  input  logic [1:0]        failed_row_i,
  input  logic [N_ROWS-1:0] row_failed_i,
  output chip_cfg_t         chip_cfg_o [N_ROWS][N_COLS],
  output logic              spare_pool_en_o,
  output logic [1:0]        n_ranks_o,
  // host requests
  input  logic              req_valid_i,
  output logic              req_ready_o,
  input  logic              req_we_i,
  input  logic [ADDR_W-1:0] req_addr_i,
  input  logic [LINE_W-1:0] req_wdata_i,
  output logic              resp_valid_o,
  output logic [ADDR_W-1:0] resp_addr_o,
  output logic [LINE_W-1:0] resp_data_o,
  output ecc_status_e       resp_status_o,
  output logic              addr_err_o,
  // regular chips (line level)
  output logic              dram_cmd_valid_o,
  output logic              dram_cmd_we_o,
  output logic [N_ROWS-1:0] dram_row_en_o,
  output logic [4:0]        dram_row_bank_o [N_ROWS],
  output logic [N_ROWS-1:0] dram_row_side_o,
  output logic [ADDR_W-8:0] dram_row_addr_o,
  output logic [63:0]       dram_wdata_o [N_COLS],
  output logic [N_COLS-1:0] dram_col_wen_o,
  input  logic              dram_rvalid_i,
  input  logic [63:0]       dram_rdata_i [N_COLS],
  // slow ECC chip array
  output logic              slow_arr_we_o,
  output logic              slow_arr_re_o,
  output logic [ADDR_W-1:0] slow_arr_addr_o,
  output logic [63:0]       slow_arr_wdata_o,
  input  logic              slow_arr_rvalid_i,
  input  logic [63:0]       slow_arr_rdata_i,
  // spare-pool chip array
  output logic              spare_arr_we_o,
  output logic              spare_arr_re_o,
  output logic [ADDR_W-1:0] spare_arr_addr_o,
  output logic [63:0]       spare_arr_wdata_o,
  input  logic              spare_arr_rvalid_i,
  input  logic [63:0]       spare_arr_rdata_i,
  // x2 write-only parity on a regular chip's wire pair
  output logic              wo_cmd_valid_o,
  output logic              wo_cmd_we_o,
  output logic [ADDR_W-1:0] wo_cmd_addr_o,
  output logic [4:0]        wo_cmd_pair_o,
  output logic [1:0]        pair_dq_o [2*N_COLS],
  output logic [2*N_COLS-1:0] pair_valid_o,
  input  logic [1:0]        pair_rd_dq_i [2*N_COLS],
  input  logic [2*N_COLS-1:0] pair_rd_valid_i,
  // event counters
  output logic [31:0]       n_wr_bursts_o,
  output logic [31:0]       n_overlaps_o,
  output logic [31:0]       n_stall_cycles_o,
  output logic [31:0]       n_stall_events_o,
  output logic [31:0]       n_detected_o,
  output logic [31:0]       n_corrected_o,
  output logic [31:0]       n_due_o,
  output logic [31:0]       n_slow_writes_o,
  output logic [31:0]       n_p1_fetch_o,
  output logic [31:0]       n_p1_fwd_o,
  output logic [31:0]       n_wq_fwd_o
);

  localparam int unsigned NPAIRS = 2 * N_COLS;
  localparam int unsigned QW     = $clog2(WQ_DEPTH + 1);

  // ---------------------------------------------------------------- configuration
  logic       swap_en, sw_en, spare_en;
  logic [3:0] swap_col;
  logic [4:0] sw_pair;
  logic [1:0] p1_narrow, p1_spare;
  logic [4:0] p1_pair [2];

  framework_cfg u_cfg (
    .mode_i, .col_fail_en_i, .failed_col_i, .failed_pair_i, .failed_row_i,
    .chip_cfg_o, .swap_en_o(swap_en), .swap_col_o(swap_col),
    .spare_pool_en_o(spare_en), .sw_en_o(sw_en), .sw_pair_o(sw_pair),
    .p1_narrow_o(p1_narrow), .p1_pair_o(p1_pair), .p1_spare_o(p1_spare)
  );
  assign spare_pool_en_o = spare_en;

  // ---------------------------------------------------------------- write queue + parity buffer
  logic              wq_push, wq_pop, wq_full, wq_empty;
  logic [ADDR_W-1:0] wq_head_addr;
  logic [LINE_W-1:0] wq_head_data;
  logic [QW-1:0]     wq_count;
  logic              wq_fwd_hit;
  logic [LINE_W-1:0] wq_fwd_data;

  logic              pb_full, pb_empty, pb_pop;
  logic [ADDR_W-1:0] pb_head_addr, pb_lk_addr;
  logic [PAR_W-1:0]  pb_head_par, pb_lk_par;
  logic [QW-1:0]     pb_count, pb_issued;
  logic              pb_lk_hit;

  logic [PAR_W-1:0]  enc_p1, iss_p0;

  // one read held until answered
  logic              rd_held, rd_inflight;
  logic [ADDR_W-1:0] rd_addr;

  logic              wr_issue, rd_issue, ecc_stall, wr_mode, slow_stall;
  logic              accept;

  assign req_ready_o = req_we_i ? (!wq_full && !pb_full) : !rd_held;
  assign accept      = req_valid_i && req_ready_o;
  assign wq_push     = accept && req_we_i;
  assign wq_pop      = wr_issue;

  ssc_encoder u_enc_wr (.data_i(req_wdata_i), .p0_o(), .p1_o(enc_p1));

  write_queue #(.DEPTH(WQ_DEPTH)) u_wq (
    .clk, .rst_n,
    .push_i(wq_push), .push_addr_i(req_addr_i), .push_data_i(req_wdata_i),
    .pop_i(wq_pop), .head_addr_o(wq_head_addr), .head_data_o(wq_head_data),
    .full_o(wq_full), .empty_o(wq_empty), .count_o(wq_count),
    .fwd_addr_i(req_addr_i), .fwd_hit_o(wq_fwd_hit), .fwd_data_o(wq_fwd_data)
  );

  parity_buffer #(.DEPTH(WQ_DEPTH)) u_pb (
    .clk, .rst_n,
    .push_i(wq_push), .push_addr_i(req_addr_i), .push_par_i(enc_p1),
    .mark_issued_i(wr_issue), .pop_i(pb_pop),
    .head_addr_o(pb_head_addr), .head_par_o(pb_head_par),
    .full_o(pb_full), .empty_o(pb_empty), .count_o(pb_count), .issued_cnt_o(pb_issued),
    .lookup_addr_i(pb_lk_addr), .lookup_hit_o(pb_lk_hit), .lookup_par_o(pb_lk_par)
  );

  // ---------------------------------------------------------------- scheduler
  logic slow_busy;
  rw_burst_sched #(.QW(QW), .HI_WM(HI_WM), .LO_WM(LO_WM), .T_BURST(T_BURST)) u_sched (
    .clk, .rst_n,
    .wq_count_i(wq_count), .rd_pending_i(rd_held && !rd_inflight),
    .slow_pending_i(pb_issued != '0 || slow_busy), .ecc_stall_i(ecc_stall),
    .wr_issue_o(wr_issue), .rd_issue_o(rd_issue), .write_mode_o(wr_mode),
    .slow_stall_o(slow_stall),
    .n_wr_bursts_o, .n_overlaps_o, .n_stall_cycles_o, .n_stall_events_o
  );

  // ---------------------------------------------------------------- rank mapping
  logic [ADDR_W-1:0] cmd_addr;
  logic [1:0]        nr;
  logic [5:0]        bpr;
  logic              map_valid;
  logic [N_ROWS-1:0] row_en;

  assign cmd_addr = wr_issue ? wq_head_addr : rd_addr;

  rank_reorg u_rank (
    .row_failed_i, .log_rank_i(cmd_addr[6:5]), .log_bank_i(cmd_addr[4:0]),
    .n_ranks_o(nr), .banks_per_rank_o(bpr), .valid_o(map_valid),
    .row_en_o(row_en), .row_bank_o(dram_row_bank_o), .row_side_o(dram_row_side_o)
  );
  assign n_ranks_o       = nr;
  assign dram_row_en_o   = row_en;
  assign dram_row_addr_o = cmd_addr[ADDR_W-1:7];
  assign dram_cmd_valid_o = wr_issue || rd_issue;
  assign dram_cmd_we_o    = wr_issue;

  // ---------------------------------------------------------------- lanes
  ssc_encoder u_enc_iss (.data_i(wq_head_data), .p0_o(iss_p0), .p1_o());

  logic [63:0]       log_wr [N_COLS];
  logic [63:0]       log_rd [N_COLS];
  logic [N_COLS-1:0] wo_col, narrow_col;

  always_comb begin
    for (int c = 0; c < N_DSYM; c++)
      for (int k = 0; k < N_CW; k++)
        log_wr[c][k*SYM_W +: SYM_W] = wq_head_data[(k*N_DSYM + c)*SYM_W +: SYM_W];
    log_wr[N_DSYM]     = iss_p0;
    log_wr[N_COLS-1]   = '0;           // p1 travels on the write-only path
  end

  lane_mapper #(.LANE_W(64)) u_lanes (
    .swap_en_i(swap_en), .failed_col_i(swap_col),
    .log_wr_i(log_wr), .phys_wr_o(dram_wdata_o),
    .phys_rd_i(dram_rdata_i), .log_rd_o(log_rd),
    .wo_col_o(wo_col), .narrow_col_o(narrow_col)
  );
  assign dram_col_wen_o = ~wo_col;

  logic [LINE_W-1:0] rd_line;
  always_comb begin
    for (int c = 0; c < N_DSYM; c++)
      for (int k = 0; k < N_CW; k++)
        rd_line[(k*N_DSYM + c)*SYM_W +: SYM_W] = log_rd[c][k*SYM_W +: SYM_W];
  end

  // ---------------------------------------------------------------- decoupled ECC
  logic              ecc_rd_ready, p1_req, p1_valid;
  logic [ADDR_W-1:0] p1_addr, ecc_resp_addr;
  logic [PAR_W-1:0]  p1_data;
  logic              ecc_resp_valid;
  logic [LINE_W-1:0] ecc_resp_data;
  ecc_status_e       ecc_resp_status;

  decoupled_ecc_ctrl u_ecc (
    .clk, .rst_n,
    .rd_valid_i(dram_rvalid_i && rd_inflight), .rd_ready_o(ecc_rd_ready),
    .rd_addr_i(rd_addr), .rd_data_i(rd_line), .rd_p0_i(log_rd[N_DSYM]),
    .p1_req_o(p1_req), .p1_addr_o(p1_addr), .p1_valid_i(p1_valid), .p1_i(p1_data),
    .stall_o(ecc_stall),
    .resp_valid_o(ecc_resp_valid), .resp_addr_o(ecc_resp_addr), .resp_data_o(ecc_resp_data),
    .resp_status_o(ecc_resp_status), .err_chip_o(), .err_chip_vld_o(),
    .n_detected_o, .n_corrected_o, .n_due_o
  );

  // read bookkeeping and responses (write-queue hits are answered directly)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_held       <= 1'b0;
      rd_inflight   <= 1'b0;
      rd_addr       <= '0;
      resp_valid_o  <= 1'b0;
      resp_addr_o   <= '0;
      resp_data_o   <= '0;
      resp_status_o <= ECC_CLEAN;
      n_wq_fwd_o    <= '0;
      addr_err_o    <= 1'b0;
    end else begin
      resp_valid_o <= 1'b0;
      addr_err_o   <= 1'b0;
      if (accept && !req_we_i) begin
        if (wq_fwd_hit) begin
          resp_valid_o  <= 1'b1;
          resp_addr_o   <= req_addr_i;
          resp_data_o   <= wq_fwd_data;
          resp_status_o <= ECC_CLEAN;
          n_wq_fwd_o    <= n_wq_fwd_o + 1;
        end else begin
          rd_held <= 1'b1;
          rd_addr <= req_addr_i;
        end
      end
      if (dram_cmd_valid_o && !map_valid) addr_err_o <= 1'b1;
      if (rd_issue) rd_inflight <= 1'b1;
      if (ecc_resp_valid) begin
        rd_held       <= 1'b0;
        rd_inflight   <= 1'b0;            // held until answered: no second issue
        resp_valid_o  <= 1'b1;
        resp_addr_o   <= ecc_resp_addr;
        resp_data_o   <= ecc_resp_data;
        resp_status_o <= ecc_resp_status;
      end
    end
  end

  // ---------------------------------------------------------------- slow parity path
  logic              wr_narrow, rd_narrow, slow_tick;
  logic              sp_cmd_valid, sp_cmd_we, sp_cmd_narrow;
  logic [ADDR_W-1:0] sp_cmd_addr;
  logic [3:0]        sp_dq, sp_rdq;
  logic              sp_dq_valid, sp_rdq_valid;

  assign wr_narrow = p1_narrow[pb_head_addr[5]];
  assign rd_narrow = p1_narrow[pb_lk_addr[5]];

  slow_parity_writer #(.SLOW_DIV(SLOW_DIV)) u_spw (
    .clk, .rst_n,
    .pb_avail_i(pb_issued != '0), .pb_addr_i(pb_head_addr), .pb_par_i(pb_head_par),
    .pb_pop_o(pb_pop), .lk_addr_o(pb_lk_addr), .lk_hit_i(pb_lk_hit), .lk_par_i(pb_lk_par),
    .wr_narrow_i(wr_narrow), .rd_narrow_i(rd_narrow),
    .p1_req_i(p1_req), .p1_addr_i(p1_addr), .p1_valid_o(p1_valid), .p1_o(p1_data),
    .slow_tick_o(slow_tick), .cmd_valid_o(sp_cmd_valid), .cmd_we_o(sp_cmd_we),
    .cmd_narrow_o(sp_cmd_narrow), .cmd_addr_o(sp_cmd_addr),
    .dq_o(sp_dq), .dq_valid_o(sp_dq_valid), .rdq_i(sp_rdq), .rdq_valid_i(sp_rdq_valid),
    .busy_o(slow_busy), .n_writes_o(n_slow_writes_o), .n_fetch_o(n_p1_fetch_o),
    .n_fwd_o(n_p1_fwd_o)
  );

  // target of the transfer in progress
  logic              cur_narrow, cur_spare;
  logic [4:0]        cur_pair;
  logic [ADDR_W-1:0] cur_addr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_narrow <= 1'b0;
      cur_spare  <= 1'b0;
      cur_pair   <= '0;
      cur_addr   <= '0;
    end else if (sp_cmd_valid) begin
      cur_narrow <= sp_cmd_narrow;
      cur_spare  <= sp_cmd_narrow && p1_spare[sp_cmd_addr[5]];
      cur_pair   <= p1_pair[sp_cmd_addr[5]];
      cur_addr   <= sp_cmd_addr;
    end
  end
  logic [4:0] cmd_pair;
  assign cmd_pair = p1_pair[sp_cmd_addr[5]];
  // routing of the current beat: the command cycle already carries the first
  // narrow beat, so it uses the new command's target
  logic       rt_narrow;
  logic [4:0] rt_pair;
  assign rt_narrow = sp_cmd_valid ? sp_cmd_narrow : cur_narrow;
  assign rt_pair   = sp_cmd_valid ? cmd_pair      : cur_pair;

  // --- wide target: slow ECC chip of column 9
  logic [7:0]  slow_dq_o, slow_dq_oe;
  logic        slow_we_int, slow_tick_q;
  logic [127:0] slow_word;

  io_gating_unit u_slow_io (
    .clk, .rst_n, .cfg_mode_i(IO_X4), .cfg_group_i(2'd0), .beat_en_i(slow_tick),
    .dq_valid_i(sp_dq_valid && !rt_narrow), .dq_i({4'b0, sp_dq}),
    .dq_o(slow_dq_o), .dq_oe_o(slow_dq_oe),
    .arr_we_o(slow_we_int), .arr_wdata_o(slow_word),
    .rd_load_i(slow_arr_rvalid_i), .rd_word_i({64'b0, slow_arr_rdata_i}),
    .rd_busy_o(), .pin_en_o()
  );
  assign slow_arr_we_o    = slow_we_int;
  assign slow_arr_wdata_o = slow_word[63:0];
  assign slow_arr_re_o    = sp_cmd_valid && !sp_cmd_we && !sp_cmd_narrow;
  assign slow_arr_addr_o  = slow_arr_re_o ? sp_cmd_addr : cur_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) slow_tick_q <= 1'b0;
    else        slow_tick_q <= slow_tick;
  end

  // --- narrow targets: wire pairs, through the spare switch array
  logic [1:0]        host_pair_dq [NPAIRS];
  logic [NPAIRS-1:0] host_pair_valid;
  logic [1:0]        host_rd_dq [NPAIRS];
  logic [NPAIRS-1:0] host_rd_valid;
  logic [1:0]        spare_dq, spare_rd_dq;
  logic              spare_valid, spare_rd_valid;

  always_comb begin
    for (int i = 0; i < NPAIRS; i++) begin
      host_pair_dq[i]    = (5'(i) == rt_pair) ? sp_dq[1:0] : 2'b00;
      host_pair_valid[i] = (5'(i) == rt_pair) && rt_narrow && sp_dq_valid;
    end
  end

  spare_switch_array #(.NPAIRS(NPAIRS)) u_sw (
    .sw_en_i(sw_en), .sw_pair_i(sw_pair),
    .pair_dq_i(host_pair_dq), .pair_valid_i(host_pair_valid),
    .host_rd_dq_o(host_rd_dq), .host_rd_valid_o(host_rd_valid),
    .chip_dq_o(pair_dq_o), .chip_valid_o(pair_valid_o),
    .chip_rd_dq_i(pair_rd_dq_i), .chip_rd_valid_i(pair_rd_valid_i),
    .spare_dq_o(spare_dq), .spare_valid_o(spare_valid),
    .spare_rd_dq_i(spare_rd_dq), .spare_rd_valid_i(spare_rd_valid)
  );

  // commands for x2 parity on a regular chip
  assign wo_cmd_valid_o = sp_cmd_valid && sp_cmd_narrow && !p1_spare[sp_cmd_addr[5]];
  assign wo_cmd_we_o    = sp_cmd_we;
  assign wo_cmd_addr_o  = sp_cmd_addr;
  assign wo_cmd_pair_o  = cmd_pair;

  // --- spare pool: data buffer and the spare chip's I/O gating
  logic        spare_beat, spare_chip_valid, spare_beat_q;
  logic [3:0]  spare_chip_dq;
  logic [7:0]  spare_io_dq, spare_io_oe;
  logic        spare_we_int;
  logic [127:0] spare_word;

  rate_data_buffer #(.HOST_W(2), .CHIP_W(4), .RATE_DIV(2), .LAT(BUF_LAT)) u_dbuf (
    .clk, .rst_n,
    .host_valid_i(spare_valid), .host_dq_i(spare_dq),
    .host_rd_valid_o(spare_rd_valid), .host_rd_dq_o(spare_rd_dq),
    .chip_beat_o(spare_beat), .chip_dq_valid_o(spare_chip_valid), .chip_dq_o(spare_chip_dq),
    .chip_rd_valid_i(spare_beat_q && spare_io_oe[0]), .chip_rd_dq_i(spare_io_dq[3:0])
  );

  io_gating_unit u_spare_io (
    .clk, .rst_n, .cfg_mode_i(spare_en ? IO_X4 : IO_OFF), .cfg_group_i(2'd0),
    .beat_en_i(spare_beat),
    .dq_valid_i(spare_chip_valid), .dq_i({4'b0, spare_chip_dq}),
    .dq_o(spare_io_dq), .dq_oe_o(spare_io_oe),
    .arr_we_o(spare_we_int), .arr_wdata_o(spare_word),
    .rd_load_i(spare_arr_rvalid_i), .rd_word_i({64'b0, spare_arr_rdata_i}),
    .rd_busy_o(), .pin_en_o()
  );

  // the spare array address is taken when the transfer starts
  logic [ADDR_W-1:0] spare_addr_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      spare_beat_q <= 1'b0;
      spare_addr_q <= '0;
    end else begin
      spare_beat_q <= spare_beat;
      if (sp_cmd_valid && sp_cmd_narrow && p1_spare[sp_cmd_addr[5]]) spare_addr_q <= sp_cmd_addr;
    end
  end
  assign spare_arr_we_o    = spare_we_int;
  assign spare_arr_wdata_o = spare_word[63:0];
  assign spare_arr_re_o    = sp_cmd_valid && !sp_cmd_we && sp_cmd_narrow && p1_spare[sp_cmd_addr[5]];
  assign spare_arr_addr_o  = spare_arr_re_o ? sp_cmd_addr : spare_addr_q;

  // read-back into the slow parity writer
  always_comb begin
    if (cur_narrow) begin
      sp_rdq       = {2'b00, host_rd_dq[cur_pair]};
      sp_rdq_valid = host_rd_valid[cur_pair];
    end else begin
      sp_rdq       = slow_dq_o[3:0];
      sp_rdq_valid = slow_tick_q && slow_dq_oe[0];
    end
  end

endmodule
