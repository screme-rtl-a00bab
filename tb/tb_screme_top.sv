// tb_screme_top: end-to-end test of the SCREME sub-channel at its default
// (paper) sizes, no parameter overrides.
//
// Around the design sit behavioural models of
//   - the regular DRAM chips: 4 rows x 10 columns, each row storing the half of
//     every 64-bit lane chosen by its pin half; columns whose write is disabled
//     return random garbage; any chip can be made faulty (its half-lane is XORed
//     with a random nonzero pattern on every read);
//   - the slow write-only chip array, the spare-pool chip array and the x2
//     write-only storage on a regular chip's wire pair, each keyed by line.
// A host driver issues bursts of writes and blocking reads against a reference
// memory and checks every response. Five phases, each on fresh addresses and
// separated by an idle drain:
//   1 normal module, a faulty data chip          -> decoupled detect + correct,
//     p1 fetched from the slow chip or forwarded from the parity buffer,
//     write-queue forwarding, slow-write overlap and stall
//   2 two faulty chips in one row                -> DUE (status from a reference
//                                                   decoder), p0-only detection
//   3 SCREME-I/O (col): wire pair of column 2 dead -> lane swap, x2 narrow p1
//   4 SCREME-Framewk chip replacement            -> spare pool path (switch,
//                                                   data buffer, slow spare chip)
//   5 SCREME-I/O (row): row 0 control wire dead   -> three ranks of 16 banks
// Every mechanism is counted; one that never happened counts as a failure.
// Timing: host requests are offered one per cycle with a ready handshake; reads
// block until their response. The chip models are own choices; the paper does
// not describe a test setup. $urandom drives data, addresses and faults, and a
// watchdog counts a failure if the run hangs.
module tb_screme_top;
  import screme_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // ------------------------------------------------------------------ DUT
  fw_mode_e    mode;
  logic        col_fail_en, failed_pair;
  logic [3:0]  failed_col;
  logic [1:0]  failed_row;
  logic [3:0]  row_failed;
  chip_cfg_t   chip_cfg [N_ROWS][N_COLS];
  logic        spare_pool_en;
  logic [1:0]  n_ranks;
  logic        req_valid, req_ready, req_we;
  logic [31:0] req_addr;
  logic [511:0] req_wdata;
  logic        resp_valid;
  logic [31:0] resp_addr;
  logic [511:0] resp_data;
  ecc_status_e resp_status;
  logic        addr_err;
  logic        dcmd_valid, dcmd_we, drvalid;
  logic [3:0]  drow_en, drow_side;
  logic [4:0]  drow_bank [N_ROWS];
  logic [24:0] drow_addr;
  logic [63:0] dwdata [N_COLS], drdata [N_COLS];
  logic [9:0]  dcol_wen;
  logic        s_we, s_re, s_rvalid, p_we, p_re, p_rvalid;
  logic [31:0] s_addr, p_addr;
  logic [63:0] s_wdata, s_rdata, p_wdata, p_rdata;
  logic        wo_valid, wo_we;
  logic [31:0] wo_addr;
  logic [4:0]  wo_pair;
  logic [1:0]  pdq [20], prdq [20];
  logic [19:0] pvalid, prvalid;
  logic [31:0] n_wr_bursts, n_overlaps, n_stall_cycles, n_stall_events, n_detected,
               n_corrected, n_due, n_slow_writes, n_p1_fetch, n_p1_fwd, n_wq_fwd;

  screme_top dut (
    .clk, .rst_n,
    .mode_i(mode), .col_fail_en_i(col_fail_en), .failed_col_i(failed_col),
    .failed_pair_i(failed_pair), .failed_row_i(failed_row), .row_failed_i(row_failed),
    .chip_cfg_o(chip_cfg), .spare_pool_en_o(spare_pool_en), .n_ranks_o(n_ranks),
    .req_valid_i(req_valid), .req_ready_o(req_ready), .req_we_i(req_we),
    .req_addr_i(req_addr), .req_wdata_i(req_wdata),
    .resp_valid_o(resp_valid), .resp_addr_o(resp_addr), .resp_data_o(resp_data),
    .resp_status_o(resp_status), .addr_err_o(addr_err),
    .dram_cmd_valid_o(dcmd_valid), .dram_cmd_we_o(dcmd_we), .dram_row_en_o(drow_en),
    .dram_row_bank_o(drow_bank), .dram_row_side_o(drow_side), .dram_row_addr_o(drow_addr),
    .dram_wdata_o(dwdata), .dram_col_wen_o(dcol_wen), .dram_rvalid_i(drvalid),
    .dram_rdata_i(drdata),
    .slow_arr_we_o(s_we), .slow_arr_re_o(s_re), .slow_arr_addr_o(s_addr),
    .slow_arr_wdata_o(s_wdata), .slow_arr_rvalid_i(s_rvalid), .slow_arr_rdata_i(s_rdata),
    .spare_arr_we_o(p_we), .spare_arr_re_o(p_re), .spare_arr_addr_o(p_addr),
    .spare_arr_wdata_o(p_wdata), .spare_arr_rvalid_i(p_rvalid), .spare_arr_rdata_i(p_rdata),
    .wo_cmd_valid_o(wo_valid), .wo_cmd_we_o(wo_we), .wo_cmd_addr_o(wo_addr),
    .wo_cmd_pair_o(wo_pair), .pair_dq_o(pdq), .pair_valid_o(pvalid),
    .pair_rd_dq_i(prdq), .pair_rd_valid_i(prvalid),
    .n_wr_bursts_o(n_wr_bursts), .n_overlaps_o(n_overlaps), .n_stall_cycles_o(n_stall_cycles),
    .n_stall_events_o(n_stall_events), .n_detected_o(n_detected), .n_corrected_o(n_corrected),
    .n_due_o(n_due), .n_slow_writes_o(n_slow_writes), .n_p1_fetch_o(n_p1_fetch),
    .n_p1_fwd_o(n_p1_fwd), .n_wq_fwd_o(n_wq_fwd)
  );

  int checks = 0, failures = 0;
  int phase = 0;

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog: phase %0d", phase);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------ regular chips
  logic [31:0] dmem [logic [35:0]];
  bit          faulty [4][10];
  logic [31:0] fmask  [4][10];
  logic [63:0] rd_buf [N_COLS];
  int          rd_delay = -1;
  int          n_swap_cols_off = 0;

  function automatic logic [35:0] dkey(input int r, input int c, input logic [4:0] b, input logic [24:0] a);
    return {2'(r), 4'(c), b, a};
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (dcmd_valid) begin
      for (int r = 0; r < 4; r++) if (drow_en[r]) begin
        checks++; if (row_failed[r]) begin failures++; $display("failed row %0d selected", r); end
      end
      if (dcmd_we) begin
        for (int r = 0; r < 4; r++) if (drow_en[r])
          for (int c = 0; c < 10; c++) if (dcol_wen[c])
            dmem[dkey(r, c, drow_bank[r], drow_addr)] = drow_side[r] ? dwdata[c][63:32] : dwdata[c][31:0];
      end else begin
        for (int c = 0; c < 10; c++) begin
          rd_buf[c] = {$urandom, $urandom};
          if (dcol_wen[c]) for (int r = 0; r < 4; r++) if (drow_en[r]) begin
            logic [35:0] k;
            logic [31:0] h;
            k = dkey(r, c, drow_bank[r], drow_addr);
            h = dmem.exists(k) ? dmem[k] : $urandom;
            if (faulty[r][c]) h ^= fmask[r][c];
            if (drow_side[r]) rd_buf[c][63:32] = h; else rd_buf[c][31:0] = h;
          end
        end
        rd_delay = 6 + $urandom_range(0, 10);
      end
    end
  end
  always @(negedge clk) begin
    drvalid = 0;
    if (rd_delay == 0) begin drvalid = 1; drdata = rd_buf; end
    if (rd_delay >= 0) rd_delay--;
  end

  // ------------------------------------------------------------------ slow chip and spare pool arrays
  logic [63:0] smem [logic [31:0]];
  logic [63:0] pmem [logic [31:0]];
  int s_delay = -1, p_delay = -1;
  logic [31:0] s_raddr, p_raddr;
  int n_slow_arr_wr = 0, n_spare_wr = 0, n_spare_rd = 0;
  always @(posedge clk) if (rst_n) begin
    if (s_we) begin smem[s_addr] = s_wdata; n_slow_arr_wr++; end
    if (s_re) begin s_raddr = s_addr; s_delay = 4; end
    if (p_we) begin
      pmem[p_addr] = p_wdata; n_spare_wr++;
      checks++; if (!spare_pool_en) failures++;
    end
    if (p_re) begin p_raddr = p_addr; p_delay = 4; n_spare_rd++; end
  end
  always @(negedge clk) begin
    s_rvalid = 0; p_rvalid = 0;
    if (s_delay == 0) begin s_rvalid = 1; s_rdata = smem.exists(s_raddr) ? smem[s_raddr] : {$urandom, $urandom}; end
    if (p_delay == 0) begin p_rvalid = 1; p_rdata = pmem.exists(p_raddr) ? pmem[p_raddr] : {$urandom, $urandom}; end
    if (s_delay >= 0) s_delay--;
    if (p_delay >= 0) p_delay--;
  end

  // ------------------------------------------------------------------ x2 parity on a wire pair
  logic [63:0] xmem [logic [31:0]];
  bit          xw_act = 0;
  int          xw_bits = 0, x_delay = -1, x_left = 0;
  logic [4:0]  xw_pair, xr_pair;
  logic [31:0] xw_addr;
  logic [63:0] xw_sh, xr_word;
  int n_narrow_wr = 0, n_narrow_rd = 0;
  always @(posedge clk) if (rst_n) begin
    if (wo_valid && wo_we) begin xw_act = 1; xw_bits = 0; xw_pair = wo_pair; xw_addr = wo_addr; end
    for (int i = 0; i < 20; i++) if (pvalid[i] && !(xw_act && 5'(i) == xw_pair)) begin
      checks++; failures++; $display("stray traffic on pair %0d", i);
    end
    if (xw_act && pvalid[xw_pair]) begin
      xw_sh = {pdq[xw_pair], xw_sh[63:2]}; xw_bits += 2;
      if (xw_bits == 64) begin xmem[xw_addr] = xw_sh; xw_act = 0; n_narrow_wr++; end
    end
    if (wo_valid && !wo_we) begin
      xr_pair = wo_pair; xr_word = xmem.exists(wo_addr) ? xmem[wo_addr] : {$urandom, $urandom};
      x_delay = 5; n_narrow_rd++;
    end
  end
  always @(negedge clk) begin
    foreach (prdq[i]) prdq[i] = 2'($urandom);
    prvalid = '0;
    if (x_delay == 0) x_left = 32;
    if (x_delay >= 0) x_delay--;
    if (x_left > 0) begin
      prvalid[xr_pair] = 1; prdq[xr_pair] = xr_word[1:0];
      xr_word = xr_word >> 2; x_left--;
    end
  end

  // ------------------------------------------------------------------ host driver
  logic [511:0] ref_mem [logic [31:0]];
  logic [31:0]  written [$];
  int n_ok_corr = 0, n_ok_due = 0, n_swap_ok = 0, n_reorg_ok = 0, n_reads = 0, n_wq_hits_seen = 0;

  task automatic send(input bit we, input logic [31:0] a, input logic [511:0] d);
    bit rdy;
    @(negedge clk);
    req_valid = 1; req_we = we; req_addr = a; req_wdata = d;
    forever begin
      #1 rdy = req_ready;                 // value seen by the coming clock edge
      @(posedge clk);
      if (rdy) break;
      @(negedge clk);
    end
    @(negedge clk);
    req_valid = 0;
  endtask

  // expected response for the two-fault phase: p0-only detection, then full decode
  function automatic int expect_status(input logic [511:0] line, output logic [511:0] exp_line);
    logic [63:0] q0, q1, rq0, rq1;
    logic [511:0] seen, fx;
    int r;
    ref_encode(line, q0, q1);
    seen = line;
    // row 0 holds the upper half of every lane (symbols of codewords 4-7)
    for (int c = 0; c < 10; c++) if (faulty[0][c] && c < 8)
      for (int k = 4; k < 8; k++) seen[(k*8 + c)*8 +: 8] ^= fmask[0][c][(k-4)*8 +: 8];
    rq0 = q0;
    if (faulty[0][8]) for (int k = 4; k < 8; k++) rq0[k*8 +: 8] ^= fmask[0][8][(k-4)*8 +: 8];
    begin
      logic [511:0] dummy;
      logic [63:0] p0c, p1c;
      ref_encode(seen, p0c, p1c);
      if (p0c == rq0) begin exp_line = seen; return 0; end
    end
    r = ref_decode(seen, rq0, q1, fx);
    exp_line = fx;
    return r;
  endfunction

  task automatic do_read(input logic [31:0] a, input bit two_fault);
    logic [511:0] exp, exp2;
    int es;
    bit fwd;
    exp = ref_mem.exists(a) ? ref_mem[a] : '0;
    fwd = 0;
    send(0, a, '0);
    while (!resp_valid) @(posedge clk);
    n_reads++;
    checks++;
    if (resp_addr !== a) begin failures++; $display("resp addr %h exp %h", resp_addr, a); end
    if (two_fault && a[6:5] == 2'd0) begin
      es = expect_status(exp, exp2);
      checks++;
      if (es == 2) begin
        if (resp_status !== ECC_DUE) begin failures++; $display("expected DUE, got %0d", resp_status); end
        else n_ok_due++;
      end else if (es == 0) begin
        if (resp_status !== ECC_CLEAN || resp_data !== exp2) failures++;
      end else begin
        if (resp_status !== ECC_CORRECTED || resp_data !== exp2) failures++;
      end
    end else begin
      checks++;
      if (resp_status == ECC_DUE || resp_data !== exp) begin
        failures++; $display("phase %0d read %h status %0d data mismatch %0d", phase, a, resp_status, resp_data !== exp);
      end else begin
        if (resp_status == ECC_CORRECTED) n_ok_corr++;
        if (phase == 3 || phase == 4) n_swap_ok++;
        if (phase == 5) n_reorg_ok++;
      end
    end
    @(negedge clk);
  endtask

  function automatic logic [31:0] mk_addr(input int ph, input int i);
    logic [31:0] a;
    a = $urandom;
    a[31:28] = 4'(ph);
    a[27:20] = 8'(i);
    if (ph == 5) begin
      a[6:5] = 2'($urandom_range(0, 2));   // three ranks of 16 banks
      a[4]   = 1'b0;
    end else begin
      a[6]   = 1'b0;                       // two ranks
    end
    return a;
  endfunction

  task automatic traffic(input int ph, input int nlines, input int rounds, input bit two_fault);
    logic [31:0] addrs [$];
    for (int i = 0; i < nlines; i++) addrs.push_back(mk_addr(ph, i));
    for (int rd = 0; rd < rounds; rd++) begin
      int nw;
      nw = $urandom_range(8, 30);
      for (int w = 0; w < nw; w++) begin
        logic [31:0] a;
        logic [511:0] d;
        a = addrs[$urandom_range(0, nlines - 1)];
        d = rand_line();
        send(1, a, d);
        ref_mem[a] = d;
      end
      // a read of a line just written (still queued) and a few older lines
      begin
        logic [31:0] a;
        a = addrs[$urandom_range(0, nlines - 1)];
        if (ref_mem.exists(a)) do_read(a, two_fault);
      end
      for (int r = 0; r < 6; r++) begin
        logic [31:0] a;
        a = addrs[$urandom_range(0, nlines - 1)];
        if (ref_mem.exists(a)) do_read(a, two_fault);
      end
      repeat ($urandom_range(0, 200)) @(negedge clk);
    end
  endtask

  task automatic drain();
    repeat (3000) @(negedge clk);
  endtask

  task automatic mech(input string name, input int n);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never exercised: %s", name); end
    else $display("mechanism %-22s %0d", name, n);
  endtask

  initial begin
    mode = FW_NORMAL; col_fail_en = 0; failed_col = 0; failed_pair = 0; failed_row = 0;
    row_failed = 0;
    req_valid = 0; req_we = 0; req_addr = 0; req_wdata = 0;
    foreach (faulty[r, c]) begin faulty[r][c] = 0; fmask[r][c] = '0; end
    foreach (drdata[c]) drdata[c] = '0;
    drvalid = 0; s_rvalid = 0; p_rvalid = 0; s_rdata = 0; p_rdata = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;

    // 1: normal module; a faulty data chip in row 1 (rank 0, lower lane half)
    phase = 1;
    traffic(1, 48, 10, 0);
    faulty[1][3] = 1; fmask[1][3] = {8'h11, 8'h5C, 8'hA3, 8'h07};
    traffic(1, 48, 25, 0);
    drain();

    // 2: two faulty chips in row 0, read back lines of phase 1
    phase = 2;
    faulty[1][3] = 0;
    faulty[0][0] = 1; fmask[0][0] = $urandom | 32'h01010101;
    faulty[0][5] = 1; fmask[0][5] = $urandom | 32'h01010101;
    foreach (ref_mem[a]) if (a[31:28] == 4'd1) do_read(a, 1);
    faulty[0][0] = 0; faulty[0][5] = 0;
    drain();

    // 3: SCREME-I/O (col): one wire pair of column 2 dead; a chip of column 6 faulty
    phase = 3;
    col_fail_en = 1; failed_col = 4'd2; failed_pair = 1'b1;
    @(negedge clk);
    checks++; if (dcol_wen[2] !== 1'b0 || dcol_wen[9] !== 1'b1) failures++;
    faulty[2][2] = 1; fmask[2][2] = 32'hFFFFFFFF;      // the failed column returns junk
    traffic(3, 40, 10, 0);
    faulty[3][6] = 1; fmask[3][6] = 32'h3C3C3C3C;
    traffic(3, 40, 15, 0);
    faulty[3][6] = 0; faulty[2][2] = 0;
    drain();
    col_fail_en = 0;

    // 4: chip replacement: chip (row 0, column 4) failed; spare pool takes p1 of rank 0
    phase = 4;
    mode = FW_CHIP_REPLACE; failed_col = 4'd4; failed_row = 2'd0;
    @(negedge clk);
    checks++; if (!spare_pool_en || chip_cfg[0][4].role != ROLE_OFF) failures++;
    faulty[0][4] = 1; fmask[0][4] = 32'hDEADBEEF;
    traffic(4, 40, 10, 0);
    faulty[1][7] = 1; fmask[1][7] = 32'h0F1E2D3C;
    traffic(4, 40, 15, 0);
    faulty[1][7] = 0; faulty[0][4] = 0;
    drain();
    mode = FW_NORMAL;

    // 5: SCREME-I/O (row): control wire of row 0 dead -> 3 ranks
    phase = 5;
    row_failed = 4'b0001;
    @(negedge clk);
    checks++; if (n_ranks !== 2'd3) failures++;
    faulty[0][0] = 1; fmask[0][0] = 32'hFFFFFFFF;
    traffic(5, 40, 8, 0);
    faulty[2][1] = 1; fmask[2][1] = 32'h12345678;
    traffic(5, 40, 12, 0);
    drain();

    $display("reads %0d, slow writes %0d, write bursts %0d", n_reads, n_slow_writes, n_wr_bursts);
    mech("slow-write stall", int'(n_stall_events));
    mech("slow-write overlap", int'(n_overlaps));
    mech("detect+correct", n_ok_corr);
    mech("DUE", n_ok_due);
    mech("p1 fetch", int'(n_p1_fetch));
    mech("p1 forward", int'(n_p1_fwd));
    mech("slow chip writes", n_slow_arr_wr);
    mech("spare path write", n_spare_wr);
    mech("spare path read", n_spare_rd);
    mech("narrow path write", n_narrow_wr);
    mech("narrow path read", n_narrow_rd);
    mech("lane swap reads", n_swap_ok);
    mech("rank reorg reads", n_reorg_ok);
    mech("WQ forwarding", int'(n_wq_fwd));
    checks++; if (n_detected != n_corrected + n_due) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && addr_err) begin checks++; failures++; $display("address outside the rank map"); end
endmodule
