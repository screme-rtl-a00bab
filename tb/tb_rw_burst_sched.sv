// tb_rw_burst_sched: a small controller model around the scheduler. Writes are
// queued until the high watermark, drained in a burst spaced T_BURST cycles apart,
// reads are served between bursts, and a new write burst waits for a slow
// side that is still busy (stall counted).
// Interface: no ports; drives the unit under test directly, uses
// $urandom for stimulus, ends with one TB_RESULT line and $finish, and has a
// watchdog that counts a failure if the run hangs. Expected values come from own
// reference models, written from the behaviour the paper describes.
module tb_rw_burst_sched;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [5:0] wq;
  logic rd_pend, slow_pend, ecc_stall, wr_iss, rd_iss, wmode, sstall;
  logic [31:0] n_b, n_ov, n_sc, n_se;
  int checks = 0, failures = 0;
  int last_issue = -100, cyc = 0;

  rw_burst_sched dut (.clk, .rst_n, .wq_count_i(wq), .rd_pending_i(rd_pend),
    .slow_pending_i(slow_pend), .ecc_stall_i(ecc_stall), .wr_issue_o(wr_iss),
    .rd_issue_o(rd_iss), .write_mode_o(wmode), .slow_stall_o(sstall),
    .n_wr_bursts_o(n_b), .n_overlaps_o(n_ov), .n_stall_cycles_o(n_sc), .n_stall_events_o(n_se));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    if (rst_n && (wr_iss || rd_iss)) begin
      checks++;
      if (cyc - last_issue < 16) begin failures++; $display("spacing %0d", cyc - last_issue); end
      last_issue = cyc;
    end
  end

  initial begin
    int nw;
    wq = 0; rd_pend = 1; slow_pend = 0; ecc_stall = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // below the watermark with reads waiting: reads only
    wq = 10;
    repeat (100) begin
      @(negedge clk);
      checks++; if (wr_iss || wmode) failures++;
    end
    // watermark reached: a write burst drains down to LO_WM
    wq = 24; nw = 0;
    repeat (600) begin
      @(negedge clk);
      if (wr_iss) begin nw++; wq = wq - 1; slow_pend = 1; end
    end
    checks++; if (nw != 16 || wq != 8) begin failures++; $display("drained %0d", nw); end
    checks++; if (n_b != 1 || n_ov != 1) failures++;
    // new burst wanted while slow side busy: stall until it clears
    wq = 30;
    repeat (16) @(negedge clk);              // last read may still hold the bus
    repeat (50) begin
      @(negedge clk);
      checks++; if (wr_iss || !sstall) failures++;
    end
    slow_pend = 0;
    repeat (40) @(negedge clk);
    checks++; if (!wmode || n_b != 2 || n_se != 1 || n_sc < 50) begin failures++; $display("stall %0d %0d %0d", n_b, n_se, n_sc); end
    // an ECC stall blocks every command
    ecc_stall = 1;
    repeat (40) begin
      @(negedge clk);
      checks++; if (wr_iss || rd_iss) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
