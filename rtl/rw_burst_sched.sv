// rw_burst_sched: read/write burst policy of the memory controller, extended for
// write-only slow ECC chips.
//
// Writes are drained in bursts to limit bus turnarounds. A write burst starts
// when the write queue reaches HI_WM entries, or when no read is waiting and the
// queue is not empty; it ends when the queue is empty, or has fallen to LO_WM
// while reads wait. Every issued command holds the data bus for T_BURST cycles
// (16 beats of a 64B line, one beat per cycle).
// The slow chip starts its parity writes together with the regular write burst
// (time 0) but finishes later (t1'). The regular chips switch to reads at t1 and
// the slow writes overlap with that read burst. Before the next write burst
// (t2) the scheduler waits until the slow side has no pending work
// (slow_pending_i): those cycles are counted as slow-write stalls. ecc_stall_i
// (decoupled-ECC fetch in progress) holds off every command.
// Counters: write bursts, write bursts whose slow writes ran on into the read
// burst (overlaps), stall cycles and stall events.
// The overlap/stall rule is the paper's (Sec. 3.4.1); watermarks, T_BURST and the
// command handshake are own choices.
module rw_burst_sched #(
  parameter int unsigned QW      = 6,
  parameter int unsigned HI_WM   = 24,
  parameter int unsigned LO_WM   = 8,
  parameter int unsigned T_BURST = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [QW-1:0] wq_count_i,
  input  logic          rd_pending_i,
  input  logic          slow_pending_i,
  input  logic          ecc_stall_i,
  output logic          wr_issue_o,
  output logic          rd_issue_o,
  output logic          write_mode_o,
  output logic          slow_stall_o,
  output logic [31:0]   n_wr_bursts_o,
  output logic [31:0]   n_overlaps_o,
  output logic [31:0]   n_stall_cycles_o,
  output logic [31:0]   n_stall_events_o
);

  localparam int unsigned BW = $clog2(T_BURST + 1);

  logic [BW-1:0] bus_busy;
  logic          want_write;
  logic          stalling_q;

  assign want_write   = (32'(wq_count_i) >= HI_WM) || (!rd_pending_i && wq_count_i != '0);
  assign slow_stall_o = !write_mode_o && bus_busy == '0 && !ecc_stall_i
                        && want_write && slow_pending_i;

  always_comb begin
    wr_issue_o = 1'b0;
    rd_issue_o = 1'b0;
    if (bus_busy == '0 && !ecc_stall_i) begin
      if (write_mode_o) begin
        if (!(wq_count_i == '0 || (32'(wq_count_i) <= LO_WM && rd_pending_i)))
          wr_issue_o = 1'b1;
      end else if (!want_write && rd_pending_i) begin
        rd_issue_o = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bus_busy         <= '0;
      write_mode_o     <= 1'b0;
      stalling_q       <= 1'b0;
      n_wr_bursts_o    <= '0;
      n_overlaps_o     <= '0;
      n_stall_cycles_o <= '0;
      n_stall_events_o <= '0;
    end else begin
      stalling_q <= slow_stall_o;
      if (slow_stall_o) n_stall_cycles_o <= n_stall_cycles_o + 1;
      if (slow_stall_o && !stalling_q) n_stall_events_o <= n_stall_events_o + 1;
      if (wr_issue_o || rd_issue_o) bus_busy <= BW'(T_BURST - 1);
      else if (bus_busy != '0)      bus_busy <= bus_busy - 1'b1;
      if (bus_busy == '0 && !ecc_stall_i) begin
        if (write_mode_o) begin
          if (wq_count_i == '0 || (32'(wq_count_i) <= LO_WM && rd_pending_i)) begin
            write_mode_o <= 1'b0;               // t1: regular chips turn to reads
            if (slow_pending_i) n_overlaps_o <= n_overlaps_o + 1;
          end
        end else if (want_write && !slow_pending_i) begin
          write_mode_o  <= 1'b1;                // time 0 of a new write burst
          n_wr_bursts_o <= n_wr_bursts_o + 1;
        end
      end
    end
  end

  a_one_cmd: assert property (@(posedge clk) disable iff (!rst_n) !(wr_issue_o && rd_issue_o));

endmodule
