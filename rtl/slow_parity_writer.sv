// slow_parity_writer: moves the write-only check symbols (p1) from the parity
// data buffer to the slow / write-only ECC storage, and fetches them back on the
// rare occasion a read fails the detect check.
//
// Two wire formats, chosen per line by the caller (wr_narrow_i / rd_narrow_i):
//   wide   - x4 at 1/SLOW_DIV of the channel rate: each 4-bit beat is held on the
//            wires for SLOW_DIV cycles (every bit sent twice at the default 2), so
//            a slow chip on the full-rate channel needs no clock change. Beats are
//            aligned to slow_tick_o, which is the slow chip's beat strobe; dq_valid_o
//            marks the cycle the chip samples.
//   narrow - x2 at the full rate (dq_o[1:0], one beat per cycle), for a chip
//            reconfigured to x2 or for the data buffer in front of the spare pool.
// Both take 32 cycles per 64-bit line at the default sizes, against 16 for a data
// burst, which is why slow writes overrun the regular write burst.
// After the last bit of a write the writer stays busy for T_WREC cycles (write
// recovery, so a following read of the same storage sees the new value; the
// data buffer in front of the spare pool adds its latency to the path).
// A line's parity leaves the buffer only after its data write was issued
// (pb_avail_i). A fetch (p1_req_i) has priority over further writes; a write in
// progress is finished first (the paper interrupts it; finishing avoids replaying
// a half-sent line and costs at most one line time). If the line's p1 is still in the parity buffer it is
// forwarded from there, otherwise a read command is sent (cmd_valid_o, cmd_we_o=0)
// and 64 bits are collected from rdq_i (4 bits per rdq_valid_i in wide, 2 in narrow).
// The rate and "send each bit twice" follow the paper; ordering, priority and
// forwarding are this design's choices.
module slow_parity_writer
  import screme_pkg::*;
#(
  parameter int unsigned SLOW_DIV = 2,
  parameter int unsigned T_WREC   = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // parity data buffer
  input  logic              pb_avail_i,
  input  logic [ADDR_W-1:0] pb_addr_i,
  input  logic [PAR_W-1:0]  pb_par_i,
  output logic              pb_pop_o,
  output logic [ADDR_W-1:0] lk_addr_o,
  input  logic              lk_hit_i,
  input  logic [PAR_W-1:0]  lk_par_i,
  // routing of the current line
  input  logic              wr_narrow_i,
  input  logic              rd_narrow_i,
  // fetch request from the decoupled ECC flow
  input  logic              p1_req_i,
  input  logic [ADDR_W-1:0] p1_addr_i,
  output logic              p1_valid_o,
  output logic [PAR_W-1:0]  p1_o,
  // slow storage side
  output logic              slow_tick_o,
  output logic              cmd_valid_o,
  output logic              cmd_we_o,
  output logic              cmd_narrow_o,
  output logic [ADDR_W-1:0] cmd_addr_o,
  output logic [3:0]        dq_o,
  output logic              dq_valid_o,
  input  logic [3:0]        rdq_i,
  input  logic              rdq_valid_i,
  // status
  output logic              busy_o,
  output logic [31:0]       n_writes_o,
  output logic [31:0]       n_fetch_o,
  output logic [31:0]       n_fwd_o
);

  localparam int unsigned DW = (SLOW_DIV > 1) ? $clog2(SLOW_DIV) : 1;

  typedef enum logic [2:0] {S_IDLE, S_WR, S_WREC, S_RD, S_FWD} state_e;
  state_e state;

  logic [DW-1:0]    div_cnt;
  logic             tick;
  logic [PAR_W-1:0] sh;
  logic [6:0]       bits;      // bits still to send / to collect
  logic [7:0]       wrec;      // write-recovery countdown
  logic             narrow;
  logic             fetch_pend;
  logic [ADDR_W-1:0] fetch_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) div_cnt <= '0;
    else        div_cnt <= (div_cnt == DW'(SLOW_DIV - 1)) ? '0 : div_cnt + 1'b1;
  end
  assign tick        = (div_cnt == DW'(SLOW_DIV - 1));
  assign slow_tick_o = tick;
  assign lk_addr_o   = fetch_addr;
  assign busy_o      = (state != S_IDLE);

  always_comb begin
    dq_o       = '0;
    dq_valid_o = 1'b0;
    if (state == S_WR) begin
      if (narrow) begin
        dq_o       = {2'b00, sh[1:0]};
        dq_valid_o = 1'b1;
      end else begin
        dq_o       = sh[3:0];
        dq_valid_o = tick;
      end
    end
  end

  logic [PAR_W-1:0] nsh;
  assign nsh = narrow ? {rdq_i[1:0], sh[PAR_W-1:2]} : {rdq_i[3:0], sh[PAR_W-1:4]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      sh           <= '0;
      bits         <= '0;
      wrec         <= '0;
      narrow       <= 1'b0;
      fetch_pend   <= 1'b0;
      fetch_addr   <= '0;
      pb_pop_o     <= 1'b0;
      p1_valid_o   <= 1'b0;
      p1_o         <= '0;
      cmd_valid_o  <= 1'b0;
      cmd_we_o     <= 1'b0;
      cmd_narrow_o <= 1'b0;
      cmd_addr_o   <= '0;
      n_writes_o   <= '0;
      n_fetch_o    <= '0;
      n_fwd_o      <= '0;
    end else begin
      pb_pop_o    <= 1'b0;
      p1_valid_o  <= 1'b0;
      cmd_valid_o <= 1'b0;
      if (p1_req_i) begin
        fetch_pend <= 1'b1;
        fetch_addr <= p1_addr_i;
      end
      unique case (state)
        S_IDLE: begin
          if (fetch_pend && !p1_req_i) begin
            if (lk_hit_i) begin
              state <= S_FWD;
            end else begin
              state        <= S_RD;
              narrow       <= rd_narrow_i;
              bits         <= 7'd64;
              cmd_valid_o  <= 1'b1;
              cmd_we_o     <= 1'b0;
              cmd_narrow_o <= rd_narrow_i;
              cmd_addr_o   <= fetch_addr;
              n_fetch_o    <= n_fetch_o + 1;
            end
          end else if (!fetch_pend && !p1_req_i && pb_avail_i && !pb_pop_o
                       && (wr_narrow_i || tick)) begin
            state        <= S_WR;
            narrow       <= wr_narrow_i;
            sh           <= pb_par_i;
            bits         <= 7'd64;
            pb_pop_o     <= 1'b1;
            cmd_valid_o  <= 1'b1;
            cmd_we_o     <= 1'b1;
            cmd_narrow_o <= wr_narrow_i;
            cmd_addr_o   <= pb_addr_i;
          end
        end
        S_WR: begin
          if (narrow) begin
            sh   <= sh >> 2;
            bits <= bits - 7'd2;
            if (bits == 7'd2) begin
              state      <= S_WREC;
              wrec       <= 8'(T_WREC);
              n_writes_o <= n_writes_o + 1;
            end
          end else if (tick) begin
            sh   <= sh >> 4;
            bits <= bits - 7'd4;
            if (bits == 7'd4) begin
              state      <= S_WREC;
              wrec       <= 8'(T_WREC);
              n_writes_o <= n_writes_o + 1;
            end
          end
        end
        S_WREC: begin
          if (wrec <= 8'd1) state <= S_IDLE;
          else              wrec  <= wrec - 1'b1;
        end
        S_RD: begin
          if (rdq_valid_i) begin
            sh <= nsh;
            if (bits == (narrow ? 7'd2 : 7'd4)) begin
              p1_valid_o <= 1'b1;
              p1_o       <= nsh;
              fetch_pend <= 1'b0;
              state      <= S_IDLE;
            end
            bits <= bits - (narrow ? 7'd2 : 7'd4);
          end
        end
        S_FWD: begin
          p1_valid_o <= 1'b1;
          p1_o       <= lk_par_i;
          fetch_pend <= 1'b0;
          n_fwd_o    <= n_fwd_o + 1;
          state      <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
