// rate_data_buffer: on-DIMM data buffer between a narrow full-rate slice of the
// channel and a slower chip (spare pool or slow ECC chip).
//
// The channel runs at the full data rate (one beat per clock here); the slow chip
// runs RATE_DIV times slower but on twice as many pins, so a 2-bit full-rate slice
// carries exactly what a x4 chip at half rate can absorb (6400 MT/s x2 =
// 3200 MT/s x4).
//   Write path: 2-bit host beats (host_valid_i) pass a LAT-cycle pipeline, are
//   regrouped into 4-bit beats and handed to the chip on chip_beat_o ticks
//   (chip_dq_valid_o marks a tick that carries a beat).
//   Read path: 4-bit beats from the chip (chip_rd_valid_i) pass the same LAT-cycle
//   pipeline, are split into 2-bit beats and sent to the host one per cycle.
// chip_beat_o is a free-running divider tick; it is the chip's beat strobe.
// Rate matching and the 4-cycle buffer latency follow the paper (Sec. 3.1,
// Table 1); the widths of the store and the handshake are own choices.
module rate_data_buffer #(
  parameter int unsigned HOST_W   = 2,
  parameter int unsigned CHIP_W   = 4,
  parameter int unsigned RATE_DIV = 2,
  parameter int unsigned LAT      = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // host (channel) side
  input  logic              host_valid_i,
  input  logic [HOST_W-1:0] host_dq_i,
  output logic              host_rd_valid_o,
  output logic [HOST_W-1:0] host_rd_dq_o,
  // chip side
  output logic              chip_beat_o,
  output logic              chip_dq_valid_o,
  output logic [CHIP_W-1:0] chip_dq_o,
  input  logic              chip_rd_valid_i,
  input  logic [CHIP_W-1:0] chip_rd_dq_i
);

  localparam int unsigned DW = (RATE_DIV > 1) ? $clog2(RATE_DIV) : 1;

  logic [DW-1:0] div_cnt;
  logic          tick;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) div_cnt <= '0;
    else        div_cnt <= (div_cnt == DW'(RATE_DIV - 1)) ? '0 : div_cnt + 1'b1;
  end
  assign tick        = (div_cnt == DW'(RATE_DIV - 1));
  assign chip_beat_o = tick;

  // LAT-cycle pipelines (buffer latency)
  logic [LAT:0]        wv_pipe;
  logic [HOST_W-1:0]   wd_pipe [LAT+1];
  logic [LAT:0]        rv_pipe;
  logic [CHIP_W-1:0]   rd_pipe [LAT+1];

  always_comb begin
    wv_pipe[0] = host_valid_i;
    wd_pipe[0] = host_dq_i;
    rv_pipe[0] = chip_rd_valid_i;
    rd_pipe[0] = chip_rd_dq_i;
  end

  for (genvar i = 1; i <= LAT; i++) begin : g_pipe
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        wv_pipe[i] <= 1'b0;
        wd_pipe[i] <= '0;
        rv_pipe[i] <= 1'b0;
        rd_pipe[i] <= '0;
      end else begin
        wv_pipe[i] <= wv_pipe[i-1];
        wd_pipe[i] <= wd_pipe[i-1];
        rv_pipe[i] <= rv_pipe[i-1];
        rd_pipe[i] <= rd_pipe[i-1];
      end
    end
  end

  logic            wr_out_valid;
  logic [CHIP_W-1:0] wr_out_data;
  logic            rd_out_valid;

  bit_gearbox #(.IN_W(HOST_W), .OUT_W(CHIP_W), .CAP(8 * CHIP_W)) u_wr_gb (
    .clk, .rst_n,
    .in_valid_i(wv_pipe[LAT]), .in_data_i(wd_pipe[LAT]),
    .out_ready_i(tick), .out_valid_o(wr_out_valid), .out_data_o(wr_out_data)
  );

  bit_gearbox #(.IN_W(CHIP_W), .OUT_W(HOST_W), .CAP(8 * CHIP_W)) u_rd_gb (
    .clk, .rst_n,
    .in_valid_i(rv_pipe[LAT]), .in_data_i(rd_pipe[LAT]),
    .out_ready_i(1'b1), .out_valid_o(rd_out_valid), .out_data_o(host_rd_dq_o)
  );

  assign chip_dq_valid_o = tick && wr_out_valid;
  assign chip_dq_o       = wr_out_data;
  assign host_rd_valid_o = rd_out_valid;

endmodule
