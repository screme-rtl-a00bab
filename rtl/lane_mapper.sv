// lane_mapper: column role swap of SCREME-I/O (col).
//
// A line crosses the sub-channel as ten 64-bit chip lanes: eight data lanes, the
// read-every-time check lane (p0, logical lane 8) and the write-only check lane
// (p1, logical lane 9). Normally logical lane i sits in physical column i. When
// the data wires of column F fail (swap_en_i, failed_col_i = F), column F swaps
// roles with the last column: the data of lane F moves to column 9 and column F
// keeps only the write-only parity, which needs just the two surviving wires (x2).
//   wr path: logical lanes -> physical columns; rd path: physical -> logical.
//   wo_col_o: one-hot, the physical column that now holds write-only parity.
//   narrow_col_o: one-hot, a column that runs at x2 (only set while swapped).
// Swapping with the last column follows the paper; a failed_col_i of 9 (the
// write-only column itself) needs no swap and only makes that column x2.
// Combinational.
module lane_mapper
  import screme_pkg::*;
#(
  parameter int unsigned LANE_W = 64
) (
  input  logic              swap_en_i,
  input  logic [3:0]        failed_col_i,
  input  logic [LANE_W-1:0] log_wr_i  [N_COLS],
  output logic [LANE_W-1:0] phys_wr_o [N_COLS],
  input  logic [LANE_W-1:0] phys_rd_i [N_COLS],
  output logic [LANE_W-1:0] log_rd_o  [N_COLS],
  output logic [N_COLS-1:0] wo_col_o,
  output logic [N_COLS-1:0] narrow_col_o
);

  logic       act;
  logic [3:0] f;

  assign act = swap_en_i && (32'(failed_col_i) < N_COLS);
  assign f   = failed_col_i;

  always_comb begin
    for (int unsigned c = 0; c < N_COLS; c++) begin
      phys_wr_o[c] = log_wr_i[c];
      log_rd_o[c]  = phys_rd_i[c];
    end
    wo_col_o     = N_COLS'(1) << (N_COLS - 1);
    narrow_col_o = '0;
    if (act) begin
      narrow_col_o = N_COLS'(1) << f;
      if (32'(f) != N_COLS - 1) begin
        phys_wr_o[f]          = log_wr_i[N_COLS-1];
        phys_wr_o[N_COLS-1]   = log_wr_i[f];
        log_rd_o[f]           = phys_rd_i[N_COLS-1];
        log_rd_o[N_COLS-1]    = phys_rd_i[f];
        wo_col_o              = N_COLS'(1) << f;
      end
    end
  end

endmodule
