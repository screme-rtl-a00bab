// framework_cfg: configuration controller of SCREME-Framewk.
//
// From the operating mode and the recorded failures it derives the role and I/O
// width of every chip (4 rows x 10 columns), the column swap, the spare-pool
// power and switch setting, and where each rank's write-only check symbols (p1)
// go. Column 9 holds p1 natively; chips sit on their row's native x4 half.
//   FW_NORMAL: columns 0-7 data, column 8 check (p0), column 9 write-only p1;
//     spare pool off. With col_fail_en_i (SCREME-I/O col: a wire pair of column F
//     is dead) column F swaps roles with column 9, its chips run x2 on the
//     surviving pair as write-only p1 chips, and p1 is sent narrow on that pair.
//     Column 9 takes over the role column F had (data, or p0 when F = 8).
//   FW_CHIP_REPLACE: chip A (row ra, column F) has failed. Column F swaps roles
//     with column 9 and becomes a parity column. A is switched off; chip B, the
//     chip of the other rank on A's wires (row ra^2), runs x2 on the first pair
//     and stores p1 of its rank; the second pair is switched to the spare pool,
//     which stores p1 of A's rank. The other chips of column F run x4 as
//     write-only parity chips.
//   FW_SCALABLE_ECC: chip A (row ra) of the p1 column 9 runs x2 on its first pair
//     and the second pair is switched to the spare pool, which is powered, to hold
//     the extra check symbols of a stronger code. p1 of A's rank goes narrow to A.
// p1_narrow_o[k] / p1_pair_o[k] give, for rank k (native ranks 0 and 1), whether
// its p1 travels as x2 on wire pair p1_pair_o[k] (else wide, to column 9), and
// p1_spare_o[k] whether that pair is the switched one.
// The modes and the chip roles follow the paper (Sec. 3.2-3.3, Fig. 6 and 8);
// the pair numbering and which pair goes to the spares are own choices.
// Combinational.
module framework_cfg
  import screme_pkg::*;
(
  input  fw_mode_e    mode_i,
  input  logic        col_fail_en_i,
  input  logic [3:0]  failed_col_i,
  input  logic        failed_pair_i,
  input  logic [1:0]  failed_row_i,
  output chip_cfg_t   chip_cfg_o [N_ROWS][N_COLS],
  output logic        swap_en_o,
  output logic [3:0]  swap_col_o,
  output logic        spare_pool_en_o,
  output logic        sw_en_o,
  output logic [4:0]  sw_pair_o,
  output logic [1:0]  p1_narrow_o,
  output logic [4:0]  p1_pair_o [2],
  output logic [1:0]  p1_spare_o
);

  function automatic logic [1:0] native_group(input int r);
    return (r % 2 == 0) ? 2'd1 : 2'd0;   // rows 0,2 on the right half, rows 1,3 on the left
  endfunction

  always_comb begin
    logic [1:0] ra, rb;
    logic [3:0] fcol;
    ra   = failed_row_i;
    rb   = failed_row_i ^ 2'd2;
    fcol = (32'(failed_col_i) < N_COLS) ? failed_col_i : 4'(N_COLS - 1);
    // defaults: normal module
    for (int r = 0; r < N_ROWS; r++) begin
      for (int c = 0; c < N_COLS; c++) begin
        chip_cfg_o[r][c].io_mode  = IO_X4;
        chip_cfg_o[r][c].io_group = native_group(r);
        if (c < N_DSYM)       chip_cfg_o[r][c].role = ROLE_DATA;
        else if (c == N_DSYM) chip_cfg_o[r][c].role = ROLE_ECC;
        else                  chip_cfg_o[r][c].role = ROLE_ECC_WO;
      end
    end
    swap_en_o       = 1'b0;
    swap_col_o      = fcol;
    spare_pool_en_o = 1'b0;
    sw_en_o         = 1'b0;
    sw_pair_o       = '0;
    p1_narrow_o     = '0;
    p1_pair_o[0]    = '0;
    p1_pair_o[1]    = '0;
    p1_spare_o      = '0;

    unique case (mode_i)
      FW_CHIP_REPLACE: begin
        swap_en_o = 1'b1;
        for (int r = 0; r < N_ROWS; r++) begin
          chip_cfg_o[r][fcol].role = ROLE_ECC_WO;
          if (fcol != 4'(N_COLS - 1)) chip_cfg_o[r][N_COLS-1].role = (fcol < 4'(N_DSYM)) ? ROLE_DATA : ROLE_ECC;
        end
        chip_cfg_o[ra][fcol].role     = ROLE_OFF;
        chip_cfg_o[ra][fcol].io_mode  = IO_OFF;
        chip_cfg_o[rb][fcol].io_mode  = IO_X2;
        chip_cfg_o[rb][fcol].io_group = {~rb[0], 1'b0};
        spare_pool_en_o = 1'b1;
        sw_en_o         = 1'b1;
        sw_pair_o       = 5'({fcol, 1'b1});
        // rank of A -> spares, rank of B -> chip B
        p1_narrow_o           = 2'b11;
        p1_pair_o[ra[1]]      = 5'({fcol, 1'b1});
        p1_spare_o[ra[1]]     = 1'b1;
        p1_pair_o[rb[1]]      = 5'({fcol, 1'b0});
      end
      FW_SCALABLE_ECC: begin
        chip_cfg_o[ra][N_COLS-1].io_mode  = IO_X2;
        chip_cfg_o[ra][N_COLS-1].io_group = {~ra[0], 1'b0};
        spare_pool_en_o       = 1'b1;
        sw_en_o               = 1'b1;
        sw_pair_o             = 5'({4'(N_COLS - 1), 1'b1});
        p1_narrow_o[ra[1]]    = 1'b1;
        p1_pair_o[ra[1]]      = 5'({4'(N_COLS - 1), 1'b0});
      end
      default: begin
        if (col_fail_en_i) begin
          swap_en_o = 1'b1;
          for (int r = 0; r < N_ROWS; r++) begin
            chip_cfg_o[r][fcol].role     = ROLE_ECC_WO;
            chip_cfg_o[r][fcol].io_mode  = IO_X2;
            chip_cfg_o[r][fcol].io_group = {1'(r % 2 == 0), ~failed_pair_i};
            if (fcol != 4'(N_COLS - 1)) chip_cfg_o[r][N_COLS-1].role = (fcol < 4'(N_DSYM)) ? ROLE_DATA : ROLE_ECC;
          end
          p1_narrow_o  = 2'b11;
          p1_pair_o[0] = 5'({fcol, ~failed_pair_i});
          p1_pair_o[1] = 5'({fcol, ~failed_pair_i});
        end
      end
    endcase
  end

endmodule
