// tb_framework_cfg: checks the chip roles, I/O widths, switch setting and p1
// routing produced for the normal module, every single column failure with each
// dead wire pair, chip replacement for every column and row, and scalable-ECC
// mode for every row. Invariants checked in every case: exactly eight data
// chips per row, one read-every-time check chip per row outside the failed
// column, the spare pool powered exactly when a switch is closed.
// Interface: no ports; drives the unit under test directly, uses
// $urandom for stimulus, ends with one TB_RESULT line and $finish, and has a
// watchdog that counts a failure if the run hangs. Expected values come from own
// reference models, written from the behaviour the paper describes.
module tb_framework_cfg;
  import screme_pkg::*;
  fw_mode_e mode;
  logic cfe, fpair, swap_en, spare_en, sw_en;
  logic [3:0] fcol, swap_col;
  logic [1:0] frow, p1_nar, p1_spare;
  chip_cfg_t cfg [N_ROWS][N_COLS];
  logic [4:0] sw_pair, p1_pair [2];
  int checks = 0, failures = 0;

  framework_cfg dut (.mode_i(mode), .col_fail_en_i(cfe), .failed_col_i(fcol),
    .failed_pair_i(fpair), .failed_row_i(frow), .chip_cfg_o(cfg), .swap_en_o(swap_en),
    .swap_col_o(swap_col), .spare_pool_en_o(spare_en), .sw_en_o(sw_en), .sw_pair_o(sw_pair),
    .p1_narrow_o(p1_nar), .p1_pair_o(p1_pair), .p1_spare_o(p1_spare));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [1:0] nat(input int r);
    return (r % 2 == 0) ? 2'd1 : 2'd0;
  endfunction

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s mode %0d col %0d row %0d pair %0d", what, mode, fcol, frow, fpair); end
  endtask

  task automatic invariants();
    for (int r = 0; r < N_ROWS; r++) begin
      int nd;
      nd = 0;
      for (int c = 0; c < N_COLS; c++) if (cfg[r][c].role == ROLE_DATA) nd++;
      chk(nd == 8, "eight data chips");
      chk(cfg[r][8].role == ROLE_ECC || (swap_en && fcol == 8 && cfg[r][9].role == ROLE_ECC), "p0 chip");
    end
    chk(spare_en == sw_en, "spare power follows switch");
  endtask

  initial begin
    mode = FW_NORMAL; cfe = 0; fcol = 0; fpair = 0; frow = 0;
    #1;
    for (int r = 0; r < N_ROWS; r++) for (int c = 0; c < N_COLS; c++) begin
      chk(cfg[r][c].io_mode == IO_X4 && cfg[r][c].io_group == nat(r), "normal x4 native");
      chk(cfg[r][c].role == (c < 8 ? ROLE_DATA : c == 8 ? ROLE_ECC : ROLE_ECC_WO), "normal role");
    end
    chk(!swap_en && !sw_en && p1_nar == 0, "normal switches");
    invariants();
    // SCREME-I/O (col): one wire pair of column F dead
    cfe = 1;
    for (int f = 0; f < 9; f++) for (int p = 0; p < 2; p++) begin
      fcol = 4'(f); fpair = 1'(p); #1;
      invariants();
      chk(swap_en && swap_col == 4'(f) && !sw_en, "col swap");
      for (int r = 0; r < N_ROWS; r++) begin
        chk(cfg[r][f].role == ROLE_ECC_WO && cfg[r][f].io_mode == IO_X2, "failed column x2 WO");
        chk(cfg[r][f].io_group == {nat(r)[0], 1'(!p)}, "surviving pair");
        chk(cfg[r][9].role == (f < 8 ? ROLE_DATA : ROLE_ECC), "column 9 takes F's role");
      end
      chk(p1_nar == 2'b11 && p1_pair[0] == 5'(2*f + (1-p)) && p1_pair[1] == 5'(2*f + (1-p)), "p1 narrow route");
    end
    cfe = 0;
    // SCREME-Framewk chip replacement
    mode = FW_CHIP_REPLACE;
    for (int f = 0; f < 9; f++) for (int ra = 0; ra < 4; ra++) begin
      int rb;
      rb = ra ^ 2;
      fcol = 4'(f); frow = 2'(ra); #1;
      invariants();
      chk(cfg[ra][f].role == ROLE_OFF && cfg[ra][f].io_mode == IO_OFF, "A off");
      chk(cfg[rb][f].io_mode == IO_X2 && cfg[rb][f].role == ROLE_ECC_WO && cfg[rb][f].io_group == {nat(rb)[0], 1'b0}, "B x2");
      chk(sw_en && spare_en && sw_pair == 5'(2*f + 1), "switch on second pair of F");
      chk(p1_nar == 2'b11 && p1_spare[ra/2] && !p1_spare[rb/2], "p1 of A's rank to spares");
      chk(p1_pair[ra/2] == 5'(2*f + 1) && p1_pair[rb/2] == 5'(2*f), "p1 pairs");
    end
    // scalable ECC
    mode = FW_SCALABLE_ECC;
    for (int ra = 0; ra < 4; ra++) begin
      frow = 2'(ra); #1;
      invariants();
      chk(cfg[ra][9].io_mode == IO_X2 && cfg[ra][9].role == ROLE_ECC_WO, "A x2");
      chk(sw_en && spare_en && sw_pair == 5'd19, "spare switched");
      chk(p1_nar[ra/2] && !p1_nar[1-ra/2] && p1_pair[ra/2] == 5'd18, "p1 narrow to A");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
