// tb_lane_mapper: random lanes through the write and read paths, for no swap and
// for every failed column: lane F must land in column 9 and back, the write-only
// marker must move to column F, column F must be marked x2, and the read path
// must undo the write path exactly.
// Interface: no ports; drives the unit under test directly, uses
// $urandom for stimulus, ends with one TB_RESULT line and $finish, and has a
// watchdog that counts a failure if the run hangs. Expected values come from own
// reference models, written from the behaviour the paper describes.
module tb_lane_mapper;
  import screme_pkg::*;
  logic swap_en;
  logic [3:0] fcol;
  logic [63:0] lw [N_COLS], pw [N_COLS], pr [N_COLS], lr [N_COLS];
  logic [N_COLS-1:0] wo, nar;
  int checks = 0, failures = 0;

  lane_mapper dut (.swap_en_i(swap_en), .failed_col_i(fcol), .log_wr_i(lw), .phys_wr_o(pw),
    .phys_rd_i(pr), .log_rd_o(lr), .wo_col_o(wo), .narrow_col_o(nar));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      int f, exp_col;
      swap_en = (t % 11) != 0;
      f = t % 10;
      fcol = 4'(f);
      foreach (lw[i]) lw[i] = {$urandom, $urandom};
      #1;
      foreach (pr[i]) pr[i] = pw[i];   // memory returns what was written
      #1;
      for (int i = 0; i < N_COLS; i++) begin
        exp_col = (!swap_en || f == 9) ? i : (i == f) ? 9 : (i == 9) ? f : i;
        checks++; if (pw[exp_col] !== lw[i]) failures++;
        checks++; if (lr[i] !== lw[i]) failures++;
      end
      checks++;
      if (wo !== ((swap_en && f != 9) ? N_COLS'(1) << f : N_COLS'(1) << 9)) failures++;
      checks++;
      if (nar !== (swap_en ? N_COLS'(1) << f : '0)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
