// tb_rank_reorg: for all 16 patterns of failed rows, every valid (rank, bank)
// must select two working rows on opposite pin halves, and no (row, bank) may be
// used twice; the rank count and capacity must match the number of survivors.
// The single-failure layout is also checked against the published example:
// Row1 fails -> R0 = Row2 0-15 + Row3 0-15, R1 = Row2 16-31 + Row4 0-15,
// R2 = Row3 16-31 + Row4 16-31 (rows numbered 1-4 there, 0-3 here).
// Interface: no ports; drives the unit under test directly, uses
// $urandom for stimulus, ends with one TB_RESULT line and $finish, and has a
// watchdog that counts a failure if the run hangs. Expected values come from own
// reference models, written from the behaviour the paper describes.
module tb_rank_reorg;
  import screme_pkg::*;
  logic [3:0] failed;
  logic [1:0] lrank, nr;
  logic [4:0] lbank;
  logic [5:0] bpr;
  logic valid;
  logic [3:0] en, side;
  logic [4:0] rbank [N_ROWS];
  int checks = 0, failures = 0;

  rank_reorg dut (.row_failed_i(failed), .log_rank_i(lrank), .log_bank_i(lbank),
    .n_ranks_o(nr), .banks_per_rank_o(bpr), .valid_o(valid), .row_en_o(en),
    .row_bank_o(rbank), .row_side_o(side));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int pat = 0; pat < 16; pat++) begin
      bit used [4][32];
      int nsurv, nvalid, exp_ranks;
      failed = 4'(pat);
      nsurv = 4 - $countones(failed);
      exp_ranks = (nsurv == 4) ? 2 : (nsurv == 3) ? 3 : (nsurv == 2) ? 1 : 0;
      foreach (used[r, b]) used[r][b] = 0;
      nvalid = 0;
      for (int rk = 0; rk < 4; rk++) for (int b = 0; b < 32; b++) begin
        lrank = 2'(rk); lbank = 5'(b); #1;
        if (valid) begin
          nvalid++;
          checks++;
          if ($countones(en) != 2 || (en & failed) != 0) failures++;
          else begin
            int r0, r1;
            r0 = -1; r1 = -1;
            for (int r = 0; r < 4; r++) if (en[r]) begin if (r0 < 0) r0 = r; else r1 = r; end
            checks++; if (side[r0] == side[r1]) failures++;
            checks++; if (used[r0][rbank[r0]] || used[r1][rbank[r1]]) failures++;
            used[r0][rbank[r0]] = 1; used[r1][rbank[r1]] = 1;
          end
        end
      end
      checks++;
      if (int'(nr) != exp_ranks || nvalid != exp_ranks * int'(bpr) ||
          (exp_ranks > 0 && nvalid * 2 != nsurv * 32 && nsurv != 4)) begin
        failures++; $display("pattern %b: ranks %0d bpr %0d valid %0d", failed, nr, bpr, nvalid);
      end
    end
    // published example, row 0 failed
    failed = 4'b0001;
    for (int b = 0; b < 16; b++) begin
      lrank = 0; lbank = 5'(b); #1;
      checks++; if (!(en == 4'b0110 && rbank[1] == 5'(b) && rbank[2] == 5'(b))) failures++;
      lrank = 1; #1;
      checks++; if (!(en == 4'b1010 && rbank[1] == 5'(b + 16) && rbank[3] == 5'(b))) failures++;
      lrank = 2; #1;
      checks++; if (!(en == 4'b1100 && rbank[2] == 5'(b + 16) && rbank[3] == 5'(b + 16))) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
