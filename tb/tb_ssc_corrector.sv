// tb_ssc_corrector: clean lines, single-symbol errors in data/p0/p1 (corrected),
// and random double-symbol errors compared with the brute-force reference decoder.
// Interface: no ports; drives the unit under test directly, uses
// $urandom for stimulus, ends with one TB_RESULT line and $finish, and has a
// watchdog that counts a failure if the run hangs. Expected values come from own
// reference models, written from the behaviour the paper describes.
module tb_ssc_corrector;
  import tb_ref_pkg::*;
  import screme_pkg::*;
  logic [511:0] data, dout, orig, fixed;
  logic [63:0]  p0, p1;
  ecc_status_e  st;
  logic [7:0]   due_cw;
  logic [3:0]   chip;
  logic         chip_vld;
  int checks = 0, failures = 0, n_due = 0;

  ssc_corrector dut (.data_i(data), .p0_i(p0), .p1_i(p1), .data_o(dout), .status_o(st),
                     .due_cw_o(due_cw), .err_chip_o(chip), .err_chip_vld_o(chip_vld));

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      int k, c, r;
      logic [7:0] v;
      orig = rand_line();
      ref_encode(orig, p0, p1);
      data = orig; #1;
      checks++; if (st !== ECC_CLEAN || dout !== orig) failures++;
      // single symbol error in data, p0 or p1
      k = $urandom_range(0, 7); c = $urandom_range(0, 9); v = 8'($urandom_range(1, 255));
      if (c < 8)       data[(k*8 + c)*8 +: 8] ^= v;
      else if (c == 8) p0[k*8 +: 8] ^= v;
      else             p1[k*8 +: 8] ^= v;
      #1;
      checks++;
      if (st !== ECC_CORRECTED || dout !== orig) begin
        failures++; $display("single k=%0d c=%0d st=%0d", k, c, st);
      end
      if (c < 8) begin
        checks++; if (!chip_vld || chip !== 4'(c)) failures++;
      end
      // second error in another chip of the same codeword
      begin
        int c2;
        c2 = (c + 1 + $urandom_range(0, 7)) % 8;
        data[(k*8 + c2)*8 +: 8] ^= 8'($urandom_range(1, 255));
      end
      #1;
      r = ref_decode(data, p0, p1, fixed);
      checks++;
      if (int'(st) != r || (r != 2 && dout !== fixed)) begin
        failures++; $display("double ref=%0d st=%0d", r, st);
      end
      if (st == ECC_DUE) n_due++;
    end
    checks++; if (n_due == 0) failures++;   // double errors must give DUEs
    $display("double-error DUE count %0d of 200", n_due);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
