// ssc_corrector: correct phase of ChipKill, used once both check symbols are
// available (baseline flow, and the second half of the decoupled flow).
//
// For each codeword: S0 = p0 ^ sum a_i, S1 = p1 ^ sum a_i*alpha^i.
//   S0 = 0, S1 = 0        -> no error
//   S0 != 0, S1 = 0       -> error in p0 only, data good (corrected)
//   S0 = 0, S1 != 0       -> error in p1 only, data good (corrected)
//   S1 = S0 * alpha^j     -> error of value S0 in data symbol j, fixed (corrected)
//   otherwise             -> detectable but uncorrectable (DUE)
// The locator search compares S1 against S0*alpha^j for all eight j in parallel.
// The line status is DUE if any codeword is DUE, else CORRECTED if any codeword
// was corrected, else CLEAN. err_chip_o names the data chip fixed in the last
// corrected codeword (used for per-chip error counting); err_chip_vld_o flags it.
// Interface: combinational.
// Paper versus own choice: the paper uses a ChipKill single-symbol-correcting code
// with two check symbols; the field (0x11D), the alpha^i weights and the decode
// tables written here are own choices, as the paper does not give the construction.
module ssc_corrector
  import screme_pkg::*;
(
  input  logic [LINE_W-1:0] data_i,
  input  logic [PAR_W-1:0]  p0_i,
  input  logic [PAR_W-1:0]  p1_i,
  output logic [LINE_W-1:0] data_o,
  output ecc_status_e       status_o,
  output logic [N_CW-1:0]   due_cw_o,
  output logic [3:0]        err_chip_o,
  output logic              err_chip_vld_o
);

  always_comb begin
    logic any_corr;
    data_o         = data_i;
    due_cw_o       = '0;
    any_corr       = 1'b0;
    err_chip_o     = '0;
    err_chip_vld_o = 1'b0;
    for (int k = 0; k < N_CW; k++) begin
      sym_t s0, s1;
      logic found;
      s0 = p0_i[k*SYM_W +: SYM_W];
      s1 = p1_i[k*SYM_W +: SYM_W];
      for (int c = 0; c < N_DSYM; c++) begin
        s0 ^= data_i[(k*N_DSYM + c)*SYM_W +: SYM_W];
        s1 ^= gf_mul(data_i[(k*N_DSYM + c)*SYM_W +: SYM_W], gf_alpha_pow(c));
      end
      found = 1'b0;
      if (s0 == '0 && s1 == '0) begin
        found = 1'b1;                       // clean codeword
      end else if (s0 == '0 || s1 == '0) begin
        found    = 1'b1;                    // a check symbol itself is wrong
        any_corr = 1'b1;
      end else begin
        for (int j = 0; j < N_DSYM; j++) begin
          if (!found && s1 == gf_mul(s0, gf_alpha_pow(j))) begin
            found = 1'b1;
            any_corr = 1'b1;
            data_o[(k*N_DSYM + j)*SYM_W +: SYM_W] = data_i[(k*N_DSYM + j)*SYM_W +: SYM_W] ^ s0;
            err_chip_o     = 4'(j);
            err_chip_vld_o = 1'b1;
          end
        end
      end
      due_cw_o[k] = !found;
    end
    if (|due_cw_o)    status_o = ECC_DUE;
    else if (any_corr) status_o = ECC_CORRECTED;
    else               status_o = ECC_CLEAN;
  end

endmodule
