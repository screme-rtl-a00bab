// ssc_encoder: ChipKill single-symbol-correcting (SSC) Reed-Solomon check-symbol
// generator for one 64-byte line.
//
// A line is 8 codewords; codeword k has data symbols a_0..a_7 (one per data chip)
// and two check symbols, computed as in the paper's two check equations:
//   p0 = sum_i a_i * x0^i ,  p1 = sum_i a_i * x1^i   over GF(2^8).
// This implementation picks x0 = 1 and x1 = alpha (0x02), so p0 is a plain XOR and
// p1 is a sum of constant multiplies. p0 goes to the regular ECC chip; p1 goes to
// the write-only (slow) ECC chip through the parity data buffer.
// Interface: purely combinational, data_i -> p0_o/p1_o in the same cycle.
module ssc_encoder
  import screme_pkg::*;
(
  input  logic [LINE_W-1:0] data_i,
  output logic [PAR_W-1:0]  p0_o,
  output logic [PAR_W-1:0]  p1_o
);

  always_comb begin
    p0_o = '0;
    p1_o = '0;
    for (int k = 0; k < N_CW; k++) begin
      for (int c = 0; c < N_DSYM; c++) begin
        p0_o[k*SYM_W +: SYM_W] ^= data_i[(k*N_DSYM + c)*SYM_W +: SYM_W];
        p1_o[k*SYM_W +: SYM_W] ^= gf_mul(data_i[(k*N_DSYM + c)*SYM_W +: SYM_W],
                                         gf_alpha_pow(c));
      end
    end
  end

endmodule
