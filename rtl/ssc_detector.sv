// ssc_detector: detect phase of the decoupled ChipKill flow.
//
// On a normal read only the data symbols and the first check symbol p0 are
// fetched. This block evaluates the first check equation (syndrome
// S0 = p0 ^ XOR of the data symbols) for each of the 8 codewords of the line.
// A non-zero syndrome means an error was detected; correction then needs the
// second check symbol held in the write-only chip. With x0 = 1 every single-symbol
// error changes S0, so every single-chip error is detected here.
// Interface: combinational; err_cw_o[k] flags codeword k.
// Paper versus own choice: detecting with the first check symbol alone and
// fetching the second only on an error is the paper's decoupled flow; the plain
// XOR parity used as that first check is own choice.
module ssc_detector
  import screme_pkg::*;
(
  input  logic [LINE_W-1:0] data_i,
  input  logic [PAR_W-1:0]  p0_i,
  output logic [N_CW-1:0]   err_cw_o,
  output logic              detected_o
);

  always_comb begin
    for (int k = 0; k < N_CW; k++) begin
      sym_t s0;
      s0 = p0_i[k*SYM_W +: SYM_W];
      for (int c = 0; c < N_DSYM; c++) s0 ^= data_i[(k*N_DSYM + c)*SYM_W +: SYM_W];
      err_cw_o[k] = (s0 != '0);
    end
    detected_o = |err_cw_o;
  end

endmodule
