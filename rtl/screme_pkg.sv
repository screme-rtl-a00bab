// screme_pkg: constants, types and Galois-field helpers shared by the SCREME
// memory-channel RTL.
//
// Organisation (follows the paper): a DDR5 sub-channel of ten x4 chips, eight
// data chips and two ECC chips. A 64-byte line is a burst of 16 beats; each chip
// contributes one 8-bit symbol every two beats, so a line holds 8 ChipKill (SSC)
// codewords of 8 data symbols plus 2 check symbols.
//
// Own choices: the field is GF(2^8) with primitive polynomial x^8+x^4+x^3+x^2+1
// (0x11D); the evaluation points of the two check equations are x0 = 1 and
// x1 = alpha = 0x02, so p0 is the XOR of the data symbols and p1 = sum a_i*alpha^i.
// Byte (8*k + c) of a line is the symbol of data chip c in codeword k, and byte k
// of a 64-bit parity word is the check symbol of codeword k.
package screme_pkg;

  localparam int unsigned SYM_W      = 8;
  localparam int unsigned N_DSYM     = 8;    // data symbols (data chips) per codeword
  localparam int unsigned N_CW       = 8;    // codewords per 64B line
  localparam int unsigned LINE_W     = 512;  // 64B line
  localparam int unsigned PAR_W      = 64;   // one check symbol per codeword, per line
  localparam int unsigned N_COLS     = 10;   // chip columns in a sub-channel
  localparam int unsigned N_ROWS     = 4;    // chip rows (two ranks of two rows)
  localparam int unsigned BURST_LEN  = 16;
  localparam int unsigned CHIP_DQ    = 4;    // x4 chips
  localparam int unsigned N_BANKS    = 32;   // 8 bank groups x 4 banks
  localparam int unsigned ADDR_W     = 32;   // line address width

  typedef logic [SYM_W-1:0] sym_t;

  // ECC outcome of a read
  typedef enum logic [1:0] {
    ECC_CLEAN     = 2'd0,
    ECC_CORRECTED = 2'd1,
    ECC_DUE       = 2'd2
  } ecc_status_e;

  // I/O width a chip is configured to (x4 and x8 dies share one package)
  typedef enum logic [1:0] {
    IO_OFF = 2'd0,
    IO_X2  = 2'd1,
    IO_X4  = 2'd2,
    IO_X8  = 2'd3
  } io_mode_e;

  // Role of a chip in the module
  typedef enum logic [1:0] {
    ROLE_OFF    = 2'd0,
    ROLE_DATA   = 2'd1,
    ROLE_ECC    = 2'd2,   // check symbol read on every access (p0)
    ROLE_ECC_WO = 2'd3    // write-only check symbol (p1), read only after a detected error
  } chip_role_e;

  // SCREME-Framewk operating modes
  typedef enum logic [1:0] {
    FW_NORMAL       = 2'd0,
    FW_CHIP_REPLACE = 2'd1,
    FW_SCALABLE_ECC = 2'd2
  } fw_mode_e;

  // Per-chip configuration
  typedef struct packed {
    chip_role_e role;
    io_mode_e   io_mode;
    logic [1:0] io_group;   // x4: 0=left/1=right half of the x8 pins; x2: pair 0..3
  } chip_cfg_t;

  // multiply in GF(2^8), polynomial 0x11D
  function automatic sym_t gf_mul(input sym_t a, input sym_t b);
    sym_t r;
    sym_t x;
    r = '0;
    x = a;
    for (int i = 0; i < SYM_W; i++) begin
      if (b[i]) r = r ^ x;
      x = x[7] ? ((x << 1) ^ 8'h1D) : (x << 1);
    end
    return r;
  endfunction

  // alpha^e for e = 0..7 (the only exponents the SSC code uses: one per data
  // symbol position). Table form keeps synthesis from unrolling a loop of
  // multiplications.
  function automatic sym_t gf_alpha_pow(input int unsigned e);
    case (e)
      0: return 8'h01;
      1: return 8'h02;
      2: return 8'h04;
      3: return 8'h08;
      4: return 8'h10;
      5: return 8'h20;
      6: return 8'h40;
      7: return 8'h80;
      default: return 8'h00;
    endcase
  endfunction

endpackage
