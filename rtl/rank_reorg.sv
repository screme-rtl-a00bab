// rank_reorg: rank reorganisation of SCREME-I/O (row) after control-wire failures.
//
// The module has four chip rows; a rank is a pair of rows whose chips drive
// opposite halves (left/right x4 pin groups of the x8 package) of each column's
// data wires, so every row supplies half of each chip lane. Rows 0,1 form rank 0
// and rows 2,3 rank 1; natively rows 0 and 2 use the right half, rows 1 and 3 the
// left half. A failed control wire takes a whole row out.
//   No failure: 2 ranks of 32 banks, native pairing.
//   One failed row: its partner P is paired with both rows of the other rank, so
//     the three survivors form three ranks of half capacity (16 banks each):
//       rank 0 = P banks 0-15 (native half) + Q0 banks 0-15,
//       rank 1 = P banks 16-31 (other half)  + Q1 banks 0-15,
//       rank 2 = Q0 banks 16-31 + Q1 banks 16-31,
//     where Q0 is the row of the other rank whose native half differs from P's.
//   Two failed rows: the two survivors form one rank of 32 banks; if they share a
//     native half, the higher-numbered one switches to the other half.
//   Three or four failed rows: no rank (valid_o low).
// For a logical rank and bank the outputs name the two rows to select, the bank
// in each and the pin half each must enable. The three-rank layout and the pin
// halves follow the paper (Sec. 3.2, Fig. 7); the numbering of rows and halves
// and the two-failure side rule are own choices. Combinational.
module rank_reorg
  import screme_pkg::*;
(
  input  logic [N_ROWS-1:0] row_failed_i,
  input  logic [1:0]        log_rank_i,
  input  logic [4:0]        log_bank_i,
  output logic [1:0]        n_ranks_o,
  output logic [5:0]        banks_per_rank_o,
  output logic              valid_o,
  output logic [N_ROWS-1:0] row_en_o,
  output logic [4:0]        row_bank_o [N_ROWS],
  output logic [N_ROWS-1:0] row_side_o      // 0 = left x4 half, 1 = right x4 half
);

  // native pin half of each row
  function automatic logic native_side(input logic [1:0] r);
    return ~r[0];
  endfunction

  always_comb begin
    logic [2:0] nfail;
    logic [1:0] f, p, q0, q1, s0, s1;
    logic       found0;
    nfail = '0;
    f     = '0;
    for (int r = 0; r < N_ROWS; r++) if (row_failed_i[r]) begin
      nfail = nfail + 1'b1;
      f     = 2'(r);
    end
    row_en_o   = '0;
    row_side_o = '0;
    for (int r = 0; r < N_ROWS; r++) row_bank_o[r] = '0;
    n_ranks_o        = '0;
    banks_per_rank_o = '0;
    valid_o          = 1'b0;
    p  = '0; q0 = '0; q1 = '0; s0 = '0; s1 = '0; found0 = 1'b0;

    unique case (nfail)
      3'd0: begin
        n_ranks_o        = 2'd2;
        banks_per_rank_o = 6'd32;
        valid_o          = (log_rank_i < 2'd2);
        if (valid_o) begin
          for (int k = 0; k < 2; k++) begin
            logic [1:0] r;
            r = {log_rank_i[0], 1'(k)};
            row_en_o[r]   = 1'b1;
            row_bank_o[r] = log_bank_i;
            row_side_o[r] = native_side(r);
          end
        end
      end
      3'd1: begin
        p  = f ^ 2'd1;
        // Q0: row of the other rank whose native half differs from P's
        q0 = {~p[1], 1'b0};
        if (native_side(q0) == native_side(p)) q0 = {~p[1], 1'b1};
        q1 = q0 ^ 2'd1;
        n_ranks_o        = 2'd3;
        banks_per_rank_o = 6'd16;
        valid_o          = (log_rank_i < 2'd3) && !log_bank_i[4];
        if (valid_o) begin
          unique case (log_rank_i)
            2'd0: begin
              row_en_o[p]  = 1'b1; row_bank_o[p]  = {1'b0, log_bank_i[3:0]}; row_side_o[p]  = native_side(p);
              row_en_o[q0] = 1'b1; row_bank_o[q0] = {1'b0, log_bank_i[3:0]}; row_side_o[q0] = native_side(q0);
            end
            2'd1: begin
              row_en_o[p]  = 1'b1; row_bank_o[p]  = {1'b1, log_bank_i[3:0]}; row_side_o[p]  = ~native_side(p);
              row_en_o[q1] = 1'b1; row_bank_o[q1] = {1'b0, log_bank_i[3:0]}; row_side_o[q1] = native_side(q1);
            end
            default: begin
              row_en_o[q0] = 1'b1; row_bank_o[q0] = {1'b1, log_bank_i[3:0]}; row_side_o[q0] = native_side(q0);
              row_en_o[q1] = 1'b1; row_bank_o[q1] = {1'b1, log_bank_i[3:0]}; row_side_o[q1] = native_side(q1);
            end
          endcase
        end
      end
      3'd2: begin
        for (int r = 0; r < N_ROWS; r++) if (!row_failed_i[r]) begin
          if (!found0) begin s0 = 2'(r); found0 = 1'b1; end
          else s1 = 2'(r);
        end
        n_ranks_o        = 2'd1;
        banks_per_rank_o = 6'd32;
        valid_o          = (log_rank_i == 2'd0);
        if (valid_o) begin
          row_en_o[s0] = 1'b1; row_bank_o[s0] = log_bank_i; row_side_o[s0] = native_side(s0);
          row_en_o[s1] = 1'b1; row_bank_o[s1] = log_bank_i;
          row_side_o[s1] = (native_side(s1) == native_side(s0)) ? ~native_side(s1) : native_side(s1);
        end
      end
      default: ;
    endcase
  end

endmodule
