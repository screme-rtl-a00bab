// parity_buffer: the parity data buffer added to the memory controller.
//
// For every write accepted into the write queue, the second check symbol of its
// line (8 bytes, p1 of the 8 codewords) is pushed here together with the line
// address; the buffer has one 8-byte entry per write-queue entry, i.e. 1/8 of the
// 64-byte write buffer. The slow write-only ECC chip drains it at its own pace.
// An entry becomes eligible for the slow chip only once the regular chips have
// issued the line's data write (mark_issued_i), so slow writes start together with
// the regular write burst and run on into the following read burst.
//   push_i / pop_i: FIFO order; pop_i is legal only while issued_cnt_o != 0.
//   lookup_*: associative search (newest matching entry) so that a p1 fetch for a
//   line whose parity has not reached the slow chip yet is served from here.
// Depth and entry size follow the paper; issue tracking and forwarding are own
// choices needed to keep the slow chip's copy coherent.
module parity_buffer
  import screme_pkg::*;
#(
  parameter int unsigned DEPTH = 32,
  parameter int unsigned PW    = PAR_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              push_i,
  input  logic [ADDR_W-1:0] push_addr_i,
  input  logic [PW-1:0]     push_par_i,
  input  logic              mark_issued_i,
  input  logic              pop_i,
  output logic [ADDR_W-1:0] head_addr_o,
  output logic [PW-1:0]     head_par_o,
  output logic              full_o,
  output logic              empty_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o,
  output logic [$clog2(DEPTH+1)-1:0] issued_cnt_o,
  input  logic [ADDR_W-1:0] lookup_addr_i,
  output logic              lookup_hit_o,
  output logic [PW-1:0]     lookup_par_o
);

  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic [ADDR_W-1:0] addr_mem [DEPTH];
  logic [PW-1:0]     par_mem  [DEPTH];
  logic [AW-1:0]     rd_ptr, wr_ptr;
  logic [CW-1:0]     count, issued;

  assign full_o       = (count == CW'(DEPTH));
  assign empty_o      = (count == '0);
  assign count_o      = count;
  assign issued_cnt_o = issued;
  assign head_addr_o  = addr_mem[rd_ptr];
  assign head_par_o   = par_mem[rd_ptr];

  logic do_push, do_pop;
  assign do_push = push_i && !full_o;
  assign do_pop  = pop_i && (issued != '0);

  always_ff @(posedge clk) begin
    if (push_i && !full_o) begin
      addr_mem[wr_ptr] <= push_addr_i;
      par_mem[wr_ptr]  <= push_par_i;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
      issued <= '0;
    end else begin
      if (do_push) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count  <= count + CW'(do_push) - CW'(do_pop);
      issued <= issued + CW'(mark_issued_i && (issued < count)) - CW'(do_pop);
    end
  end

  // associative lookup, newest entry wins: walk from the oldest valid entry
  always_comb begin
    lookup_hit_o = 1'b0;
    lookup_par_o = '0;
    for (int unsigned i = 0; i < DEPTH; i++) begin
      logic [AW-1:0] idx;
      idx = AW'((32'(rd_ptr) + i) % DEPTH);
      if (i < 32'(count) && addr_mem[idx] == lookup_addr_i) begin
        lookup_hit_o = 1'b1;
        lookup_par_o = par_mem[idx];
      end
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push_i |-> !full_o);
  a_pop_issued:   assert property (@(posedge clk) disable iff (!rst_n) pop_i |-> issued != '0);

endmodule
