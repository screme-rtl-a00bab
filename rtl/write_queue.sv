// write_queue: the memory controller's write buffer.
//
// Holds pending line writes (address and 64-byte data) in arrival order until the
// burst scheduler drains them in a write burst. Depth 32 follows the simulated
// controller of the paper. First-come first-served order, the valid/ready
// handshake and the read-hit forwarding port (a read of a line still waiting in
// the queue is answered from the newest queued copy) are this design's choices.
module write_queue
  import screme_pkg::*;
#(
  parameter int unsigned DEPTH = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              push_i,
  input  logic [ADDR_W-1:0] push_addr_i,
  input  logic [LINE_W-1:0] push_data_i,
  input  logic              pop_i,
  output logic [ADDR_W-1:0] head_addr_o,
  output logic [LINE_W-1:0] head_data_o,
  output logic              full_o,
  output logic              empty_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o,
  input  logic [ADDR_W-1:0] fwd_addr_i,
  output logic              fwd_hit_o,
  output logic [LINE_W-1:0] fwd_data_o
);

  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic [ADDR_W-1:0] addr_mem [DEPTH];
  logic [LINE_W-1:0] data_mem [DEPTH];
  logic [AW-1:0]     rd_ptr, wr_ptr;
  logic [CW-1:0]     count;

  assign full_o      = (count == CW'(DEPTH));
  assign empty_o     = (count == '0);
  assign count_o     = count;
  assign head_addr_o = addr_mem[rd_ptr];
  assign head_data_o = data_mem[rd_ptr];

  logic do_push, do_pop;
  assign do_push = push_i && !full_o;
  assign do_pop  = pop_i && !empty_o;

  always_ff @(posedge clk) begin
    if (push_i && !full_o) begin
      addr_mem[wr_ptr] <= push_addr_i;
      data_mem[wr_ptr] <= push_data_i;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + CW'(do_push) - CW'(do_pop);
    end
  end

  always_comb begin
    fwd_hit_o  = 1'b0;
    fwd_data_o = '0;
    for (int unsigned i = 0; i < DEPTH; i++) begin
      logic [AW-1:0] idx;
      idx = AW'((32'(rd_ptr) + i) % DEPTH);
      if (i < 32'(count) && addr_mem[idx] == fwd_addr_i) begin
        fwd_hit_o  = 1'b1;
        fwd_data_o = data_mem[idx];
      end
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push_i |-> !full_o);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop_i  |-> !empty_o);

endmodule
