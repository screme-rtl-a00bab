// tb_parity_buffer: FIFO order, entries leave only after their data write was
// issued, full flag at 32 entries, newest-entry lookup.
// Interface: no ports; drives the unit under test directly, uses
// $urandom for stimulus, ends with one TB_RESULT line and $finish, and has a
// watchdog that counts a failure if the run hangs. Expected values come from own
// reference models, written from the behaviour the paper describes.
module tb_parity_buffer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push, mark, pop, full, empty, hit;
  logic [31:0] paddr, haddr, laddr;
  logic [63:0] ppar, hpar, lpar;
  logic [5:0] count, issued;
  int checks = 0, failures = 0;

  parity_buffer dut (.clk, .rst_n, .push_i(push), .push_addr_i(paddr), .push_par_i(ppar),
    .mark_issued_i(mark), .pop_i(pop), .head_addr_o(haddr), .head_par_o(hpar), .full_o(full),
    .empty_o(empty), .count_o(count), .issued_cnt_o(issued), .lookup_addr_i(laddr),
    .lookup_hit_o(hit), .lookup_par_o(lpar));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; mark = 0; pop = 0; paddr = 0; ppar = 0; laddr = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 32; i++) begin
      @(negedge clk); push = 1; paddr = 32'(i % 20); ppar = {32'hABCD0000, 32'(i)};
    end
    @(negedge clk); push = 0;
    checks++; if (!full || count != 6'd32 || issued != 0) failures++;
    // lookup of address 5: entries 5 and 25 -> newest is 25
    laddr = 5; #1;
    checks++; if (!hit || lpar !== {32'hABCD0000, 32'd25}) failures++;
    laddr = 99; #1;
    checks++; if (hit) failures++;
    // nothing may leave before it is issued
    checks++; if (issued != 0) failures++;
    for (int i = 0; i < 32; i++) begin
      @(negedge clk); mark = 1;
      @(negedge clk); mark = 0;
      checks++; if (issued != 6'd1 || hpar !== {32'hABCD0000, 32'(i)}) begin failures++; $display("head %0d %h", i, hpar); end
      pop = 1; @(negedge clk); pop = 0;
    end
    checks++; if (!empty || count != 0) failures++;
    // mark with nothing queued must not count
    @(negedge clk); mark = 1; @(negedge clk); mark = 0;
    checks++; if (issued != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
