// tb_write_queue: order, full/empty and forwarding of the newest queued copy.
// Interface: no ports; drives the unit under test directly, uses
// $urandom for stimulus, ends with one TB_RESULT line and $finish, and has a
// watchdog that counts a failure if the run hangs. Expected values come from own
// reference models, written from the behaviour the paper describes.
module tb_write_queue;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push, pop, full, empty, hit;
  logic [31:0] paddr, haddr, faddr;
  logic [511:0] pdata, hdata, fdata;
  logic [5:0] count;
  int checks = 0, failures = 0;

  write_queue dut (.clk, .rst_n, .push_i(push), .push_addr_i(paddr), .push_data_i(pdata),
    .pop_i(pop), .head_addr_o(haddr), .head_data_o(hdata), .full_o(full), .empty_o(empty),
    .count_o(count), .fwd_addr_i(faddr), .fwd_hit_o(hit), .fwd_data_o(fdata));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; paddr = 0; pdata = 0; faddr = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    #1; checks++; if (!empty) failures++;
    for (int i = 0; i < 32; i++) begin
      @(negedge clk); push = 1; paddr = 32'(i % 16); pdata = {16{32'(i)}};
    end
    @(negedge clk); push = 0;
    checks++; if (!full || count != 6'd32) failures++;
    faddr = 3; #1;
    checks++; if (!hit || fdata !== {16{32'd19}}) failures++;
    for (int i = 0; i < 32; i++) begin
      checks++; if (haddr !== 32'(i % 16) || hdata !== {16{32'(i)}}) failures++;
      @(negedge clk); pop = 1; @(negedge clk); pop = 0;
    end
    checks++; if (!empty) failures++;
    faddr = 3; #1;                           // popped lines are no longer forwarded
    checks++; if (hit) failures++;
    // push and pop in the same cycle keep the count
    @(negedge clk); push = 1; paddr = 7; pdata = '1;
    @(negedge clk); push = 1; pop = 1; paddr = 8;
    @(negedge clk); push = 0; pop = 0;
    checks++; if (count != 6'd1 || haddr !== 32'd8) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
