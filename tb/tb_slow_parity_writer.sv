// tb_slow_parity_writer: a parity-buffer model feeds random lines, a storage
// model captures what appears on the wires (wide: a 4-bit beat per slow tick,
// narrow: 2 bits per cycle) and answers read commands. Checks: every stored line
// equals what was queued, wide beats are held for two cycles (each bit sent
// twice), a wide line takes 32 cycles, fetches are forwarded from the buffer on a
// hit and read back from storage on a miss.
// Interface: no ports; drives the unit under test directly, uses
// $urandom for stimulus, ends with one TB_RESULT line and $finish, and has a
// watchdog that counts a failure if the run hangs. Expected values come from own
// reference models, written from the behaviour the paper describes.
module tb_slow_parity_writer;
  import screme_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic pb_avail, pb_pop, lk_hit, wr_narrow, rd_narrow, p1_req, p1_valid, tick;
  logic cmd_valid, cmd_we, cmd_narrow, dq_valid, rdq_valid, busy;
  logic [31:0] pb_addr, lk_addr, p1_addr, cmd_addr, n_wr, n_fe, n_fw;
  logic [63:0] pb_par, lk_par, p1;
  logic [3:0] dq, rdq;
  int checks = 0, failures = 0;

  slow_parity_writer dut (.clk, .rst_n, .pb_avail_i(pb_avail), .pb_addr_i(pb_addr),
    .pb_par_i(pb_par), .pb_pop_o(pb_pop), .lk_addr_o(lk_addr), .lk_hit_i(lk_hit),
    .lk_par_i(lk_par), .wr_narrow_i(wr_narrow), .rd_narrow_i(rd_narrow), .p1_req_i(p1_req),
    .p1_addr_i(p1_addr), .p1_valid_o(p1_valid), .p1_o(p1), .slow_tick_o(tick),
    .cmd_valid_o(cmd_valid), .cmd_we_o(cmd_we), .cmd_narrow_o(cmd_narrow),
    .cmd_addr_o(cmd_addr), .dq_o(dq), .dq_valid_o(dq_valid), .rdq_i(rdq),
    .rdq_valid_i(rdq_valid), .busy_o(busy), .n_writes_o(n_wr), .n_fetch_o(n_fe), .n_fwd_o(n_fw));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // parity-buffer model
  logic [31:0] qa [$];
  logic [63:0] qp [$];
  assign pb_avail = qa.size() > 0;
  assign pb_addr  = pb_avail ? qa[0] : '0;
  assign pb_par   = pb_avail ? qp[0] : '0;
  assign wr_narrow = pb_addr >= 12;       // first half of the lines wide, rest narrow
  always @(posedge clk) if (pb_pop) begin void'(qa.pop_front()); void'(qp.pop_front()); end
  // lookup: newest queued copy
  always_comb begin
    lk_hit = 0; lk_par = '0;
    foreach (qa[i]) if (qa[i] == lk_addr) begin lk_hit = 1; lk_par = qp[i]; end
  end

  // storage model
  logic [63:0] mem [logic [31:0]];
  logic [63:0] wsh;
  int wbits = 0, wstart = 0, cyc = 0, wnar = 0;
  logic [31:0] waddr;
  logic [3:0] prev_dq;
  logic [63:0] rd_word;
  int rd_left = 0, rd_delay = 0, rd_nar = 0;
  always @(posedge clk) begin
    cyc++;
    if (cmd_valid && cmd_we) begin waddr = cmd_addr; wbits = 0; wstart = cyc; wnar = cmd_narrow; end
    if (dq_valid) begin
      if (wnar) begin wsh = {dq[1:0], wsh[63:2]}; wbits += 2; end
      else begin
        checks++; if (dq !== prev_dq) begin failures++; $display("wide beat not held"); end
        wsh = {dq, wsh[63:4]}; wbits += 4;
      end
      if (wbits == 64) begin
        mem[waddr] = wsh;
        checks++; if (!wnar && cyc - wstart != 31) begin failures++; $display("wide took %0d", cyc - wstart); end
      end
    end
    prev_dq = dq;
    if (cmd_valid && !cmd_we) begin
      rd_word = mem.exists(cmd_addr) ? mem[cmd_addr] : 64'hDEAD;
      rd_left = 64; rd_delay = 5; rd_nar = cmd_narrow;
    end
  end
  always @(negedge clk) begin
    rdq_valid = 0; rdq = $urandom;
    if (rd_left > 0) begin
      if (rd_delay > 0) rd_delay--;
      else if (rd_nar || tick) begin
        rdq_valid = 1;
        rdq = rd_nar ? {2'($urandom), rd_word[1:0]} : rd_word[3:0];
        rd_word = rd_nar ? rd_word >> 2 : rd_word >> 4;
        rd_left -= rd_nar ? 2 : 4;
      end
    end
  end

  task automatic fetch(input logic [31:0] a, input logic [63:0] exp);
    @(negedge clk); p1_req = 1; p1_addr = a;
    @(negedge clk); p1_req = 0;
    while (!p1_valid) @(negedge clk);
    checks++; if (p1 !== exp) begin failures++; $display("fetch %h got %h exp %h", a, p1, exp); end
  endtask

  logic [63:0] ref_mem [logic [31:0]];
  initial begin
    rd_narrow = 0; p1_req = 0; p1_addr = 0; rdq_valid = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 24; i++) begin
      logic [63:0] v;
      v = {$urandom, $urandom};
      @(negedge clk); qa.push_back(32'(i)); qp.push_back(v); ref_mem[32'(i)] = v;
    end
    // a fetch while the line is still queued: forwarded from the buffer
    fetch(32'd20, ref_mem[32'd20]);
    while (qa.size() > 0 || busy) @(negedge clk);
    checks++; if (n_wr != 24 || n_fw != 1) failures++;
    foreach (ref_mem[a]) begin
      checks++; if (!mem.exists(a) || mem[a] !== ref_mem[a]) begin failures++; $display("line %0d wrong", a); end
    end
    // fetches from storage: wide and narrow read-back
    rd_narrow = 0; fetch(32'd3, ref_mem[32'd3]);
    rd_narrow = 1; fetch(32'd17, ref_mem[32'd17]);
    checks++; if (n_fe != 2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
