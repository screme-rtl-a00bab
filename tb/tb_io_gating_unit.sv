// tb_io_gating_unit: for every mode and pin group, a 16-beat write on the
// enabled pins must assemble into the array word (beat b, pin j -> bit b*W+j),
// disabled pins must be ignored, and a read must drive the word back on exactly
// the enabled pins, W bits per beat, honouring a half-rate beat enable.
// Interface: no ports; drives the unit under test directly, uses
// $urandom for stimulus, ends with one TB_RESULT line and $finish, and has a
// watchdog that counts a failure if the run hangs. Expected values come from own
// reference models, written from the behaviour the paper describes.
module tb_io_gating_unit;
  import screme_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  io_mode_e mode;
  logic [1:0] grp;
  logic beat_en, dqv, we, rd_load, rd_busy;
  logic [7:0] dq_i, dq_o, oe, pin_en;
  logic [127:0] wdata, rword;
  int checks = 0, failures = 0;

  io_gating_unit dut (.clk, .rst_n, .cfg_mode_i(mode), .cfg_group_i(grp), .beat_en_i(beat_en),
    .dq_valid_i(dqv), .dq_i(dq_i), .dq_o(dq_o), .dq_oe_o(oe), .arr_we_o(we),
    .arr_wdata_o(wdata), .rd_load_i(rd_load), .rd_word_i(rword), .rd_busy_o(rd_busy),
    .pin_en_o(pin_en));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit half;
  int n_we = 0;
  logic [127:0] last_w;
  always @(posedge clk) if (we) begin n_we++; last_w = wdata; end
  always @(posedge clk) beat_en <= half ? ~beat_en : 1'b1;

  int w, base, n0, rb;
  logic [127:0] exp, got;
  logic [7:0] en, v;
  bit seen;

  task run(input io_mode_e m, input logic [1:0] g);
    w = (m == IO_X2) ? 2 : (m == IO_X4) ? 4 : 8;
    base = (m == IO_X2) ? 2 * g : (m == IO_X4) ? 4 * g[0] : 0;
    en = 8'(((1 << w) - 1) << base);
    mode = m; grp = g;
    @(negedge clk);
    checks++; if (pin_en !== en) failures++;
    exp = '0; seen = 0; n0 = n_we;
    for (int b = 0; b < 16; b++) begin
      do @(negedge clk); while (!beat_en);
      v = 8'($urandom);
      dqv = 1; dq_i = v;
      for (int j = 0; j < w; j++) exp[b*w + j] = v[base + j];
      @(negedge clk); dqv = 0; dq_i = 8'($urandom);
    end
    repeat (3) @(negedge clk);
    seen = (n_we == n0 + 1); got = last_w;
    checks++; if (!seen || ((got ^ exp) & ((128'd1 << (16*w)) - 1)) != 0) begin failures++; $display("%0t wr mode %0d grp %0d n_we %0d n0 %0d got %h exp %h", $time, m, g, n_we, n0, got, exp); end
    // read back
    rword = {$urandom, $urandom, $urandom, $urandom};
    @(negedge clk); rd_load = 1;
    @(negedge clk); rd_load = 0;
    begin
      rb = 0;
      while (rb < 16) begin
        @(posedge clk); #1;
        if (oe != 8'h00) begin
          checks++;
          if (oe !== en) failures++;
          for (int j = 0; j < w; j++) if (dq_o[base + j] !== rword[rb*w + j]) begin failures++; break; end
          rb++;
          // consume this beat's cycle until the next enable
          while (!(beat_en === 1'b1)) @(posedge clk);
        end
        if (rb == 0 && !rd_busy) begin failures++; break; end
      end
    end
    repeat (4) @(negedge clk);
  endtask

  initial begin
    mode = IO_X4; grp = 0; beat_en = 1; dqv = 0; dq_i = 0; rd_load = 0; rword = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int hr = 0; hr < 2; hr++) begin
      half = hr[0];
      for (int g = 0; g < 4; g++) run(IO_X2, 2'(g));
      for (int g = 0; g < 2; g++) run(IO_X4, 2'(g));
      run(IO_X8, 0);
    end
    mode = IO_OFF; @(negedge clk);
    checks++; if (pin_en !== 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
