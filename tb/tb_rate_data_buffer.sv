// tb_rate_data_buffer: a random 2-bit full-rate stream must appear unchanged as
// 4-bit beats on the half-rate chip side, no earlier than the buffer latency; and
// 4-bit beats from the chip come back as the same bits on the 2-bit host side.
// Interface: no ports; drives the unit under test directly, uses
// $urandom for stimulus, ends with one TB_RESULT line and $finish, and has a
// watchdog that counts a failure if the run hangs. Expected values come from own
// reference models, written from the behaviour the paper describes.
module tb_rate_data_buffer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic hv, hrv, cbeat, cdv, crv;
  logic [1:0] hdq, hrdq;
  logic [3:0] cdq, crdq;
  int checks = 0, failures = 0;

  rate_data_buffer dut (.clk, .rst_n, .host_valid_i(hv), .host_dq_i(hdq),
    .host_rd_valid_o(hrv), .host_rd_dq_o(hrdq), .chip_beat_o(cbeat),
    .chip_dq_valid_o(cdv), .chip_dq_o(cdq), .chip_rd_valid_i(crv), .chip_rd_dq_i(crdq));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit sent [$];
  bit got  [$];
  bit rsent [$];
  bit rgot  [$];
  int cyc = 0, first_in = -1, first_out = -1;
  // sample only out of reset: before the first clock edge the flops hold
  // arbitrary power-up values
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (hv) begin sent.push_back(hdq[0]); sent.push_back(hdq[1]); if (first_in < 0) first_in = cyc; end
    if (cdv) begin for (int b = 0; b < 4; b++) got.push_back(cdq[b]); if (first_out < 0) first_out = cyc; end
    if (crv) for (int b = 0; b < 4; b++) rsent.push_back(crdq[b]);
    if (hrv) begin rgot.push_back(hrdq[0]); rgot.push_back(hrdq[1]); end
  end

  initial begin
    hv = 0; hdq = 0; crv = 0; crdq = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int line = 0; line < 8; line++) begin
      repeat (32) begin @(negedge clk); hv = 1; hdq = 2'($urandom); end
      @(negedge clk); hv = 0;
      repeat ($urandom_range(0, 20)) @(negedge clk);
    end
    repeat (80) @(negedge clk);
    checks++; if (got.size() != sent.size()) begin failures++; $display("wr %0d vs %0d", got.size(), sent.size()); end
    foreach (got[i]) if (i < sent.size()) begin checks++; if (got[i] != sent[i]) failures++; end
    checks++; if (first_out - first_in < 4) begin failures++; $display("latency %0d", first_out - first_in); end
    // read direction: chip sends one 4-bit beat per chip beat
    for (int line = 0; line < 8; line++) begin
      int n;
      n = 0;
      while (n < 16) begin
        @(negedge clk);
        crv = cbeat; crdq = 4'($urandom);
        if (cbeat) n++;
      end
      @(negedge clk); crv = 0;
      repeat ($urandom_range(0, 20)) @(negedge clk);
    end
    repeat (80) @(negedge clk);
    checks++; if (rgot.size() != rsent.size()) begin failures++; $display("rd %0d vs %0d", rgot.size(), rsent.size()); end
    foreach (rgot[i]) if (i < rsent.size()) begin checks++; if (rgot[i] != rsent[i]) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
