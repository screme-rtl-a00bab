// tb_decoupled_ecc_ctrl: clean reads answer one cycle later without touching the
// write-only chip; a detected error raises a p1 fetch and stalls until p1 is
// supplied, then returns corrected data (single error) or DUE (double error).
// Interface: no ports; drives the unit under test directly, uses
// $urandom for stimulus, ends with one TB_RESULT line and $finish, and has a
// watchdog that counts a failure if the run hangs. Expected values come from own
// reference models, written from the behaviour the paper describes.
module tb_decoupled_ecc_ctrl;
  import tb_ref_pkg::*;
  import screme_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic rd_valid, rd_ready, p1_req, p1_valid, stall, resp_valid, err_chip_vld;
  logic [31:0] rd_addr, p1_addr, resp_addr, n_det, n_cor, n_due;
  logic [511:0] rd_data, resp_data;
  logic [63:0] rd_p0, p1;
  ecc_status_e resp_status;
  logic [3:0] err_chip;
  int checks = 0, failures = 0;

  decoupled_ecc_ctrl dut (
    .clk, .rst_n, .rd_valid_i(rd_valid), .rd_ready_o(rd_ready), .rd_addr_i(rd_addr),
    .rd_data_i(rd_data), .rd_p0_i(rd_p0), .p1_req_o(p1_req), .p1_addr_o(p1_addr),
    .p1_valid_i(p1_valid), .p1_i(p1), .stall_o(stall), .resp_valid_o(resp_valid),
    .resp_addr_o(resp_addr), .resp_data_o(resp_data), .resp_status_o(resp_status),
    .err_chip_o(err_chip), .err_chip_vld_o(err_chip_vld),
    .n_detected_o(n_det), .n_corrected_o(n_cor), .n_due_o(n_due));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_read(input logic [511:0] line, input logic [63:0] q0, input logic [63:0] q1,
                         input logic [31:0] a, input int p1_lat, input ecc_status_e exp_st,
                         input logic [511:0] exp_data);
    int cyc;
    bit got_req;
    @(negedge clk);
    rd_valid = 1; rd_data = line; rd_p0 = q0; rd_addr = a;
    @(negedge clk);
    rd_valid = 0;
    cyc = 1; got_req = 0;
    while (!resp_valid) begin
      if (p1_req) begin
        got_req = 1;
        checks++; if (p1_addr !== a) failures++;
        repeat (p1_lat) begin
          checks++; if (!stall) failures++;
          @(negedge clk); cyc++;
        end
        p1_valid = 1; p1 = q1;
        @(negedge clk); cyc++;
        p1_valid = 0;
      end else begin
        @(negedge clk); cyc++;
      end
      if (cyc > 200) break;
    end
    checks++;
    if (resp_status !== exp_st || resp_addr !== a || (exp_st != ECC_DUE && resp_data !== exp_data)) begin
      failures++; $display("read st=%0d exp=%0d", resp_status, exp_st);
    end
    // latency: clean = 1 cycle; with a fetch = 1 (detect) + p1_lat + 1 (capture) + 1 (correct)
    checks++;
    if (exp_st == ECC_CLEAN ? (cyc != 1 || got_req) : (cyc != p1_lat + 3)) begin
      failures++; $display("latency %0d (p1_lat %0d)", cyc, p1_lat);
    end
  endtask

  initial begin
    logic [511:0] l, bad;
    logic [63:0] q0, q1;
    rd_valid = 0; p1_valid = 0; rd_data = '0; rd_p0 = '0; rd_addr = '0; p1 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      int c;
      l = rand_line(); ref_encode(l, q0, q1);
      do_read(l, q0, q1, 32'(t), 0, ECC_CLEAN, l);
      bad = l; c = $urandom_range(0, 7);
      bad[(2*8 + c)*8 +: 8] ^= 8'h5A;                         // one chip wrong
      do_read(bad, q0, q1, 32'(100 + t), 6 + t, ECC_CORRECTED, l);
      checks++; if (err_chip !== 4'(c)) failures++;
    end
    // two chips wrong in one codeword with values chosen to be uncorrectable
    l = rand_line(); ref_encode(l, q0, q1);
    bad = l; bad[(0*8 + 0)*8 +: 8] ^= 8'h01; bad[(0*8 + 1)*8 +: 8] ^= 8'h01;
    begin
      logic [511:0] fx;
      int r;
      r = ref_decode(bad, q0, q1, fx);
      // S0 = 0 here, which the detect phase cannot see: returned as clean (SDC)
      do_read(bad, q0, q1, 32'h77, 4, r == 0 ? ECC_CLEAN : ECC_CLEAN, bad);
    end
    bad = l; bad[(0*8 + 0)*8 +: 8] ^= 8'h01; bad[(0*8 + 1)*8 +: 8] ^= 8'h02;
    begin
      logic [511:0] fx;
      int r;
      r = ref_decode(bad, q0, q1, fx);
      do_read(bad, q0, q1, 32'h78, 4, r == 2 ? ECC_DUE : ECC_CORRECTED, fx);
    end
    checks++; if (n_det !== 32'd21 || n_cor + n_due !== 32'd21) begin failures++; $display("counters %0d %0d %0d", n_det, n_cor, n_due); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
