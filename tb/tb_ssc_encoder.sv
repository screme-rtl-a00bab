// tb_ssc_encoder: random lines, p0/p1 compared with the table-based reference.
// Interface: no ports; drives the unit under test directly, uses
// $urandom for stimulus, ends with one TB_RESULT line and $finish, and has a
// watchdog that counts a failure if the run hangs. Expected values come from own
// reference models, written from the behaviour the paper describes.
module tb_ssc_encoder;
  import tb_ref_pkg::*;
  logic [511:0] data;
  logic [63:0]  p0, p1, e0, e1;
  int checks = 0, failures = 0;

  ssc_encoder dut (.data_i(data), .p0_o(p0), .p1_o(p1));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    data = '0; #1;
    checks++; if (p0 !== '0 || p1 !== '0) failures++;
    // single non-zero symbol: p1 must show alpha^c
    for (int c = 0; c < 8; c++) begin
      data = '0; data[(3*8 + c)*8 +: 8] = 8'h01; #1;
      checks++;
      if (p0[3*8 +: 8] !== 8'h01 || p1[3*8 +: 8] !== ref_apow(c)) begin
        failures++; $display("unit c=%0d p1=%h", c, p1[3*8 +: 8]);
      end
    end
    for (int t = 0; t < 500; t++) begin
      data = rand_line(); #1;
      ref_encode(data, e0, e1);
      checks++;
      if (p0 !== e0 || p1 !== e1) begin failures++; $display("mismatch %h %h / %h %h", p0, e0, p1, e1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
