// tb_ssc_detector: clean codewords pass; any single-symbol error (data or p0)
// is flagged in exactly its codeword.
// Interface: no ports; drives the unit under test directly, uses
// $urandom for stimulus, ends with one TB_RESULT line and $finish, and has a
// watchdog that counts a failure if the run hangs. Expected values come from own
// reference models, written from the behaviour the paper describes.
module tb_ssc_detector;
  import tb_ref_pkg::*;
  logic [511:0] data;
  logic [63:0]  p0, e0, e1;
  logic [7:0]   err_cw;
  logic         det;
  int checks = 0, failures = 0;

  ssc_detector dut (.data_i(data), .p0_i(p0), .err_cw_o(err_cw), .detected_o(det));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      logic [511:0] l;
      int k, c;
      logic [7:0] v;
      l = rand_line();
      ref_encode(l, e0, e1);
      data = l; p0 = e0; #1;
      checks++; if (det !== 1'b0 || err_cw !== '0) failures++;
      k = $urandom_range(0, 7); c = $urandom_range(0, 8);
      v = 8'($urandom_range(1, 255));
      if (c < 8) data[(k*8 + c)*8 +: 8] ^= v;
      else       p0[k*8 +: 8] ^= v;
      #1;
      checks++;
      if (det !== 1'b1 || err_cw !== (8'h01 << k)) begin
        failures++; $display("miss k=%0d c=%0d err_cw=%b", k, c, err_cw);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
