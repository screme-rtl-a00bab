// tb_spare_switch_array: random traffic on all 20 pairs with the switch open and
// closed on each pair in turn: unswitched pairs pass straight through in both
// directions, the switched pair goes only to and from the spare side.
// Interface: no ports; drives the unit under test directly, uses
// $urandom for stimulus, ends with one TB_RESULT line and $finish, and has a
// watchdog that counts a failure if the run hangs. Expected values come from own
// reference models, written from the behaviour the paper describes.
module tb_spare_switch_array;
  localparam int N = 20;
  logic sw_en;
  logic [4:0] sw_pair;
  logic [1:0] pdq [N], hrd [N], cdq [N], crd [N];
  logic [N-1:0] pv, hrv, cv, crv;
  logic [1:0] sdq, srd;
  logic sv, srv;
  int checks = 0, failures = 0;

  spare_switch_array dut (.sw_en_i(sw_en), .sw_pair_i(sw_pair), .pair_dq_i(pdq),
    .pair_valid_i(pv), .host_rd_dq_o(hrd), .host_rd_valid_o(hrv), .chip_dq_o(cdq),
    .chip_valid_o(cv), .chip_rd_dq_i(crd), .chip_rd_valid_i(crv), .spare_dq_o(sdq),
    .spare_valid_o(sv), .spare_rd_dq_i(srd), .spare_rd_valid_i(srv));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 420; t++) begin
      sw_en = t >= 20;
      sw_pair = 5'(t % N);
      foreach (pdq[i]) begin pdq[i] = 2'($urandom); crd[i] = 2'($urandom); end
      pv = N'($urandom); crv = N'($urandom); srd = 2'($urandom); srv = 1'($urandom);
      #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (sw_en && i == int'(sw_pair)) begin
          if (cv[i] !== 1'b0 || hrd[i] !== srd || hrv[i] !== srv) failures++;
        end else begin
          if (cv[i] !== pv[i] || (pv[i] && cdq[i] !== pdq[i]) || hrv[i] !== crv[i] ||
              (crv[i] && hrd[i] !== crd[i])) failures++;
        end
      end
      checks++;
      if (sw_en ? (sv !== pv[sw_pair] || (pv[sw_pair] && sdq !== pdq[sw_pair])) : sv !== 1'b0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
