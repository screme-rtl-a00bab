// bit_gearbox: width converter used by the on-DIMM data buffer.
//
// Accepts IN_W bits per cycle when in_valid_i is high and releases OUT_W bits
// when out_ready_i is high and at least OUT_W bits are held. Bits leave in the
// order they arrived, least significant first. CAP bounds the bits held; pushing
// into a full store is a protocol error (checked by an assertion).
// Implementation: a shift register of CAP bits with a fill counter; in and out may
// happen in the same cycle. Timing: bits can leave the cycle after they arrive.
// Own choice: the paper asks only that the buffer match a 2-bit full-rate link to a
// 4-bit half-rate chip; the gearbox structure and bit order are not given there.
module bit_gearbox #(
  parameter int unsigned IN_W  = 2,
  parameter int unsigned OUT_W = 4,
  parameter int unsigned CAP   = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid_i,
  input  logic [IN_W-1:0]  in_data_i,
  input  logic             out_ready_i,
  output logic             out_valid_o,
  output logic [OUT_W-1:0] out_data_o
);

  localparam int unsigned LW = $clog2(CAP + 1);

  logic [CAP-1:0] store;
  logic [LW-1:0]  level;

  assign out_valid_o = (level >= LW'(OUT_W));
  assign out_data_o  = store[OUT_W-1:0];

  logic [CAP-1:0] s;
  logic [LW-1:0]  l;

  always_comb begin
      s = store;
      l = level;
      if (out_ready_i && out_valid_o) begin
        s = s >> OUT_W;
        l = l - LW'(OUT_W);
      end
      if (in_valid_i && (32'(l) + IN_W <= CAP)) begin
        s = s | (CAP'(in_data_i) << l);
        l = l + LW'(IN_W);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      store <= '0;
      level <= '0;
    end else begin
      store <= s;
      level <= l;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid_i |-> (32'(level) + IN_W <= CAP + ((out_ready_i && out_valid_o) ? OUT_W : 0)));

endmodule
