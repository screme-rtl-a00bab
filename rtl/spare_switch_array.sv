// spare_switch_array: the switch array of SCREME-Framewk that ties the pool of
// spare (slow) chips to the module's data wires.
//
// The data wires of a sub-channel are grouped in 2-bit pairs (column c owns pairs
// 2c and 2c+1). Exactly one pair can be switched to the spare pool (sw_en_i,
// sw_pair_i). The switched pair is then carried to the spare pool's data buffer
// in both directions and is cut from the chip side, since the chip that used it
// runs at x2 on its other pair; every other pair passes straight through.
//   host -> module: pair_dq_i/pair_valid_i -> chip_dq_o/chip_valid_o or spare_dq_o
//   module -> host: chip_rd_dq_i or spare_rd_dq_i -> host_rd_dq_o/host_rd_valid_o
// A switch per 2-bit pair follows the paper (Fig. 8a); allowing a single closed
// switch at a time is this design's choice. Combinational.
module spare_switch_array #(
  parameter int unsigned NPAIRS = 20
) (
  input  logic                      sw_en_i,
  input  logic [$clog2(NPAIRS)-1:0] sw_pair_i,
  // host side
  input  logic [1:0]                pair_dq_i      [NPAIRS],
  input  logic [NPAIRS-1:0]         pair_valid_i,
  output logic [1:0]                host_rd_dq_o   [NPAIRS],
  output logic [NPAIRS-1:0]         host_rd_valid_o,
  // chip side
  output logic [1:0]                chip_dq_o      [NPAIRS],
  output logic [NPAIRS-1:0]         chip_valid_o,
  input  logic [1:0]                chip_rd_dq_i   [NPAIRS],
  input  logic [NPAIRS-1:0]         chip_rd_valid_i,
  // spare-pool side (to its data buffer)
  output logic [1:0]                spare_dq_o,
  output logic                      spare_valid_o,
  input  logic [1:0]                spare_rd_dq_i,
  input  logic                      spare_rd_valid_i
);

  always_comb begin
    spare_dq_o    = '0;
    spare_valid_o = 1'b0;
    for (int unsigned i = 0; i < NPAIRS; i++) begin
      if (sw_en_i && sw_pair_i == $clog2(NPAIRS)'(i)) begin
        chip_dq_o[i]       = '0;
        chip_valid_o[i]    = 1'b0;
        spare_dq_o         = pair_dq_i[i];
        spare_valid_o      = pair_valid_i[i];
        host_rd_dq_o[i]    = spare_rd_dq_i;
        host_rd_valid_o[i] = spare_rd_valid_i;
      end else begin
        chip_dq_o[i]       = pair_dq_i[i];
        chip_valid_o[i]    = pair_valid_i[i];
        host_rd_dq_o[i]    = chip_rd_dq_i[i];
        host_rd_valid_o[i] = chip_rd_valid_i[i];
      end
    end
  end

endmodule
