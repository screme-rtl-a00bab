// io_gating_unit: configurable I/O gating of one DRAM chip (common x4/x8 die).
//
// DRAM makers build x4, x8 and x16 parts from one die and fuse off unused I/O.
// SCREME exposes the choice to the system: a chip in an x8 package can run as
// x8, as x4 on its left (group 0) or right (group 1) half of the pins, or as x2 on
// one of four pin pairs (group 0..3). This block steers the chip's internal bus
// to the enabled pins. A burst is always 16 beats, so one burst moves 16*W bits
// (x2: 32, x4: 64, x8: 128) between the pins and the internal word.
//   Write: on each beat_en_i with dq_valid_i high, the W enabled pins are shifted
//   in; after 16 beats arr_we_o pulses for one cycle with the assembled word,
//   beat b / enabled pin j at word bit b*W + j.
//   Read:  rd_load_i loads a word; on each following beat_en_i the next W bits are
//   driven on the enabled pins with dq_oe_o set, 16 beats in all (rd_busy_o).
// beat_en_i sets the chip's data rate (every cycle for a full-speed chip, every
// second cycle for a half-rate slow chip). The pin groups and the x2/x4/x8 choice
// follow the paper (Fig. 2, 6a, 7a); the bit order and handshake are own choices.
module io_gating_unit
  import screme_pkg::*;
#(
  parameter int unsigned BL = BURST_LEN
) (
  input  logic        clk,
  input  logic        rst_n,
  input  io_mode_e    cfg_mode_i,
  input  logic [1:0]  cfg_group_i,
  input  logic        beat_en_i,
  // pins
  input  logic        dq_valid_i,
  input  logic [7:0]  dq_i,
  output logic [7:0]  dq_o,
  output logic [7:0]  dq_oe_o,
  // internal bus to the array
  output logic        arr_we_o,
  output logic [127:0] arr_wdata_o,
  input  logic        rd_load_i,
  input  logic [127:0] rd_word_i,
  output logic        rd_busy_o,
  output logic [7:0]  pin_en_o
);

  localparam int unsigned CW = $clog2(BL + 1);

  logic [7:0]   pin_en;
  logic [2:0]   base;
  logic [127:0] wsh, rsh;
  logic [CW-1:0] wcnt, rcnt;
  logic [7:0]   dq_gath;

  // enabled pins and the first of them
  always_comb begin
    unique case (cfg_mode_i)
      IO_X2:   begin pin_en = 8'h03 << (2 * cfg_group_i);      base = {cfg_group_i, 1'b0}; end
      IO_X4:   begin pin_en = 8'h0F << (4 * cfg_group_i[0]);   base = {cfg_group_i[0], 2'b00}; end
      IO_X8:   begin pin_en = 8'hFF;                           base = 3'd0; end
      default: begin pin_en = 8'h00;                           base = 3'd0; end
    endcase
  end
  assign pin_en_o = pin_en;

  // enabled pins packed down to bit 0
  assign dq_gath = dq_i >> base;

  logic [127:0] nsh;
  always_comb begin
    unique case (cfg_mode_i)
      IO_X2:   nsh = {dq_gath[1:0], wsh[127:2]};
      IO_X4:   nsh = {dq_gath[3:0], wsh[127:4]};
      default: nsh = {dq_gath[7:0], wsh[127:8]};
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wsh      <= '0;
      wcnt     <= '0;
      arr_we_o <= 1'b0;
      arr_wdata_o <= '0;
    end else begin
      arr_we_o <= 1'b0;
      if (beat_en_i && dq_valid_i && cfg_mode_i != IO_OFF) begin
        wsh <= nsh;
        if (wcnt == CW'(BL - 1)) begin
          wcnt     <= '0;
          arr_we_o <= 1'b1;
          unique case (cfg_mode_i)
            IO_X2:   arr_wdata_o <= nsh >> (128 - 2 * BL);
            IO_X4:   arr_wdata_o <= nsh >> (128 - 4 * BL);
            default: arr_wdata_o <= nsh >> (128 - 8 * BL);
          endcase
        end else begin
          wcnt <= wcnt + 1'b1;
        end
      end
    end
  end

  // read: serialize a word onto the enabled pins
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsh     <= '0;
      rcnt    <= '0;
      dq_o    <= '0;
      dq_oe_o <= '0;
    end else begin
      if (rd_load_i) begin
        rsh     <= rd_word_i;
        rcnt    <= CW'(BL);
        dq_oe_o <= '0;
      end else if (beat_en_i) begin
        if (rcnt != '0) begin
          unique case (cfg_mode_i)
            IO_X2:   begin dq_o <= 8'(rsh[1:0]) << base; rsh <= rsh >> 2; end
            IO_X4:   begin dq_o <= 8'(rsh[3:0]) << base; rsh <= rsh >> 4; end
            default: begin dq_o <= rsh[7:0];             rsh <= rsh >> 8; end
          endcase
          dq_oe_o <= pin_en;
          rcnt    <= rcnt - 1'b1;
        end else begin
          dq_oe_o <= '0;
        end
      end
    end
  end
  assign rd_busy_o = (rcnt != '0);

endmodule
