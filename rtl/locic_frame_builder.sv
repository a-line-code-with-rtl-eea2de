// locic_frame_builder -- assembles the 8-bit LOCic word stream for the 8:1
// serializer.
//
// A frame is 16 word slots at 640 MHz. The builder tracks the slot of the
// word the Sync FIFO presents (slot 0 comes with frame_start_i, the frame
// clock) and from it drives the enables of the other encoder blocks:
//   scr_en_o / crc_en_o  slots 0..13 (data D0..D13; the "SCR/CRC Clk"),
//   crc_clr_o            slot 0 (start a new CRC),
//   prbs_en_o            slot 0 (move the PRBS generator to this frame;
//                        the "BCID Clk").
// One cycle later the scrambled word of that slot arrives, and the builder
// registers the output word: scrambled data for slots 0..13, the CRC field
// T0..T7 for slot 14 and T8..T15 from the PRBS generator for slot 15. Bit c
// of every word belongs to channel c, so each channel keeps the ADC's own
// serial format (D0..D13, then two control bits).
//
// Interface / timing: enables are combinational from frame_start_i and the
// slot counter; tx_data_o is registered, two cycles after the FIFO word
// (one in the scrambler, one here). tx_frame_o marks slot 0 of tx_data_o.
// Until the first frame_start_i nothing is enabled and zeros are sent.
// The slot layout is the line code's; the enable scheme is this design's
// reading of the encoder block diagram.
module locic_frame_builder (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       frame_start_i,
  input  logic [7:0] scr_data_i,
  input  logic [7:0] crc_t_i,     // T0..T7, T0 in bit 0
  input  logic [7:0] prbs_t_i,    // T8..T15, T8 in bit 0
  output logic       scr_en_o,
  output logic       crc_en_o,
  output logic       crc_clr_o,
  output logic       prbs_en_o,
  output logic [7:0] tx_data_o,
  output logic       tx_frame_o
);
  import locic_pkg::*;

  logic [3:0] slot_q, slot, slot_d1;
  logic       started, active, active_d1;

  assign active = started | frame_start_i;
  assign slot   = frame_start_i ? 4'd0 : slot_q + 4'd1;

  assign scr_en_o  = active && slot < 4'(W8_DATA);
  assign crc_en_o  = scr_en_o;
  assign crc_clr_o = active && slot == 4'd0;
  assign prbs_en_o = crc_clr_o;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot_q     <= 4'd15;
      slot_d1    <= 4'd15;
      started    <= 1'b0;
      active_d1  <= 1'b0;
      tx_data_o  <= '0;
      tx_frame_o <= 1'b0;
    end else begin
      if (frame_start_i) started <= 1'b1;
      slot_q    <= slot;
      slot_d1   <= slot;
      active_d1 <= active;
      tx_frame_o <= active_d1 && slot_d1 == 4'd0;
      if (!active_d1)                      tx_data_o <= '0;
      else if (slot_d1 < 4'(W8_DATA))      tx_data_o <= scr_data_i;
      else if (slot_d1 == 4'(W8_DATA))     tx_data_o <= crc_t_i;
      else                                 tx_data_o <= prbs_t_i;
    end
  end

endmodule
