// locic_crc_checker -- checks the CRC-8 of each received frame.
//
// Recomputes the CRC (P(x) = x^8+x^5+x^3+x^2+x+1, register cleared at word 0,
// bits in received order) over the seven descrambled data words of a frame
// and, when the control word (widx_i = 7) arrives, compares it with T0..T7.
// A frame that did not bring exactly seven data words since the previous
// control word (possible right after a pointer change) fails the check.
//
// Outputs: data_o/widx_o (the recovered words, one cycle later),
// data_valid_o (a data word of a frame received while in SYNC),
// crc_flag_o (1 = CRC of the last complete frame correct; updated with the
// control word and held), crc_strobe_o (one-cycle pulse with each update),
// frame_flag_o (decoder in SYNC, i.e. data valid).
// Timing: one register stage. The word-count rule is this design's.
module locic_crc_checker (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] data_i,
  input  logic [2:0]  widx_i,
  input  logic        lock_i,
  output logic [15:0] data_o,
  output logic [2:0]  widx_o,
  output logic        data_valid_o,
  output logic        crc_flag_o,
  output logic        crc_strobe_o,
  output logic        frame_flag_o
);
  import locic_pkg::*;

  logic [7:0] crc;
  logic [2:0] nwords;
  logic       is_ctrl;

  assign is_ctrl = (widx_i == 3'(W16_PER_FRAME - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      crc          <= '0;
      nwords       <= '0;
      data_o       <= '0;
      widx_o       <= '0;
      data_valid_o <= 1'b0;
      crc_flag_o   <= 1'b0;
      crc_strobe_o <= 1'b0;
      frame_flag_o <= 1'b0;
    end else begin
      data_o       <= data_i;
      widx_o       <= widx_i;
      frame_flag_o <= lock_i;
      data_valid_o <= lock_i && !is_ctrl;
      crc_strobe_o <= is_ctrl;
      if (is_ctrl) begin
        crc_flag_o <= lock_i && nwords == 3'(W16_DATA) && crc_to_t(crc) == data_i[7:0];
        nwords     <= '0;
      end else begin
        crc    <= crc8_w16((widx_i == 3'd0) ? 8'h00 : crc, data_i);
        nwords <= (widx_i == 3'd0) ? 3'd1 : nwords + 3'd1;
      end
    end
  end

endmodule
