// locic_crc_gen -- CRC-8 generator of the LOCic encoder.
//
// Computes the CRC with P(x) = x^8+x^5+x^3+x^2+x+1 over the raw (not yet
// scrambled) data bits of a frame, eight bits per 640 MHz cycle. Bit 0 of the
// word (channel 0) is taken first, matching the serial order on the fibre.
// The register is cleared with the first data word of a frame (clr_i together
// with en_i) and absorbs every word with en_i high, i.e. D0..D13 = 112 bits.
//
// Interface / timing: one cycle of latency. After the last data word has been
// clocked in, crc_o holds the CRC of the frame and t_o the field T0..T7
// (t_o[k] = T_k = CRC bit 7-k) until the next frame clears it. The CRC start
// value 0 and the bit order are this design's choices; the polynomial and the
// 112-bit message are the line code's.
module locic_crc_gen (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en_i,
  input  logic       clr_i,
  input  logic [7:0] data_i,
  output logic [7:0] crc_o,
  output logic [7:0] t_o
);
  import locic_pkg::*;

  logic [7:0] crc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) crc <= '0;
    else if (en_i) crc <= crc8_w8(clr_i ? 8'h00 : crc, data_i);
  end

  assign crc_o = crc;
  assign t_o   = crc_to_t(crc);

endmodule
