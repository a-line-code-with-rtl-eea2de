// locic_data_extractor -- realigns the deserializer words to the frame.
//
// The deserializer delivers 16-bit words (bit 0 received first) at 320 MHz
// with an arbitrary bit phase with respect to the 128-bit frame. The
// extractor keeps the last three words in a 48-bit window and a free-running
// word counter. The frame boundary pointer pos_i (0..127, owned by the
// synchronizer) names the bit, counted in the deserializer's own word grid
// modulo 128, at which the control word T0..T15 of a frame starts:
// pos_i[6:4] is the word phase and pos_i[3:0] the bit offset.
//
// Towards the synchronizer (combinational, same cycle):
//   slot_o      the window currently holds the control word at pos_i,
//   cand_o[0]   control word one bit earlier   (pointer - 1),
//   cand_o[1]   control word at the pointer,
//   cand_o[2]   control word one bit later     (pointer + 1).
// Providing all three at once lets a one-bit slip be followed within one
// frame. Towards the descrambler (registered): word_o, the 16 bits at the
// pointer, with widx_o its index in the frame (7 = control word).
//
// Timing: three register stages from rx_data_i to word_o (input register,
// window, output register), i.e. about 9.4 ns at 320 MHz, the latency
// measured for this block in the source. The window scheme is this design's.
module locic_data_extractor (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [15:0]      rx_data_i,
  input  logic [6:0]       pos_i,
  output logic             slot_o,
  output logic [2:0][15:0] cand_o,
  output logic [15:0]      word_o,
  output logic [2:0]       widx_o
);
  logic [15:0] r0, r1, r2;
  logic [47:0] win;
  logic [2:0]  wcnt;      // word index (mod 8) of r1 in the deserializer grid
  logic [5:0]  base;

  assign win   = {r0, r1, r2};
  assign base  = 6'd16 + 6'(pos_i[3:0]);
  assign slot_o = (wcnt == pos_i[6:4]);

  assign cand_o[0] = win[base - 6'd1 +: 16];
  assign cand_o[1] = win[base        +: 16];
  assign cand_o[2] = win[base + 6'd1 +: 16];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r0     <= '0;
      r1     <= '0;
      r2     <= '0;
      wcnt   <= '0;
      word_o <= '0;
      widx_o <= '0;
    end else begin
      r0     <= rx_data_i;
      r1     <= r0;
      r2     <= r1;
      wcnt   <= wcnt + 3'd1;
      word_o <= cand_o[1];
      // Control word (slot) gets index 7, the following word index 0.
      widx_o <= wcnt - pos_i[6:4] - 3'd1;
    end
  end

endmodule
