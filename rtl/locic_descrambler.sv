// locic_descrambler -- self-synchronous descrambler of the LOCic decoder.
//
// Inverse of the x^58+x^39+1 scrambler: each received data bit is XORed with
// the received bits 39 and 58 positions earlier in the data-bit sequence.
// Sixteen bits are processed per 320 MHz cycle (bit 0 first). Words with
// widx_i = 7 are the frame control word: they are passed through unchanged and
// do not enter the state. As the descrambler needs no seed, it produces valid
// data 58 bits after any disturbance (e.g. after a bit slip); a single bit
// error on the line gives three bit errors after descrambling.
//
// Interface / timing: one register stage; data_o, widx_o follow data_i,
// widx_i by one cycle. Polynomial from the line code; the 16-bit parallel
// form and word handling are this design's.
module locic_descrambler (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] data_i,
  input  logic [2:0]  widx_i,
  output logic [15:0] data_o,
  output logic [2:0]  widx_o
);
  import locic_pkg::*;

  scr_state_t  st, st_next;
  logic [15:0] d;
  logic        is_data;

  assign is_data = (widx_i != 3'(W16_PER_FRAME - 1));
  always_comb d = dscr_w16(st, data_i, st_next);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= '0;
      data_o <= '0;
      widx_o <= '0;
    end else begin
      widx_o <= widx_i;
      data_o <= is_data ? d : data_i;
      if (is_data) st <= st_next;
    end
  end

endmodule
