// locic_scrambler -- self-synchronous scrambler of the LOCic encoder.
//
// The 10 Gigabit Ethernet scrambler G(x) = x^58+x^39+1: every data bit is
// XORed with the scrambled bits sent 39 and 58 bits before it. Eight bits are
// handled per 640 MHz cycle in transmission order (bit 0 = channel 0 first).
// Only data words are scrambled (en_i high, the "SCR Clk" of the block
// diagram); the frame control words pass the slot without changing the state,
// so the scrambled bit sequence is continuous across frames.
//
// The state is loaded from seed_i by the reset and by load_i, so that an
// all-zero input still produces a busy line. A zero seed would leave zero
// data unscrambled; seed_i must therefore be non-zero, which an assertion
// checks (its `disable iff` on rst_n is why lint reports rst_n as used both
// asynchronously and synchronously; the registers use it only
// asynchronously).
//
// Interface / timing: one cycle of latency, data_o registered; data_o is
// zero in cycles without en_i. The polynomial is the line code's; the exact
// tap order within the 8-bit word and the seed loading are this design's.
module locic_scrambler (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [locic_pkg::SCR_LEN-1:0] seed_i,
  input  logic                         load_i,   // reload the state from seed_i
  input  logic                         en_i,
  input  logic [7:0]                   data_i,
  output logic [7:0]                   data_o
);
  import locic_pkg::*;

  scr_state_t st, st_next;
  logic [7:0] scr;

  always_comb scr = scr_w8(st, data_i, st_next);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= seed_i;
      data_o <= '0;
    end else begin
      data_o <= en_i ? scr : 8'h00;
      if (load_i)    st <= seed_i;
      else if (en_i) st <= st_next;
    end
  end

  // A zero state would stop the scrambling of zero data.
  property p_seed_nonzero;
    @(posedge clk) disable iff (!rst_n) seed_i != '0;
  endproperty
  a_seed_nonzero: assert property (p_seed_nonzero);

endmodule
