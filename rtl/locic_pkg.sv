// locic_pkg -- constants, types and bit-level functions shared by the LOCic
// encoder and decoder.
//
// Frame format. One frame is one 40 MHz bunch-crossing period and carries
// 8 channels x 16 bits = 128 bits. In the encoder a frame is 16 words of 8 bits
// (bit c of a word belongs to channel c, channel 0 is sent first); words 0..13
// are the data bits D0..D13 of all channels, word 14 is T0..T7 and word 15 is
// T8..T15. In the decoder a frame is 8 words of 16 bits (bit 0 received first):
// words 0..6 hold the 112 data bits and word 7 holds T0..T15 in bits 0..15.
//
// Control field: T0..T7 = CRC-8 of the raw (unscrambled) 112 data bits,
// P(x) = x^8+x^5+x^3+x^2+x+1; T8..T11 = 1,0,1,0 (frame boundary);
// T12T13 = two bits per frame of a 2^5-1 PRBS that starts 11 00 01 10 11 10 ...;
// T14T15 = two bits per frame of a 2^7-1 PRBS that starts 11 00 00 00 10 ...
// Both PRBS are restarted at frame 0 of every 3564-frame BCID period.
// The two recurrences, s[n] = s[n-5]^s[n-3] and s[n] = s[n-7]^s[n-6], are the
// ones that reproduce those printed starting sequences.
//
// Scrambling: self-synchronous x^58+x^39+1 (the 10 Gigabit Ethernet scrambler)
// applied to the data bits in transmission order; control bits are not
// scrambled and do not advance the scrambler.
//
// Design choices not fixed by the source of the line code: the CRC register
// starts at 0 in each frame, shifts MSB first over the data bits in
// transmission order, and T0..T7 carry CRC bits 7..0 (T0 = bit 7).
package locic_pkg;

  localparam int unsigned NCH          = 8;     // ADC channels per link
  localparam int unsigned W8_PER_FRAME = 16;    // 8-bit words per frame (encoder)
  localparam int unsigned W8_DATA      = 14;    // data words D0..D13
  localparam int unsigned W8_RAW       = 12;    // words from a COTS ADC (D0..D11)
  localparam int unsigned W16_PER_FRAME = 8;    // 16-bit words per frame (decoder)
  localparam int unsigned W16_DATA     = 7;     // 16-bit data words per frame
  localparam int unsigned FRAME_BITS   = 128;
  localparam int unsigned BCID_PERIOD  = 3564;  // LHC bunch crossings per orbit

  localparam logic [11:0] BCID_INVALID = 12'hFFF;

  // T8..T11 as a vector with T8 in bit 0.
  localparam logic [3:0] BOUNDARY = 4'b0101;

  // PRBS states hold the next bits to be sent: q[i] = s[n+i].
  localparam logic [4:0] PRBS5_INIT = 5'b00011;    // s0..s4 = 1,1,0,0,0
  localparam logic [6:0] PRBS7_INIT = 7'b0000011;  // s0..s6 = 1,1,0,0,0,0,0

  localparam int unsigned SCR_LEN = 58;
  localparam int unsigned SCR_TAP = 39;

  typedef enum logic [1:0] {
    ST_CHECK  = 2'd0,
    ST_SYNC   = 2'd1,
    ST_RESYNC = 2'd2
  } sync_state_e;

  // PRBS field of one frame, T12..T15.
  typedef struct packed {
    logic [1:0] p7;   // {T15, T14}
    logic [1:0] p5;   // {T13, T12}
  } prbs_field_t;

  // ---------------------------------------------------------------- PRBS ---
  function automatic logic [4:0] prbs5_adv1(input logic [4:0] q);
    return {q[0] ^ q[2], q[4:1]};
  endfunction

  function automatic logic [4:0] prbs5_adv2(input logic [4:0] q);
    return prbs5_adv1(prbs5_adv1(q));
  endfunction

  function automatic logic [6:0] prbs7_adv1(input logic [6:0] q);
    return {q[0] ^ q[1], q[6:1]};
  endfunction

  function automatic logic [6:0] prbs7_adv2(input logic [6:0] q);
    return prbs7_adv1(prbs7_adv1(q));
  endfunction

  // PRBS field {T15,T14,T13,T12} of frame `frame` (0 <= frame < 3564).
  function automatic prbs_field_t prbs_field_of(input int unsigned frame);
    logic [4:0] q5;
    logic [6:0] q7;
    q5 = PRBS5_INIT;
    q7 = PRBS7_INIT;
    for (int unsigned i = 0; i < (2 * frame) % 31; i++) q5 = prbs5_adv1(q5);
    for (int unsigned i = 0; i < (2 * frame) % 127; i++) q7 = prbs7_adv1(q7);
    return '{p7: {q7[1], q7[0]}, p5: {q5[1], q5[0]}};
  endfunction

  // "PRBS bytes": the pairs of four consecutive frames f..f+3 packed with the
  // first-sent bit of frame f in bit 7, i.e. byte[7-i] = s[2f+i].
  function automatic logic [7:0] prbs5_byte_of(input int unsigned frame);
    logic [4:0] q;
    logic [7:0] b;
    q = PRBS5_INIT;
    for (int unsigned i = 0; i < (2 * frame) % 31; i++) q = prbs5_adv1(q);
    for (int i = 7; i >= 0; i--) begin
      b[i] = q[0];
      q    = prbs5_adv1(q);
    end
    return b;
  endfunction

  function automatic logic [7:0] prbs7_byte_of(input int unsigned frame);
    logic [6:0] q;
    logic [7:0] b;
    q = PRBS7_INIT;
    for (int unsigned i = 0; i < (2 * frame) % 127; i++) q = prbs7_adv1(q);
    for (int i = 7; i >= 0; i--) begin
      b[i] = q[0];
      q    = prbs7_adv1(q);
    end
    return b;
  endfunction

  // ----------------------------------------------------------------- CRC ---
  localparam logic [7:0] CRC_POLY = 8'h2F;  // x^5+x^3+x^2+x+1 (x^8 implicit)

  function automatic logic [7:0] crc8_bit(input logic [7:0] crc, input logic b);
    logic fb;
    fb = crc[7] ^ b;
    return {crc[6:0], 1'b0} ^ (fb ? CRC_POLY : 8'h00);
  endfunction

  // Bit 0 of the word is the first bit in transmission order.
  function automatic logic [7:0] crc8_w8(input logic [7:0] crc, input logic [7:0] d);
    logic [7:0] c;
    c = crc;
    for (int i = 0; i < 8; i++) c = crc8_bit(c, d[i]);
    return c;
  endfunction

  function automatic logic [7:0] crc8_w16(input logic [7:0] crc, input logic [15:0] d);
    return crc8_w8(crc8_w8(crc, d[7:0]), d[15:8]);
  endfunction

  // T0..T7 (T0 in bit 0) from a CRC register value.
  function automatic logic [7:0] crc_to_t(input logic [7:0] crc);
    logic [7:0] t;
    for (int i = 0; i < 8; i++) t[i] = crc[7-i];
    return t;
  endfunction

  // ----------------------------------------------------------- Scrambler ---
  // st[k] is the scrambled bit sent k+1 bits ago.
  typedef logic [SCR_LEN-1:0] scr_state_t;

  function automatic logic [7:0] scr_w8(input scr_state_t st_in, input logic [7:0] d,
                                        output scr_state_t st_out);
    scr_state_t st;
    logic [7:0] o;
    st = st_in;
    for (int i = 0; i < 8; i++) begin
      o[i] = d[i] ^ st[SCR_TAP-1] ^ st[SCR_LEN-1];
      st   = {st[SCR_LEN-2:0], o[i]};
    end
    st_out = st;
    return o;
  endfunction

  function automatic logic [15:0] dscr_w16(input scr_state_t st_in, input logic [15:0] s,
                                           output scr_state_t st_out);
    scr_state_t st;
    logic [15:0] o;
    st = st_in;
    for (int i = 0; i < 16; i++) begin
      o[i] = s[i] ^ st[SCR_TAP-1] ^ st[SCR_LEN-1];
      st   = {st[SCR_LEN-2:0], s[i]};
    end
    st_out = st;
    return o;
  endfunction

endpackage
