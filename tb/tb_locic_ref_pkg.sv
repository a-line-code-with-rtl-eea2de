// tb_locic_ref_pkg -- bit-serial reference model of the LOCic line code for the
// testbenches.
//
// Written independently of the RTL's parallel functions: sequences are
// generated bit by bit from the printed start bits, the CRC by long division
// over a bit queue, the scrambler over an explicit bit history. The class
// locic_tx_model produces the 16 encoder words of a frame from 12 raw ADC
// words (or 14 with calibration bits) and keeps the scrambler history and frame number between frames.
package tb_locic_ref_pkg;

  // PRBS5: printed start 11 00 01 10 11 10 10 10, s[n] = s[n-5] ^ s[n-3].
  function automatic bit prbs5_bit(int unsigned n);
    bit s[31];
    s[0] = 1; s[1] = 1; s[2] = 0; s[3] = 0; s[4] = 0;
    for (int i = 5; i < 31; i++) s[i] = s[i-5] ^ s[i-3];
    return s[n % 31];
  endfunction

  // PRBS7: printed start 11 00 00 00 10, s[n] = s[n-7] ^ s[n-6].
  function automatic bit prbs7_bit(int unsigned n);
    bit s[127];
    for (int i = 0; i < 7; i++) s[i] = (i < 2);
    for (int i = 7; i < 127; i++) s[i] = s[i-7] ^ s[i-6];
    return s[n % 127];
  endfunction

  // T8..T15 of frame f (T8 in bit 0).
  function automatic logic [7:0] ctrl_hi(int unsigned f);
    logic [7:0] t;
    t[0] = 1; t[1] = 0; t[2] = 1; t[3] = 0;
    t[4] = prbs5_bit(2*f); t[5] = prbs5_bit(2*f + 1);
    t[6] = prbs7_bit(2*f); t[7] = prbs7_bit(2*f + 1);
    return t;
  endfunction

  // CRC-8 by polynomial long division of the message (first bit = highest
  // power) times x^8, remainder bit 7 = coefficient of x^7.
  function automatic logic [7:0] crc_of(bit msg[$]);
    bit r[$];
    bit p[9] = '{1, 0, 0, 1, 0, 1, 1, 1, 1};  // x^8+x^5+x^3+x^2+x+1, MSB first
    logic [7:0] c;
    r = msg;
    for (int i = 0; i < 8; i++) r.push_back(0);
    for (int i = 0; i + 8 < r.size(); i++)
      if (r[i]) for (int j = 0; j < 9; j++) r[i+j] ^= p[j];
    for (int k = 0; k < 8; k++) c[7-k] = r[r.size()-8+k];
    return c;
  endfunction

  class locic_tx_model;
    bit hist[$];          // scrambled bits sent, newest at the back
    int unsigned frame;   // BCID of the next frame

    function new(logic [57:0] seed);
      // seed bit k = scrambled bit sent k+1 bits ago
      hist = {};
      for (int k = 57; k >= 0; k--) hist.push_back(seed[k]);
      frame = 0;
    endfunction

    function automatic bit scr(bit d);
      bit o;
      o = d ^ hist[hist.size()-39] ^ hist[hist.size()-58];
      hist.push_back(o);
      if (hist.size() > 64) void'(hist.pop_front());
      return o;
    endfunction

    // raw[0..11] = ADC words D0..D11; D12, D13 are zero.
    function automatic void build(input logic [7:0] raw[12], output logic [7:0] w[16]);
      logic [7:0] r14 [14];
      for (int k = 0; k < 14; k++) r14[k] = (k < 12) ? raw[k] : 8'h00;
      build14(r14, w);
    endfunction

    // raw[0..13] = D0..D13 (front-end ADC with calibration bits).
    function automatic void build14(input logic [7:0] raw[14], output logic [7:0] w[16]);
      bit msg[$];
      logic [7:0] c;
      for (int k = 0; k < 14; k++) begin
        logic [7:0] d;
        d = raw[k];
        for (int b = 0; b < 8; b++) begin
          msg.push_back(d[b]);
          w[k][b] = scr(d[b]);
        end
      end
      c = crc_of(msg);
      for (int b = 0; b < 8; b++) w[14][b] = c[7-b];
      w[15] = ctrl_hi(frame);
      frame = (frame == 3563) ? 0 : frame + 1;
    endfunction
  endclass

endpackage
