// locic_decoder -- LOCic line-code decoder (receiver side, 320 MHz, 16 bits).
//
// Takes the unaligned 16-bit words of the deserializer and
//   1. locic_data_extractor  realigns them to the frame boundary pointer,
//   2. locic_synchronizer    finds and tracks the boundary (CHECK / SYNC /
//                            RESYNC), following one-bit slips within a frame,
//   3. locic_bcid_gen        derives the 12-bit BCID from the PRBS fields,
//   4. locic_descrambler     undoes the x^58+x^39+1 scrambling,
//   5. locic_crc_checker     checks the CRC-8 of every frame.
//
// Outputs: data_o (16-bit words, widx_o 0..6 data, 7 control word),
// data_valid_o, crc_flag_o/crc_strobe_o (per frame), frame_flag_o (in SYNC),
// bcid_o (0xFFF while unknown), state_o and slip_o for monitoring.
// Timing: rx_data_i to data_o is 3 (extractor) + 1 (descrambler) + 1 (CRC
// checker) = 5 clock cycles; the BCID of a frame is updated when its control
// word is handled by the synchronizer.
module locic_decoder (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [15:0]            rx_data_i,
  output logic [15:0]            data_o,
  output logic [2:0]             widx_o,
  output logic                   data_valid_o,
  output logic                   crc_flag_o,
  output logic                   crc_strobe_o,
  output logic                   frame_flag_o,
  output logic [11:0]            bcid_o,
  output logic                   bcid_valid_o,
  output locic_pkg::sync_state_e state_o,
  output logic [1:0]             slip_o
);
  import locic_pkg::*;

  logic             slot;
  logic [2:0][15:0] cand;
  logic [6:0]       pos;
  logic [15:0]      aligned, descr;
  logic [2:0]       widx_a, widx_d;
  logic             lock, tick, f0;
  prbs_field_t      field;
  sync_state_e      state;

  locic_data_extractor u_ext (
    .clk, .rst_n, .rx_data_i, .pos_i(pos),
    .slot_o(slot), .cand_o(cand), .word_o(aligned), .widx_o(widx_a)
  );

  locic_synchronizer u_sync (
    .clk, .rst_n, .slot_i(slot), .cand_i(cand),
    .pos_o(pos), .state_o(state), .lock_o(lock),
    .tick_o(tick), .field_o(field), .f0_o(f0), .slip_o
  );

  locic_bcid_gen u_bcid (
    .clk, .rst_n, .state_i(state), .tick_i(tick), .field_i(field), .f0_i(f0),
    .bcid_o, .valid_o(bcid_valid_o)
  );

  locic_descrambler u_dscr (
    .clk, .rst_n, .data_i(aligned), .widx_i(widx_a),
    .data_o(descr), .widx_o(widx_d)
  );

  locic_crc_checker u_crc (
    .clk, .rst_n, .data_i(descr), .widx_i(widx_d), .lock_i(lock),
    .data_o, .widx_o, .data_valid_o, .crc_flag_o, .crc_strobe_o, .frame_flag_o
  );

  assign state_o = state;

endmodule
