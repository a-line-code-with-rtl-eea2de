// locic_link -- top level: LOCic encoder and decoder of one optical link.
//
// The encoder (radiation-tolerant transmitter ASIC) and the decoder (receiver
// FPGA) sit at the two ends of the link. Between them are the 8:1 serializer,
// the optical transmitter, the fibre, the optical receiver and the 1:16
// deserializer, which are not logic of this design. Their ends are therefore
// ports of this top: tx_data_o goes to the serializer (bit 0, channel 0,
// sent first; 16 words per 25 ns frame at 640 MHz) and rx_data_i comes from
// the deserializer (bit 0 received first, 8 words per frame at 320 MHz, any
// bit phase). The two halves share only the reset here.
module locic_link (
  input  logic                          rst_n,
  // transmitter side
  input  logic                          adc_clk,       // 240 MHz DDR data clock
  input  logic [7:0]                    adc_data_i,
  input  logic                          frame_clk_i,   // 40 MHz frame clock
  input  logic                          tx_clk,        // 640 MHz
  input  logic                          asic_mode_i,   // 1: front-end ADC, FIFO bypassed
  input  logic [7:0]                    asic_data_i,   // front-end ADC words, tx_clk domain
  input  logic                          bcid_reset_i,
  input  logic                          seed_wr_i,
  input  logic [locic_pkg::SCR_LEN-1:0] seed_i,
  output logic [7:0]                    tx_data_o,     // to the 8:1 serializer
  output logic                          tx_frame_o,
  output logic [11:0]                   tx_bcid_o,
  output logic                          fifo_err_o,
  output logic                          fifo_running_o,
  output logic                          seed_mismatch_o,
  // receiver side
  input  logic                          rx_clk,        // 320 MHz
  input  logic [15:0]                   rx_data_i,     // from the deserializer
  output logic [15:0]                   rx_word_o,
  output logic [2:0]                    rx_widx_o,
  output logic                          rx_valid_o,
  output logic                          crc_flag_o,
  output logic                          crc_strobe_o,
  output logic                          frame_flag_o,
  output logic [11:0]                   rx_bcid_o,
  output logic                          rx_bcid_valid_o,
  output locic_pkg::sync_state_e        sync_state_o,
  output logic [1:0]                    slip_o
);

  locic_encoder u_enc (
    .rst_n, .wr_clk(adc_clk), .adc_data_i, .frame_clk_i, .clk(tx_clk),
    .asic_mode_i, .asic_data_i, .bcid_reset_i, .seed_wr_i, .seed_i,
    .tx_data_o, .tx_frame_o, .bcid_o(tx_bcid_o), .fifo_err_o, .fifo_running_o, .seed_mismatch_o
  );

  locic_decoder u_dec (
    .clk(rx_clk), .rst_n, .rx_data_i,
    .data_o(rx_word_o), .widx_o(rx_widx_o), .data_valid_o(rx_valid_o),
    .crc_flag_o, .crc_strobe_o, .frame_flag_o,
    .bcid_o(rx_bcid_o), .bcid_valid_o(rx_bcid_valid_o),
    .state_o(sync_state_o), .slip_o
  );

endmodule
