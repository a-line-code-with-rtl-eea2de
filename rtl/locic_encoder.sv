// locic_encoder -- LOCic line-code encoder (transmitter side).
//
// Eight ADC channels deliver 12 (or 14) bits per channel and 40 MHz frame;
// the encoder turns each frame into 16 words of 8 bits at 640 MHz for an 8:1
// serializer: 14 scrambled data words (D0..D11, then D12/D13)
// followed by the control words T0..T7 (CRC-8 of the raw data) and T8..T15
// (boundary 1010 plus two PRBS pairs). Every channel keeps its own serial
// format, so no data re-ordering buffers are needed, which keeps latency low.
//
// Two input modes, chosen by the static asic_mode_i:
//   0 (COTS ADC)      12 words per frame at 480 Mb/s (both edges of the
//                     240 MHz wr_clk) go through the Sync FIFO, which adds
//                     4 dummy zero slots (D12, D13 = 0).
//   1 (front-end ADC) the ADC already sends 16 words per frame at 640 Mb/s
//                     (D0..D11, calibration bits D12/D13, two dummy words);
//                     they enter on asic_data_i in the clk domain, word 0
//                     with the rising edge of frame_clk_i, and bypass the FIFO.
//                     D12/D13 are scrambled and covered by the CRC; the
//                     dummy words are replaced by the control code.
// The FIFO's purpose (testing with a COTS ADC) and both input formats follow
// the line code's description; capturing the front-end ADC's double-data-rate
// output into clk-domain words is left outside this block.
//
// Blocks: locic_sync_fifo (480 -> 640 Mb/s, adds 4 dummy slots), locic_prbs_gen,
// locic_crc_gen, locic_scrambler, locic_frame_builder, and locic_seed_regs
// (triplicated scrambler seed). The CRC and the scrambler both take the raw
// input words; the frame builder drives their enables and merges the results.
//
// Interface / timing: wr_clk is the 240 MHz data clock of the COTS ADC
// (one 8-bit word on each edge), clk the 640 MHz core clock. tx_data_o is
// registered; a word leaves the FIFO (or the direct-path register, one cycle
// after asic_data_i) and reaches tx_data_o two clk cycles later (scrambler/CRC
// stage, builder stage). tx_frame_o marks word 0.
// seed_wr_i/seed_i write a new scrambler seed (applied one cycle later).
module locic_encoder (
  input  logic                          rst_n,
  input  logic                          wr_clk,
  input  logic [7:0]                    adc_data_i,
  input  logic                          frame_clk_i,
  input  logic                          clk,
  input  logic                          asic_mode_i,   // 1: front-end ADC input, FIFO bypassed
  input  logic [7:0]                    asic_data_i,   // front-end ADC words, clk domain
  input  logic                          bcid_reset_i,
  input  logic                          seed_wr_i,
  input  logic [locic_pkg::SCR_LEN-1:0] seed_i,
  output logic [7:0]                    tx_data_o,
  output logic                          tx_frame_o,
  output logic [11:0]                   bcid_o,
  output logic                          fifo_err_o,
  output logic                          fifo_running_o,
  output logic                          seed_mismatch_o
);
  import locic_pkg::*;

  logic [7:0]   fifo_data, core_data;
  logic         fifo_start, frame_start;
  logic [7:0]   scr_data, crc_t, prbs_t;
  logic         scr_en, crc_en, crc_clr, prbs_en;
  scr_state_t   seed;
  logic         seed_load;

  locic_sync_fifo u_fifo (
    .rst_n, .wr_clk, .adc_data_i, .frame_clk_i,
    .rd_clk(clk), .data_o(fifo_data), .frame_start_o(fifo_start),
    .running_o(fifo_running_o), .err_o(fifo_err_o)
  );

  // Direct path for the front-end ADC: its 16 words per frame (D0..D13 and
  // two dummy words) arrive at the core rate; word 0 comes with the rising
  // edge of the frame clock, sampled here in the clk domain. One register
  // stage, like the FIFO's output register.
  logic [7:0] dir_data;
  logic       dir_start, fclk_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dir_data  <= '0;
      dir_start <= 1'b0;
      fclk_q    <= 1'b1;
    end else begin
      dir_data  <= asic_data_i;
      dir_start <= frame_clk_i & ~fclk_q;
      fclk_q    <= frame_clk_i;
    end
  end

  assign core_data   = asic_mode_i ? dir_data  : fifo_data;
  assign frame_start = asic_mode_i ? dir_start : fifo_start;

  locic_seed_regs u_seed (
    .clk, .rst_n, .wr_i(seed_wr_i), .wdata_i(seed_i),
    .seed_o(seed), .mismatch_o(seed_mismatch_o)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) seed_load <= 1'b0;
    else        seed_load <= seed_wr_i;
  end

  locic_prbs_gen u_prbs (
    .clk, .rst_n, .frame_en_i(prbs_en), .bcid_reset_i,
    .t_o(prbs_t), .bcid_o
  );

  locic_crc_gen u_crc (
    .clk, .rst_n, .en_i(crc_en), .clr_i(crc_clr), .data_i(core_data),
    .crc_o(), .t_o(crc_t)
  );

  locic_scrambler u_scr (
    .clk, .rst_n, .seed_i(seed), .load_i(seed_load), .en_i(scr_en),
    .data_i(core_data), .data_o(scr_data)
  );

  locic_frame_builder u_fb (
    .clk, .rst_n, .frame_start_i(frame_start), .scr_data_i(scr_data),
    .crc_t_i(crc_t), .prbs_t_i(prbs_t),
    .scr_en_o(scr_en), .crc_en_o(crc_en), .crc_clr_o(crc_clr), .prbs_en_o(prbs_en),
    .tx_data_o, .tx_frame_o
  );

endmodule
