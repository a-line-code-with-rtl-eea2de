// tb_locic_link_asic -- whole link with the encoder in front-end ADC mode.
//
// A front-end ADC model sends 16 words per frame at 640 MHz (D0..D11, random
// calibration bits D12/D13, two random dummy words) straight into the
// encoder, bypassing the FIFO. A serializer/deserializer model carries the
// bits to the decoder at an arbitrary bit phase, without line faults.
// Checks: the decoder locks once, then every frame arrives in order with a
// good CRC and equals the 14 data words sent (calibration bits included);
// once the BCID is valid it equals the encoder's BCID of that frame, through
// an orbit wrap. Counts: lock, first valid BCID, orbit wrap, frames compared.
module tb_locic_link_asic;
  import locic_pkg::*;

  localparam int NFRAMES = 3800;

  logic rst_n = 0, tx_clk = 0, rx_clk = 0, fclk = 0;
  logic [7:0] din = 0, txd;
  logic txf, ferr, frun, smm;
  logic [11:0] tx_bcid, rx_bcid;
  logic [15:0] rx = 0, rword;
  logic [2:0] rwidx;
  logic rvalid, crc_flag, crc_strobe, frame_flag, rbvalid;
  sync_state_e state;
  logic [1:0] slip;
  int checks = 0, failures = 0;

  locic_link dut (
    .rst_n, .adc_clk(1'b0), .adc_data_i(8'h00), .frame_clk_i(fclk), .tx_clk,
    .asic_mode_i(1'b1), .asic_data_i(din),
    .bcid_reset_i(1'b0), .seed_wr_i(1'b0), .seed_i(58'h0),
    .tx_data_o(txd), .tx_frame_o(txf), .tx_bcid_o(tx_bcid), .fifo_err_o(ferr),
    .fifo_running_o(frun), .seed_mismatch_o(smm),
    .rx_clk, .rx_data_i(rx), .rx_word_o(rword), .rx_widx_o(rwidx), .rx_valid_o(rvalid),
    .crc_flag_o(crc_flag), .crc_strobe_o(crc_strobe), .frame_flag_o(frame_flag),
    .rx_bcid_o(rx_bcid), .rx_bcid_valid_o(rbvalid), .sync_state_o(state), .slip_o(slip));

  initial begin #1; forever #3 tx_clk = ~tx_clk; end
  initial begin #2; forever #6 rx_clk = ~rx_clk; end

  initial begin
    #(96 * (NFRAMES + 60));
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------------ front-end ADC
  typedef logic [6:0][15:0] frame16_t;
  frame16_t adc_frames[$];

  initial begin
    frame16_t f;
    #20;
    @(negedge tx_clk) rst_n = 1;
    repeat (3) @(negedge tx_clk);
    for (int n = 0; n < NFRAMES + 60; n++) begin
      for (int k = 0; k < 16; k++) begin
        din  = 8'($urandom);
        fclk = (k < 8);
        if (k < 14) f[k/2][8*(k%2) +: 8] = din;
        @(negedge tx_clk);
      end
      adc_frames.push_back(f);
    end
  end

  // ------------------------------------------------- encoder bookkeeping
  int tx_idx = 0;
  logic [11:0] bcid_of[$];
  always @(negedge tx_clk) if (rst_n && txf) begin
    bcid_of.push_back(tx_bcid);
    tx_idx++;
  end

  // ----------------------------------------- serializer + deserializer
  bit line[$];
  always @(negedge tx_clk) if (rst_n && tx_idx > 0)
    for (int b = 0; b < 8; b++) line.push_back(txd[b]);

  initial begin
    @(posedge rst_n);
    wait (line.size() > 300);
    repeat (53) void'(line.pop_front());   // arbitrary phase
    forever begin
      @(negedge rx_clk);
      for (int j = 0; j < 16; j++) rx[j] = (line.size() > 0) ? line.pop_front() : 1'b0;
    end
  end

  // --------------------------------------------------- receiver checks
  int n_lock = 0, n_ok = 0, n_bcid_ok = 0, n_rx_wrap = 0, n_first_bcid = 0;
  sync_state_e prev = ST_CHECK;
  always @(posedge rx_clk) if (rst_n) begin
    if (prev == ST_CHECK && state == ST_SYNC) n_lock++;
    prev <= state;
  end

  initial begin
    frame16_t got;
    int next_idx = -1, since_lock = 0;
    logic [11:0] prev_bcid = BCID_INVALID;
    @(posedge rst_n);
    forever begin
      @(negedge rx_clk);
      if (rwidx != 3'd7) got[rwidx] = rword;
      if (crc_strobe) begin
        int idx;
        idx = -1;
        if (next_idx >= 0 && next_idx < adc_frames.size() && adc_frames[next_idx] == got) idx = next_idx;
        else if (next_idx < 0)
          foreach (adc_frames[i]) if (adc_frames[i] == got) begin idx = i; break; end
        if (since_lock > 1) begin
          check(frame_flag && crc_flag && idx == next_idx && idx >= 0, "frame received in order with good CRC");
          n_ok++;
          if (rbvalid) begin
            if (prev_bcid == BCID_INVALID) n_first_bcid++;
            check(idx >= 0 && idx < bcid_of.size() && rx_bcid == bcid_of[idx],
                  $sformatf("BCID %0d", rx_bcid));
            n_bcid_ok++;
            if (rx_bcid == 0 && prev_bcid == 12'd3563) n_rx_wrap++;
          end
        end
        since_lock = (state == ST_SYNC) ? since_lock + 1 : 0;
        prev_bcid  = rbvalid ? rx_bcid : BCID_INVALID;
        if (idx >= 0) next_idx = idx + 1;
        if (tx_idx >= NFRAMES) begin
          check(n_lock == 1, "locked once");
          check(n_first_bcid == 1, "BCID became valid once");
          check(n_rx_wrap > 0, "decoder BCID orbit wrap");
          check(n_ok > NFRAMES - 600, "frames compared");
          check(!frun && !ferr, "FIFO bypassed");
          $display("frames=%0d locks=%0d first_bcid=%0d bcid_ok=%0d rx_wraps=%0d ok=%0d",
                   tx_idx, n_lock, n_first_bcid, n_bcid_ok, n_rx_wrap, n_ok);
          $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
          $finish;
        end
      end
    end
  end
endmodule
