// tb_locic_link -- whole-link test of locic_link at its default parameters.
//
// An 8-channel COTS ADC model sends 12 words per 40 MHz frame (a word every
// 8 time units, on alternate edges of the 240 MHz data clock; frame clock
// period 96); the encoder runs at period 6 (640 MHz), the decoder at period
// 12 (320 MHz). A serializer model shifts out the
// 8-bit encoder words channel 0 first; a deserializer model cuts the bit
// stream into 16-bit words at an arbitrary phase and injects the link faults:
// one-bit slips both ways, 80-bit error bursts followed by a slip, and one
// large jump that loses lock. The run covers more than one 3564-frame orbit and
// an external BCID reset.
//
// Checks: every frame the decoder outputs as valid with a good CRC equals an
// ADC frame (D0..D11 of all channels, dummy D12/D13 zero), in order, with the
// BCID the encoder gave it; frames away from faults are never lost; the
// receiver pipeline latency (control-word slot to CRC flag) is 3 cycles and
// the encoder's FIFO-to-serializer latency 2 cycles. Each mechanism is counted
// and must have happened at least once.
module tb_locic_link;
  import locic_pkg::*;

  localparam int NFRAMES = 3900;

  logic rst_n = 0, adc_clk = 0, tx_clk = 0, rx_clk = 0, fclk = 0;
  logic bcid_reset = 0, seed_wr = 0;
  logic [57:0] seed = '0;
  logic [7:0] adc = 0, txd;
  logic txf, ferr, frun, smm;
  logic [11:0] tx_bcid, rx_bcid;
  logic [15:0] rx = 0, rword;
  logic [2:0] rwidx;
  logic rvalid, crc_flag, crc_strobe, frame_flag, rbvalid;
  sync_state_e state;
  logic [1:0] slip;
  int checks = 0, failures = 0;

  locic_link dut (
    .rst_n, .adc_clk, .adc_data_i(adc), .frame_clk_i(fclk), .tx_clk,
    .asic_mode_i(1'b0), .asic_data_i(8'h00),
    .bcid_reset_i(bcid_reset), .seed_wr_i(seed_wr), .seed_i(seed),
    .tx_data_o(txd), .tx_frame_o(txf), .tx_bcid_o(tx_bcid), .fifo_err_o(ferr),
    .fifo_running_o(frun), .seed_mismatch_o(smm),
    .rx_clk, .rx_data_i(rx), .rx_word_o(rword), .rx_widx_o(rwidx), .rx_valid_o(rvalid),
    .crc_flag_o(crc_flag), .crc_strobe_o(crc_strobe), .frame_flag_o(frame_flag),
    .rx_bcid_o(rx_bcid), .rx_bcid_valid_o(rbvalid), .sync_state_o(state), .slip_o(slip));

  // word rate 480 MHz (period 8); the 240 MHz data clock has an edge in the
  // middle of every word
  logic c8 = 0;
  always #4 c8 = ~c8;
  always @(posedge c8) adc_clk <= ~adc_clk;
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

  // ---------------------------------------------------------------- ADC
  typedef logic [6:0][15:0] frame16_t;
  frame16_t adc_frames[$];      // all ADC frames, as the decoder will show them
  int n_zero_frames = 0;

  initial begin
    frame16_t f;
    #20;
    @(negedge adc_clk) rst_n = 1;
    @(negedge adc_clk);
    for (int n = 0; n < NFRAMES + 60; n++) begin
      f = '0;
      for (int k = 0; k < 12; k++) begin
        @(negedge c8);
        adc  = (n % 11 == 5) ? 8'h00 : 8'($urandom);
        fclk = (k < 6);
        f[k/2][8*(k%2) +: 8] = adc;
      end
      if (n % 11 == 5) n_zero_frames++;
      adc_frames.push_back(f);
    end
  end

  // ------------------------------------------------- encoder bookkeeping
  int tx_idx = 0;
  logic [11:0] bcid_of[$];
  int n_tx_wrap = 0, n_bcid_reset = 0, n_fifo_start = 0;
  logic [11:0] last_tx_bcid = 0;
  always @(negedge tx_clk) if (rst_n) begin
    if (txf) begin
      bcid_of.push_back(tx_bcid);
      if (tx_idx > 0 && tx_bcid == 0 && last_tx_bcid == 12'd3563) n_tx_wrap++;
      if (tx_idx > 0 && tx_bcid == 0 && last_tx_bcid != 12'd3563) n_bcid_reset++;
      last_tx_bcid = tx_bcid;
      tx_idx++;
      // external BCID reset once, late in the run
      bcid_reset = (tx_idx == NFRAMES - 300);
    end else bcid_reset = 0;
    check(!ferr, "no FIFO error");
  end
  always @(posedge frun) n_fifo_start++;

  // encoder latency: FIFO word 0 -> serializer word 0 two cycles later
  int n_tx_lat = 0;
  always @(negedge tx_clk) if (rst_n && dut.u_enc.frame_start) begin
    repeat (2) @(negedge tx_clk);
    check(txf, "encoder latency 2 cycles");
    n_tx_lat++;
  end

  // ----------------------------------------- serializer + deserializer
  bit line[$];
  int n_events = 0, last_event_tx = -1000;
  always @(negedge tx_clk) if (rst_n && tx_idx > 0)
    for (int b = 0; b < 8; b++) line.push_back(txd[b]);

  initial begin
    @(posedge rst_n);
    wait (line.size() > 300);
    repeat (77) void'(line.pop_front());   // arbitrary phase
    forever begin
      @(negedge rx_clk);
      if (tx_idx > 600 && tx_idx % 300 == 0 && tx_idx != last_event_tx) begin
        int kind;
        last_event_tx = tx_idx;
        kind = (tx_idx == 1200) ? 4 : (tx_idx / 300) % 4;
        n_events++;
        case (kind)
          0: void'(line.pop_front());
          1: line.push_front(1'b1);
          2: begin for (int i = 0; i < 80; i++) line[i] = $urandom_range(1); void'(line.pop_front()); end
          3: begin for (int i = 0; i < 80; i++) line[i] = $urandom_range(1); line.push_front(1'b0); end
          default: repeat (45) void'(line.pop_front());
        endcase
      end
      for (int j = 0; j < 16; j++) rx[j] = (line.size() > 0) ? line.pop_front() : 1'b0;
    end
  end

  // --------------------------------------------------- receiver checks
  int n_lock = 0, n_resync_ok = 0, n_slip_early = 0, n_slip_late = 0, n_lost = 0;
  int n_crc_bad = 0, n_ok = 0, n_bcid_ok = 0, n_rx_wrap = 0, n_rx_lat = 0;
  sync_state_e prev = ST_CHECK;
  always @(posedge rx_clk) if (rst_n) begin
    if (prev == ST_CHECK && state == ST_SYNC) n_lock++;
    if (prev == ST_RESYNC && state == ST_SYNC) n_resync_ok++;
    if (prev == ST_RESYNC && state == ST_CHECK) n_lost++;
    if (slip == 2'b01) n_slip_early++;
    if (slip == 2'b10) n_slip_late++;
    prev <= state;
  end

  // receiver latency: handled control-word slot -> CRC flag 3 cycles later
  always @(negedge rx_clk) if (rst_n && dut.u_dec.u_sync.slot) begin
    repeat (3) @(negedge rx_clk);
    check(crc_strobe, "receiver latency: slot to CRC flag 3 cycles");
    n_rx_lat++;
  end

  initial begin
    frame16_t got;
    int nfr = 0, next_idx = -1, since_lock = 0;
    logic [11:0] prev_bcid = BCID_INVALID;
    @(posedge rst_n);
    forever begin
      @(negedge rx_clk);
      if (rwidx != 3'd7) got[rwidx] = rword;
      if (crc_strobe) begin
        int idx;
        nfr++;
        idx = -1;
        // the expected frame, or a search after a disturbance
        if (next_idx >= 0 && next_idx < adc_frames.size() && adc_frames[next_idx] == got) idx = next_idx;
        else for (int i = (next_idx > 8 ? next_idx - 8 : 0); i < adc_frames.size(); i++)
          if (adc_frames[i] == got && adc_frames[i] != '0) begin idx = i; break; end
        // Right after a burst the 8-bit CRC can let a corrupted frame through;
        // data are compared away from the injected faults.
        if (frame_flag && crc_flag && tx_idx - last_event_tx > 8) begin
          check(idx >= 0, $sformatf("decoded frame %0d equals an ADC frame", nfr));
          n_ok++;
          if (rbvalid && idx >= 0 && idx < bcid_of.size()) begin
            check(rx_bcid == bcid_of[idx], $sformatf("BCID %0d vs %0d", rx_bcid, bcid_of[idx]));
            n_bcid_ok++;
            if (rx_bcid == 0 && prev_bcid == 12'd3563) n_rx_wrap++;
          end
        end
        if (frame_flag && !crc_flag) n_crc_bad++;
        if (since_lock > 2 && tx_idx - last_event_tx > 8)
          check(frame_flag && crc_flag && idx == next_idx,
                $sformatf("undisturbed frame %0d received in order", nfr));
        since_lock = (state == ST_SYNC) ? since_lock + 1 : 0;
        prev_bcid  = rbvalid ? rx_bcid : BCID_INVALID;
        if (idx >= 0) next_idx = idx + 1;
        if (tx_idx >= NFRAMES) begin
          check(n_fifo_start == 1, "FIFO started once");
          check(n_tx_wrap > 0, "encoder orbit restart");
          check(n_bcid_reset > 0, "encoder BCID reset");
          check(n_zero_frames > 100, "all-zero ADC frames sent");
          check(n_lock >= 2, "CHECK -> SYNC (first lock and relock)");
          check(n_resync_ok >= 4, "RESYNC -> SYNC");
          check(n_slip_early > 0 && n_slip_late > 0, "one-bit slips both ways");
          check(n_lost > 0, "RESYNC -> CHECK");
          check(n_crc_bad > 0, "CRC errors flagged");
          check(n_rx_wrap > 0, "decoder BCID orbit wrap");
          check(n_bcid_ok > 1000 && n_tx_lat > 1000 && n_rx_lat > 1000, "BCID and latency checked");
          $display("frames=%0d fifo_starts=%0d tx_wraps=%0d bcid_resets=%0d events=%0d locks=%0d resync_ok=%0d slips_early=%0d slips_late=%0d lost=%0d crc_bad=%0d ok=%0d bcid_ok=%0d rx_wraps=%0d",
                   tx_idx, n_fifo_start, n_tx_wrap, n_bcid_reset, n_events, n_lock, n_resync_ok,
                   n_slip_early, n_slip_late, n_lost, n_crc_bad, n_ok, n_bcid_ok, n_rx_wrap);
          $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
          $finish;
        end
      end
    end
  end
endmodule
