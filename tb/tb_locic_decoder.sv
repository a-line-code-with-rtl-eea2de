// tb_locic_decoder -- end-to-end receiver test. A bit-serial reference encoder
// produces the 128-bit frames; a deserializer model cuts the bit stream into
// 16-bit words at an arbitrary phase and can drop or insert a bit (one-bit
// slip), corrupt a burst of 80 bits followed by a slip (the radiation-induced
// synchronisation loss), or drop many bits (loss of lock). The testbench
// checks that every frame the decoder marks valid with a good CRC carries
// exactly the data of a transmitted frame, that the BCID equals that frame's
// number, that frames away from disturbances are never lost or flagged bad,
// that one-bit slips are followed within one frame without going back to
// CHECK, and that CRC errors are flagged after bursts. It runs across the
// 3564-frame orbit restart and counts every mechanism.
module tb_locic_decoder;
  import tb_locic_ref_pkg::*;
  import locic_pkg::*;

  localparam int NFRAMES = 3900;

  logic clk = 0, rst_n = 0;
  logic [15:0] rx = 0, dout;
  logic [2:0] widx;
  logic dvalid, crc_flag, crc_strobe, frame_flag, bvalid;
  logic [11:0] bcid;
  sync_state_e state;
  logic [1:0] slip;
  int checks = 0, failures = 0;

  locic_decoder dut (.clk, .rst_n, .rx_data_i(rx), .data_o(dout), .widx_o(widx),
    .data_valid_o(dvalid), .crc_flag_o(crc_flag), .crc_strobe_o(crc_strobe),
    .frame_flag_o(frame_flag), .bcid_o(bcid), .bcid_valid_o(bvalid),
    .state_o(state), .slip_o(slip));

  always #1 clk = ~clk;

  initial begin
    #(16 * NFRAMES + 5000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  typedef struct packed {
    logic [6:0][15:0] d;
    logic [11:0]      bcid;
  } sent_t;

  sent_t hist[$];
  bit line[$];
  locic_tx_model m;
  int nsent = 0;
  int last_event = -1000;   // frame number of the last disturbance

  task automatic gen_frame();
    logic [7:0] raw [12];
    logic [7:0] w [16];
    sent_t s;
    s.bcid = 12'(m.frame);
    for (int k = 0; k < 12; k++) raw[k] = (nsent % 9 == 4) ? 8'h00 : 8'($urandom);
    m.build(raw, w);
    for (int j = 0; j < 7; j++) s.d[j] = {(2*j+1 < 12) ? raw[2*j+1] : 8'h00, (2*j < 12) ? raw[2*j] : 8'h00};
    hist.push_back(s);
    if (hist.size() > 64) void'(hist.pop_front());
    for (int k = 0; k < 16; k++) for (int b = 0; b < 8; b++) line.push_back(w[k][b]);
    nsent++;
  endtask

  // counters of mechanisms
  int n_lock = 0, n_resync_ok = 0, n_slip_early = 0, n_slip_late = 0, n_lost = 0;
  int n_crc_bad = 0, n_frames_ok = 0, n_bcid_ok = 0, n_wrap = 0;

  // deserializer model
  initial begin
    m = new(58'h155_5555_5555_5555);
    // arbitrary initial phase
    repeat (5) gen_frame();
    repeat (53) void'(line.pop_front());
    repeat (3) @(negedge clk);
    rst_n = 1;
    forever begin
      while (line.size() < 16 + 200) gen_frame();
      // disturbances
      if (line.size() < 16 + 200 + 16 && nsent > 600 && nsent % 250 == 0 && nsent != last_event) begin
        int kind;
        last_event = nsent;
        kind = (nsent == 1000) ? 4 : (nsent / 250) % 4;
        case (kind)
          0: void'(line.pop_front());                   // one bit lost
          1: line.push_front(1'b0);                     // one bit gained
          2: begin                                      // burst of 80 bits, then slip
               for (int i = 0; i < 80; i++) line[i] = $urandom_range(1);
               void'(line.pop_front());
             end
          3: begin                                      // burst, then slip the other way
               for (int i = 0; i < 80; i++) line[i] = $urandom_range(1);
               line.push_front(1'b1);
             end
          default: repeat (37) void'(line.pop_front()); // large jump: lock lost
        endcase
      end
      for (int j = 0; j < 16; j++) rx[j] = line.pop_front();
      @(negedge clk);
    end
  end

  // state-transition counters
  sync_state_e prev = ST_CHECK;
  always @(posedge clk) if (rst_n) begin
    if (prev == ST_CHECK && state == ST_SYNC) n_lock++;
    if (prev == ST_RESYNC && state == ST_SYNC) n_resync_ok++;
    if (prev == ST_RESYNC && state == ST_CHECK) n_lost++;
    if (slip == 2'b01) n_slip_early++;
    if (slip == 2'b10) n_slip_late++;
    prev <= state;
  end

  // output checker
  initial begin
    logic [6:0][15:0] got;
    int nfr = 0;
    int since_lock = 0;
    logic [11:0] prev_bcid = BCID_INVALID;
    @(posedge rst_n);
    forever begin
      @(negedge clk);
      if (widx != 3'd7) got[widx] = dout;
      if (crc_strobe) begin
        int idx;
        nfr++;
        idx = -1;
        for (int i = 0; i < hist.size(); i++) if (hist[i].d == got) idx = i;
        // Right after a burst the 8-bit CRC can let a corrupted frame through;
        // data are compared away from the injected faults.
        if (frame_flag && crc_flag && nsent - last_event > 6) begin
          check(idx >= 0, $sformatf("decoded frame %0d matches a sent frame", nfr));
          n_frames_ok++;
          if (bvalid && idx >= 0) begin
            check(bcid == hist[idx].bcid, $sformatf("BCID %0d vs %0d", bcid, hist[idx].bcid));
            n_bcid_ok++;
            if (bcid == 0 && prev_bcid == 12'd3563) n_wrap++;
          end
        end
        if (frame_flag && !crc_flag) n_crc_bad++;
        // away from disturbances every frame must be valid and intact
        if (since_lock > 2 && nsent - last_event > 6)
          check(frame_flag && crc_flag, $sformatf("undisturbed frame %0d valid (state %s)", nfr, state.name()));
        since_lock = (state == ST_SYNC) ? since_lock + 1 : 0;
        prev_bcid = bvalid ? bcid : BCID_INVALID;
        if (nfr == NFRAMES - 20) begin
          check(n_lock >= 2, "initial lock and relock after loss");
          check(n_resync_ok >= 4, "RESYNC -> SYNC");
          check(n_slip_early > 0 && n_slip_late > 0, "one-bit slips both ways");
          check(n_lost > 0, "RESYNC -> CHECK");
          check(n_crc_bad > 0, "burst errors flagged by the CRC");
          check(n_wrap > 0, "BCID orbit wrap");
          check(n_bcid_ok > 1000, "BCID checked");
          $display("locks=%0d resync_ok=%0d slips_early=%0d slips_late=%0d lost=%0d crc_bad=%0d frames_ok=%0d bcid_ok=%0d wraps=%0d",
                   n_lock, n_resync_ok, n_slip_early, n_slip_late, n_lost, n_crc_bad, n_frames_ok, n_bcid_ok, n_wrap);
          $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
          $finish;
        end
      end
    end
  end
endmodule
