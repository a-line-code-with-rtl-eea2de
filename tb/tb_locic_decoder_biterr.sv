// tb_locic_decoder_biterr -- single-bit line errors and the CRC.
//
// A bit-serial reference encoder feeds the decoder through a deserializer
// model (arbitrary bit phase, no slips). Once the decoder is locked, one data
// bit of every fourth frame is inverted on the line. The self-synchronous
// descrambler turns such an error into three errors, at the bit itself and
// 39 and 58 data bits later, which may fall into the next frame; the frames
// that receive any of them are worked out here from the error position.
// Checks: every frame is received in order and stays in SYNC (control words
// are never hit); every affected frame has its CRC flag cleared; every other
// frame has a good CRC and exactly the data sent. Counts the errors injected
// and the frames with one, two or three of the resulting errors.
module tb_locic_decoder_biterr;
  import tb_locic_ref_pkg::*;
  import locic_pkg::*;

  localparam int NFRAMES = 1800;
  localparam int FIRST_ERR = 400;   // after the worst-case search for lock

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

  typedef logic [6:0][15:0] dat_t;
  dat_t dat[$];              // data of every frame sent, by frame index
  int   nerr_of[int];        // descrambled errors landing in each frame
  bit   line[$];
  locic_tx_model m;
  int nsent = 0, n_inj = 0;

  task automatic gen_frame();
    logic [7:0] raw [12];
    logic [7:0] w [16];
    dat_t d;
    for (int k = 0; k < 12; k++) raw[k] = 8'($urandom);
    m.build(raw, w);
    for (int j = 0; j < 7; j++) d[j] = {(2*j+1 < 12) ? raw[2*j+1] : 8'h00, (2*j < 12) ? raw[2*j] : 8'h00};
    dat.push_back(d);
    for (int k = 0; k < 16; k++) for (int b = 0; b < 8; b++) line.push_back(w[k][b]);
    if (nsent >= FIRST_ERR && nsent % 4 == 0 && nsent < NFRAMES - 40) begin
      // data bits are the first 112 bits of a frame on the line
      int r, g;
      r = $urandom_range(111);
      line[line.size() - 128 + r] = ~line[line.size() - 128 + r];
      g = nsent * 112 + r;
      nerr_of[g / 112]++;
      nerr_of[(g + 39) / 112]++;
      nerr_of[(g + 58) / 112]++;
      n_inj++;
    end
    nsent++;
  endtask

  initial begin
    m = new(58'h2AA_AAAA_AAAA_AAAA);
    repeat (5) gen_frame();
    repeat (91) void'(line.pop_front());   // arbitrary phase
    repeat (3) @(negedge clk);
    rst_n = 1;
    forever begin
      while (line.size() < 16 + 300) gen_frame();
      for (int j = 0; j < 16; j++) rx[j] = line.pop_front();
      @(negedge clk);
    end
  end

  // output checker
  initial begin
    dat_t got;
    int next_idx = -1, n_aff = 0, n_clean = 0;
    int n_by_count [4] = '{0, 0, 0, 0};
    @(posedge rst_n);
    forever begin
      @(negedge clk);
      if (widx != 3'd7) got[widx] = dout;
      if (crc_strobe && state == ST_SYNC) begin
        int idx, ne;
        if (next_idx < 0) begin
          // first frame after lock: find it (lock happens before errors start)
          idx = -1;
          foreach (dat[i]) if (dat[i] == got) idx = i;
          check(idx >= 0 && idx < FIRST_ERR, "first locked frame found");
        end else idx = next_idx;
        if (idx >= 0) begin
          ne = nerr_of.exists(idx) ? nerr_of[idx] : 0;
          if (ne > 0) begin
            check(!crc_flag, $sformatf("frame %0d with %0d bit errors flagged", idx, ne));
            n_aff++;
            n_by_count[ne > 3 ? 3 : ne]++;
          end else begin
            check(crc_flag && got == dat[idx], $sformatf("clean frame %0d intact", idx));
            n_clean++;
          end
          next_idx = idx + 1;
        end
        if (idx >= NFRAMES - 30) begin
          check(n_inj > 300, "errors injected");
          check(n_by_count[1] > 0 && n_by_count[2] > 0 && n_by_count[3] > 0,
                "frames with one, two and three errors seen");
          check(n_clean > 500, "clean frames checked");
          $display("injected=%0d affected=%0d (1:%0d 2:%0d 3+:%0d) clean=%0d",
                   n_inj, n_aff, n_by_count[1], n_by_count[2], n_by_count[3], n_clean);
          $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
          $finish;
        end
      end
      // a single data-bit error never disturbs the frame synchronisation
      if (next_idx >= 0) check(state == ST_SYNC || !rst_n, "stays in SYNC");
    end
  end
endmodule
