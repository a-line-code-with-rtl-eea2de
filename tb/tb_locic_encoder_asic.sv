// tb_locic_encoder_asic -- the encoder in front-end ADC mode (asic_mode_i = 1).
//
// The front-end ADC model sends 16 words per frame at the 640 MHz core rate:
// D0..D11 random, D12/D13 random calibration bits and two random dummy words
// (which must be replaced), with word 0 at the rising edge of the 40 MHz frame
// clock. The COTS write port is left idle (no wr_clk), so the FIFO never runs.
// Every output frame is compared word by word with the bit-serial reference
// (all 14 data words scrambled and covered by the CRC, control code in words
// 14 and 15) over more than one 3564-frame orbit, and the latency from an
// input word to its output word is checked to be 3 cycles (input register,
// scrambler stage, builder stage).
module tb_locic_encoder_asic;
  import tb_locic_ref_pkg::*;

  localparam int NFRAMES = 3650;

  logic rst_n = 0, clk = 0, fclk = 0;
  logic [7:0] din = 0, txd;
  logic txf, ferr, frun, smm;
  logic [11:0] bcid;
  int checks = 0, failures = 0;

  locic_encoder dut (.rst_n, .wr_clk(1'b0), .adc_data_i(8'h00), .frame_clk_i(fclk), .clk,
    .asic_mode_i(1'b1), .asic_data_i(din),
    .bcid_reset_i(1'b0), .seed_wr_i(1'b0), .seed_i(58'h0),
    .tx_data_o(txd), .tx_frame_o(txf), .bcid_o(bcid), .fifo_err_o(ferr),
    .fifo_running_o(frun), .seed_mismatch_o(smm));

  always #3 clk = ~clk;

  initial begin
    #(96 * (NFRAMES + 40));
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  typedef logic [13:0][7:0] raw_t;
  raw_t sent[$];
  int in_start[$];     // cycle number of each word 0
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    raw_t f;
    #20;
    @(negedge clk) rst_n = 1;
    repeat (5) @(negedge clk);
    for (int n = 0; n < NFRAMES + 20; n++) begin
      for (int k = 0; k < 16; k++) begin
        din  = (n % 9 == 4 && k < 14) ? 8'h00 : 8'($urandom);   // some all-zero frames
        fclk = (k < 8);
        if (k < 14) f[k] = din;
        if (k == 0) in_start.push_back(cyc);
        @(negedge clk);
      end
      sent.push_back(f);
    end
  end

  initial begin
    locic_tx_model m;
    logic [7:0] raw [14];
    logic [7:0] e [16];
    logic [7:0] w [16];
    int nfr = 0, wraps = 0, lat_ok = 0;
    m = new({58{1'b1}});
    forever begin
      @(negedge clk);
      if (txf) begin
        raw_t r;
        int t0;
        t0 = cyc;
        w[0] = txd;
        for (int k = 1; k < 16; k++) begin
          @(negedge clk);
          w[k] = txd;
        end
        r = sent.pop_front();
        // cyc counts posedges; word 0 sampled at posedge in_start+1, out 3 later
        check(t0 - in_start.pop_front() == 3, $sformatf("latency frame %0d", nfr));
        lat_ok++;
        for (int k = 0; k < 14; k++) raw[k] = r[k];
        if (m.frame == 0 && nfr > 0) wraps++;
        m.build14(raw, e);
        for (int k = 0; k < 16; k++)
          check(w[k] == e[k], $sformatf("frame %0d word %0d: %h vs %h", nfr, k, w[k], e[k]));
        check(!frun && !ferr, "FIFO idle in front-end ADC mode");
        nfr++;
        if (nfr == NFRAMES) begin
          check(wraps >= 1, "orbit restart seen");
          $display("frames=%0d orbit_restarts=%0d latency_checks=%0d", nfr, wraps, lat_ok);
          $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
          $finish;
        end
      end
    end
  end
endmodule
