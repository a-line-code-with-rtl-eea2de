// tb_locic_encoder -- drives the encoder like a COTS ADC (12 words per frame
// at 480 Mb/s on both edges of a 240 MHz data clock, 40 MHz frame clock) and compares every output
// frame word by word with the bit-serial reference (scrambling, CRC over the
// raw data, boundary and PRBS fields) over more than one 3564-frame orbit,
// including the frame-0 restart and an external BCID reset. Also checks the
// two-cycle latency from the FIFO output to the serializer word.
module tb_locic_encoder;
  import tb_locic_ref_pkg::*;

  localparam int NFRAMES = 3700;

  logic rst_n = 0, wr_clk = 0, clk = 0, fclk = 0, bcid_reset = 0, seed_wr = 0;
  logic [7:0] adc = 0, txd;
  logic [57:0] seed_in = '0;
  logic txf, ferr, frun, smm;
  logic [11:0] bcid;
  int checks = 0, failures = 0;

  locic_encoder dut (.rst_n, .wr_clk, .adc_data_i(adc), .frame_clk_i(fclk), .clk, .asic_mode_i(1'b0), .asic_data_i(8'h00),
    .bcid_reset_i(bcid_reset), .seed_wr_i(seed_wr), .seed_i(seed_in),
    .tx_data_o(txd), .tx_frame_o(txf), .bcid_o(bcid), .fifo_err_o(ferr),
    .fifo_running_o(frun), .seed_mismatch_o(smm));

  // word rate 480 MHz (period 8); the 240 MHz data clock has an edge in the
  // middle of every word
  logic c8 = 0;
  always #4 c8 = ~c8;
  always @(posedge c8) wr_clk <= ~wr_clk;
  initial begin #1; forever #3 clk = ~clk; end

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

  typedef logic [11:0][7:0] raw_t;
  raw_t sent[$];

  initial begin
    raw_t f;
    #20;
    @(negedge wr_clk) rst_n = 1;
    @(negedge wr_clk);
    for (int n = 0; n < NFRAMES + 20; n++) begin
      for (int k = 0; k < 12; k++) begin
        @(negedge c8);
        adc  = (n % 7 == 3) ? 8'h00 : 8'($urandom);   // some all-zero frames
        fclk = (k < 6);
        f[k] = adc;
      end
      sent.push_back(f);
    end
  end

  // latency FIFO word 0 -> tx word 0
  int lat_checks = 0;
  always @(negedge clk) if (rst_n && dut.frame_start) begin
    repeat (2) @(negedge clk);
    check(txf, "tx word 0 two cycles after FIFO word 0");
    lat_checks++;
  end

  initial begin
    locic_tx_model m;
    logic [7:0] raw [12];
    logic [7:0] e [16];
    logic [7:0] w [16];
    int nfr = 0, wraps = 0, resets = 0;
    m = new({58{1'b1}});
    forever begin
      @(negedge clk);
      if (txf) begin
        raw_t r;
        w[0] = txd;
        for (int k = 1; k < 16; k++) begin
          @(negedge clk);
          w[k] = txd;
          // external BCID reset during one frame: the frame after it is frame 0
          bcid_reset = (nfr == NFRAMES - 50 && k == 3);
        end
        if (nfr == 0) while (sent.size() > 0 && sent[0][0] != w[0] && sent[0][0] != 0) void'(sent.pop_front());
        r = sent.pop_front();
        for (int k = 0; k < 12; k++) raw[k] = r[k];
        if (m.frame == 0 && nfr > 0) wraps++;
        m.build(raw, e);
        for (int k = 0; k < 16; k++)
          check(w[k] == e[k], $sformatf("frame %0d word %0d: %h vs %h", nfr, k, w[k], e[k]));
        check(!ferr && frun, "FIFO running without error");
        nfr++;
        if (nfr == NFRAMES - 49) begin
          m.frame = 0;
          resets++;
        end
        if (nfr == NFRAMES) begin
          check(wraps >= 2, $sformatf("orbit wrap and reset seen (%0d)", wraps));
          check(lat_checks > NFRAMES - 10, "latency checked every frame");
          $display("frames=%0d orbit_restarts=%0d bcid_resets=%0d", nfr, wraps, resets);
          $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
          $finish;
        end
      end
    end
  end
endmodule
