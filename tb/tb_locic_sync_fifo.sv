// tb_locic_sync_fifo -- writes 12 random words per frame at the 480 MHz
// word rate (period 8, on both edges of the 240 MHz data clock) with a 40 MHz
// frame clock (period 96) and reads at 640 MHz (period 6). Checks that every
// output frame is 16 words long, holds the 12 written words in order
// followed by 4 zero words, that frame_start_o
// marks word 0, that the read side never reports an error once running, and
// that a frame-clock disturbance is detected and recovered from. Also
// measures the latency from word 0 on the ADC bus to word 0 at the output
// and checks that it is the same for every frame.
module tb_locic_sync_fifo;
  logic rst_n = 0, wr_clk = 0, rd_clk = 0, fclk = 0;
  logic [7:0] adc = 0, q;
  logic fs, running, err;
  int checks = 0, failures = 0;
  int errs = 0;
  bit glitch = 0;

  locic_sync_fifo dut (.rst_n, .wr_clk, .adc_data_i(adc), .frame_clk_i(fclk),
    .rd_clk, .data_o(q), .frame_start_o(fs), .running_o(running), .err_o(err));

  // word rate 480 MHz (period 8); the 240 MHz data clock has an edge in the
  // middle of every word
  logic c8 = 0;
  always #4 c8 = ~c8;
  always @(posedge c8) wr_clk <= ~wr_clk;
  initial begin #1; forever #3 rd_clk = ~rd_clk; end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  typedef logic [11:0][7:0] frame_t;
  frame_t sent[$];
  realtime t_in[$];   // time word 0 of each frame was put on the ADC bus

  // ADC model: one word per write-clock cycle, frame clock high for words 0..5
  initial begin
    frame_t f;
    #20;
    @(negedge wr_clk) rst_n = 1;
    @(negedge wr_clk);
    for (int n = 0; n < 400; n++) begin
      for (int k = 0; k < 12; k++) begin
        @(negedge c8);
        adc  = 8'($urandom);
        fclk = (k < 6);
        // frame clock disturbance: low early, then a false rising edge at
        // word 6 (a rising-edge word)
        if (glitch && n == 200 && k >= 4) fclk = (k == 6);
        f[k] = adc;
        if (k == 0) t_in.push_back($realtime);
      end
      sent.push_back(f);
    end
  end

  // Reader: collect frames
  initial begin
    logic [7:0] w [16];
    int nfr = 0;
    int errs_seen = 0;
    realtime t_last = 0;
    bit first = 1;
    realtime lat_min = 1.0e9, lat_max = 0;
    glitch = 1;
    forever begin
      @(negedge rd_clk);
      if (err) errs++;
      if (fs) begin
        w[0] = q;
        // latency, word 0 on the ADC bus -> word 0 on data_o (first frames, in
        // time units of 1/8 word period = 0.26 ns)
        if (nfr < 150) begin
          realtime l;
          l = $realtime - t_in[nfr];
          if (l < lat_min) lat_min = l;
          if (l > lat_max) lat_max = l;
        end
        for (int k = 1; k < 16; k++) begin
          @(negedge rd_clk);
          if (err) errs++;
          w[k] = q;
          if (errs == errs_seen) check(!fs, "frame_start only on word 0");
        end
        if (first || errs != errs_seen) begin
          // start, or re-alignment after an error: find the frame in the queue
          while (sent.size() > 0 && sent[0][0] != w[0]) void'(sent.pop_front());
          first = 0;
        end
        if (errs != errs_seen) begin
          // the frame overlapping the error is partial; skip it
          errs_seen = errs;
          if (sent.size() > 0 && sent[0][0] == w[0] && sent[0][1] == w[1]) void'(sent.pop_front());
        end else if (sent.size() == 0) check(0, "frame read before written");
        else begin
          frame_t e;
          e = sent.pop_front();
          for (int k = 0; k < 12; k++) check(w[k] == e[k], $sformatf("frame %0d word %0d %h vs %h", nfr, k, w[k], e[k]));
          for (int k = 12; k < 16; k++) check(w[k] == 8'h00, "dummy slots zero");
        end
        nfr++;
        // frames follow each other with a 16-cycle (96 time unit) period
        if (nfr > 1 && nfr < 190) check($realtime - t_last == 96.0, $sformatf("16-cycle frame period after frame %0d", nfr));
        t_last = $realtime;
        if (nfr == 380) begin
          check(errs >= 1 && errs <= 2, $sformatf("glitch detected as alignment error (%0d)", errs));
          check(running, "running after recovery");
          check(lat_max - lat_min <= 6.0, "constant latency (within one read cycle)");
          $display("latency word 0 in -> out: %0.1f..%0.1f ns", lat_min * 0.2604, lat_max * 0.2604);
          $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
          $finish;
        end
      end
    end
  end
endmodule
