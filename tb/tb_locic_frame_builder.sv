// tb_locic_frame_builder -- drives frame starts every 16 cycles and
// slot-tagged scrambled data, and checks the enable pattern, the word order of
// the output (14 data slots, CRC T0..T7, then T8..T15), the one-cycle builder
// latency and the frame marker.
module tb_locic_frame_builder;
  logic clk = 0, rst_n = 0, fs = 0;
  logic [7:0] scr = 0, crc_t = 8'hC3, prbs_t = 8'h5A, q;
  logic scr_en, crc_en, crc_clr, prbs_en, qf;
  int checks = 0, failures = 0;
  int unsigned cyc = 0;

  locic_frame_builder dut (.clk, .rst_n, .frame_start_i(fs), .scr_data_i(scr),
    .crc_t_i(crc_t), .prbs_t_i(prbs_t), .scr_en_o(scr_en), .crc_en_o(crc_en),
    .crc_clr_o(crc_clr), .prbs_en_o(prbs_en), .tx_data_o(q), .tx_frame_o(qf));

  always #1 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // Slot of the FIFO word in cycle c (frames start at cycle 5 + 16k).
  function automatic int slot_of(int c);
    return (c < 5) ? -1 : (c - 5) % 16;
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 16 * 40; c++) begin
      int s, s1, s2;
      s  = slot_of(c);
      s1 = slot_of(c - 1);
      s2 = slot_of(c - 2);
      @(negedge clk);
      // inputs of this cycle
      fs  = (s == 0);
      // scrambler output of this cycle belongs to the previous slot
      scr = (s1 >= 0) ? 8'(8'h10 + s1 + c) : 8'h00;
      #0;
      check(scr_en == (s >= 0 && s < 14), $sformatf("scr_en c%0d", c));
      check(crc_en == (s >= 0 && s < 14), "crc_en");
      check(crc_clr == (s == 0), "crc_clr");
      check(prbs_en == (s == 0), "prbs_en");
      // output registered at the previous edge: slot s2
      if (c >= 2) begin
        logic [7:0] e;
        if (s2 < 0)        e = 8'h00;
        else if (s2 < 14)  e = 8'(8'h10 + s2 + c - 1);
        else if (s2 == 14) e = crc_t;
        else               e = prbs_t;
        check(q == e, $sformatf("tx c%0d slot %0d: %h vs %h", c, s2, q, e));
        check(qf == (s2 == 0), "tx_frame");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
