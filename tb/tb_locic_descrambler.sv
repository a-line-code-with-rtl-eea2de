// tb_locic_descrambler -- scrambles random frames with the bit-serial
// reference scrambler (control words left in clear), feeds them 16 bits per
// cycle and checks: data recovered exactly once 58 scrambled bits have been
// seen, control words passed unchanged, one-cycle latency, and that a single
// line bit error gives exactly three wrong bits (at +0, +39 and +58 data bits).
module tb_locic_descrambler;
  import tb_locic_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [15:0] din = 0, dout;
  logic [2:0] widx_in = 7, widx_out;
  int checks = 0, failures = 0;

  locic_descrambler dut (.clk, .rst_n, .data_i(din), .widx_i(widx_in), .data_o(dout), .widx_o(widx_out));

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

  initial begin
    locic_tx_model m;
    int nbits = 0;
    int errbits = 0;
    m = new(58'h3FF_FFFF_0000_1234);
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < 8 * 200; n++) begin
      logic [15:0] raw, line, exp_out;
      int k;
      k = n % 8;
      raw = (k == 7) ? 16'($urandom) : ((n / 8) % 5 == 2 ? 16'h0000 : 16'($urandom));
      if (k == 7) line = raw;
      else for (int b = 0; b < 16; b++) line[b] = m.scr(raw[b]);
      // one line error in frame 100, word 2, bit 5
      if (n == 8 * 100 + 2) line[5] = ~line[5];
      din = line;
      widx_in = 3'(k);
      @(negedge clk);   // output one cycle later; the next word follows at once
      check(widx_out == 3'(k), "index follows");
      if (k == 7) check(dout == raw, "control word unchanged");
      else begin
        if (nbits >= 58 && n < 8 * 100) check(dout == raw, $sformatf("word %0d", n));
        if (n >= 8 * 100 && n < 8 * 101 + 2) errbits += $countones(dout ^ raw);
        if (n >= 8 * 101 + 2) check(dout == raw, "recovered after error");
        nbits += 16;
      end
    end
    check(errbits == 3, $sformatf("one line error -> three data errors (%0d)", errbits));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
