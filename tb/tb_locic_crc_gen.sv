// tb_locic_crc_gen -- feeds frames of 14 random words (plus two idle slots)
// and compares T0..T7 with a CRC computed by polynomial long division; also
// checks the one-cycle latency and that the register restarts every frame.
module tb_locic_crc_gen;
  import tb_locic_ref_pkg::*;

  logic clk = 0, rst_n = 0, en = 0, clr = 0;
  logic [7:0] d = 0, crc, t;
  int checks = 0, failures = 0;

  locic_crc_gen dut (.clk, .rst_n, .en_i(en), .clr_i(clr), .data_i(d), .crc_o(crc), .t_o(t));

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
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 200; f++) begin
      bit msg[$];
      logic [7:0] ref_crc;
      msg = {};
      for (int k = 0; k < 16; k++) begin
        @(negedge clk);
        en  = (k < 14);
        clr = (k == 0);
        d   = (f < 3) ? 8'h00 : 8'($urandom);
        if (f == 3) d = 8'hFF;
        if (k < 14) for (int b = 0; b < 8; b++) msg.push_back(d[b]);
        if (k == 14) begin
          ref_crc = crc_of(msg);
          check(crc == ref_crc, $sformatf("frame %0d crc %h vs %h", f, crc, ref_crc));
          for (int b = 0; b < 8; b++) check(t[b] == ref_crc[7-b], "T bit order");
        end
      end
    end
    // latency: after the 14th word the CRC is ready one cycle later
    @(negedge clk); en = 1; clr = 1; d = 8'h01;
    @(negedge clk); en = 0; clr = 0;
    begin
      bit m[$];
      for (int b = 0; b < 8; b++) m.push_back(b == 0);
      check(crc == crc_of(m), "one-cycle latency");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
