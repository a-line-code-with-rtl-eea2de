// tb_locic_prbs_gen -- checks T8..T15 over more than one full 3564-frame
// orbit: the boundary 1010, the pairs of Fig.-3 style printed start
// sequences (11 00 01 10 11 10 10 10 for T12T13), the bit-serial PRBS
// reference, the restart at frame 0 after frame 3563 and the BCID reset input.
module tb_locic_prbs_gen;
  import tb_locic_ref_pkg::*;

  logic clk = 0, rst_n = 0, frame_en = 0, bcid_reset = 0;
  logic [7:0] t;
  logic [11:0] bcid;
  int checks = 0, failures = 0;

  locic_prbs_gen dut (.clk, .rst_n, .frame_en_i(frame_en), .bcid_reset_i(bcid_reset),
                      .t_o(t), .bcid_o(bcid));

  always #1 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic next_frame();
    @(negedge clk) frame_en = 1;
    @(negedge clk) frame_en = 0;
  endtask

  initial begin
    bit [1:0] printed[8] = '{2'b11, 2'b00, 2'b01, 2'b10, 2'b11, 2'b10, 2'b10, 2'b10};
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 3564 + 40; f++) begin
      next_frame();
      check(bcid == 12'(f % 3564), $sformatf("bcid %0d vs %0d", bcid, f));
      check(t[3:0] == 4'b0101, "boundary 1010");
      check(t == ctrl_hi(f % 3564), $sformatf("frame %0d T8..T15 %b vs %b", f, t, ctrl_hi(f % 3564)));
      if (f < 8) check({t[4], t[5]} == printed[f], $sformatf("printed T12T13 frame %0d", f));
    end
    // T14T15 printed start 11 00 00 00 10 appears after a BCID reset
    @(negedge clk) bcid_reset = 1;
    @(negedge clk) bcid_reset = 0;
    next_frame();
    check(bcid == 0 && {t[6], t[7]} == 2'b11, "reset -> frame 0, T14T15 = 11");
    next_frame(); check({t[6], t[7]} == 2'b00, "T14T15 frame 1");
    next_frame(); check({t[6], t[7]} == 2'b00, "T14T15 frame 2");
    next_frame(); check({t[6], t[7]} == 2'b00, "T14T15 frame 3");
    next_frame(); check({t[6], t[7]} == 2'b10, "T14T15 frame 4");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
