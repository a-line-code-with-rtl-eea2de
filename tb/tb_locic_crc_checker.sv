// tb_locic_crc_checker -- feeds frames of seven random data words and a
// control word whose T0..T7 come from the reference CRC (long division), and
// checks the CRC flag: set for intact frames, cleared for a flipped data bit,
// a flipped CRC bit, a frame with a missing word, and while not in SYNC. Also
// checks the data pass-through, data_valid and the one-cycle latency.
module tb_locic_crc_checker;
  import tb_locic_ref_pkg::*;

  logic clk = 0, rst_n = 0, lock = 0;
  logic [15:0] din = 0, dout;
  logic [2:0] widx = 7, widx_out;
  logic dvalid, crc_flag, crc_strobe, frame_flag;
  int checks = 0, failures = 0;

  locic_crc_checker dut (.clk, .rst_n, .data_i(din), .widx_i(widx), .lock_i(lock),
    .data_o(dout), .widx_o(widx_out), .data_valid_o(dvalid), .crc_flag_o(crc_flag),
    .crc_strobe_o(crc_strobe), .frame_flag_o(frame_flag));

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

  // kind: 0 good, 1 data bit flipped, 2 CRC bit flipped, 3 word missing
  task automatic frame(int kind);
    logic [15:0] w [7];
    logic [15:0] ctrl;
    logic [7:0] c;
    bit msg[$];
    logic [3:0] bi;
    msg = {};
    for (int k = 0; k < 7; k++) begin
      w[k] = 16'($urandom);
      for (int b = 0; b < 16; b++) msg.push_back(w[k][b]);
    end
    c = crc_of(msg);
    for (int b = 0; b < 8; b++) ctrl[b] = c[7-b];
    ctrl[15:8] = 8'($urandom);
    bi = $urandom_range(15);
    if (kind == 1) w[3][bi] = ~w[3][bi];
    if (kind == 2) ctrl[bi[2:0]] = ~ctrl[bi[2:0]];
    for (int k = 0; k < 8; k++) begin
      if (kind == 3 && k == 4) continue;
      din  = (k == 7) ? ctrl : w[k];
      widx = 3'(k);
      @(negedge clk);
      check(dout == din && widx_out == widx, "data and index one cycle later");
      check(dvalid == (lock && k != 7), "data_valid");
      check(crc_strobe == (k == 7), "crc_strobe");
      check(frame_flag == lock, "frame_flag");
      if (k == 7) check(crc_flag == (kind == 0 && lock), $sformatf("crc flag kind %0d lock %0d", kind, lock));
    end
  endtask

  initial begin
    int counts[4] = '{0, 0, 0, 0};
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    frame(0);   // not locked
    lock = 1;
    for (int i = 0; i < 400; i++) begin
      int kind;
      kind = (i % 5 == 0) ? int'($urandom_range(3)) : 0;
      frame(kind);
      counts[kind]++;
    end
    check(counts[1] > 0 && counts[2] > 0 && counts[3] > 0, "all error kinds sent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
