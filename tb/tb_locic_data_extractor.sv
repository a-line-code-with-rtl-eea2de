// tb_locic_data_extractor -- feeds a known pseudo-random bit stream in 16-bit
// words and checks, for every frame boundary pointer value, that the three
// candidate control words are the stream bits at the pointer, one bit before
// and one bit after it, that the control slot comes every 8 words at a stream
// position that moves by exactly one bit when the pointer moves by one, and
// that the aligned output word and its index follow one cycle later.
module tb_locic_data_extractor;
  logic clk = 0, rst_n = 0;
  logic [15:0] rx = 0, word;
  logic [6:0] pos = 0;
  logic slot;
  logic [2:0][15:0] cand;
  logic [2:0] widx;
  int checks = 0, failures = 0;

  locic_data_extractor dut (.clk, .rst_n, .rx_data_i(rx), .pos_i(pos),
    .slot_o(slot), .cand_o(cand), .word_o(word), .widx_o(widx));

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

  function automatic bit sbit(longint i);
    longint unsigned x;
    x = longint'(i) * 64'h9E37_79B9_7F4A_7C15;
    return ^(x[63:40]);
  endfunction

  function automatic logic [15:0] sword(longint start);
    logic [15:0] w;
    for (int j = 0; j < 16; j++) w[j] = sbit(start + j);
    return w;
  endfunction

  initial begin
    longint nfed = 0;
    longint a_prev = -1;
    int pos_prev = 0;
    logic [15:0] exp_word;
    bit have_exp = 0;
    int nslot = 0;
    rx = sword(0);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 8 * 128 * 2 + 64; c++) begin
      @(posedge clk);
      nfed++;
      @(negedge clk);
      rx = sword(16 * nfed);
      if (have_exp) begin
        check(word == exp_word, "aligned word one cycle after the candidate");
        have_exp = 0;
      end
      if (nfed >= 3 && slot) begin
        longint a;
        a = 16 * (nfed - 2) + pos[3:0];
        check(cand[0] == sword(a - 1), "candidate one bit early");
        check(cand[1] == sword(a),     "candidate at pointer");
        check(cand[2] == sword(a + 1), "candidate one bit late");
        if (a_prev >= 0) begin
          longint d;
          int step;
          d = a - a_prev;
          step = (int'(pos) - pos_prev + 128) % 128;
          check(d == 128 + step || d == step,
                $sformatf("slot spacing %0d for pointer step %0d", d, step));
        end
        exp_word = cand[1];
        have_exp = 1;
        a_prev = a;
        pos_prev = pos;
        nslot++;
        @(posedge clk);
        nfed++;
        @(negedge clk);
        rx = sword(16 * nfed);
        check(widx == 3'd7, "control word index 7");
        check(word == exp_word, "aligned word");
        have_exp = 0;
        // move the pointer by one bit every other frame
        if (nslot % 2 == 0) pos = pos + 7'd1;
      end
    end
    check(nslot > 200, "slots seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
