// tb_locic_scrambler -- compares the 8-bit parallel scrambler with a
// bit-serial x^58+x^39+1 model, including idle (control) slots that must not
// advance the state, all-zero input (output must not be zero with a non-zero
// seed), a seed reload, and the one-cycle latency.
module tb_locic_scrambler;
  import tb_locic_ref_pkg::*;

  localparam logic [57:0] SEED1 = 58'h2A5_5AA5_0F0F_3C3C;
  localparam logic [57:0] SEED2 = 58'h001_0000_0000_0001;

  logic clk = 0, rst_n = 0, en = 0, load = 0;
  logic [57:0] seed = SEED1;
  logic [7:0] d = 0, q;
  int checks = 0, failures = 0;

  locic_scrambler dut (.clk, .rst_n, .seed_i(seed), .load_i(load), .en_i(en), .data_i(d), .data_o(q));

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

  task automatic run(locic_tx_model m, int n, bit zeros);
    int ones = 0;
    for (int i = 0; i < n; i++) begin
      logic [7:0] e;
      @(negedge clk);
      en = (i % 16) < 14;
      d  = zeros ? 8'h00 : 8'($urandom);
      for (int b = 0; b < 8; b++) e[b] = en ? m.scr(d[b]) : 1'b0;
      @(negedge clk);   // one cycle later
      en = 0;
      check(q == e, $sformatf("word %0d: %h vs %h", i, q, e));
      ones += $countones(q);
    end
    if (zeros) check(ones > n, "zero data still toggles the line");
  endtask

  initial begin
    locic_tx_model m;
    repeat (3) @(negedge clk);
    rst_n = 1;
    m = new(SEED1);
    run(m, 300, 1);
    run(m, 500, 0);
    @(negedge clk); seed = SEED2; load = 1;
    @(negedge clk); load = 0;
    m = new(SEED2);
    run(m, 300, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
