// tb_locic_seed_regs -- checks the reset seed, writes, and that an upset of
// any single copy is voted out, flagged and scrubbed one cycle later.
module tb_locic_seed_regs;
  logic clk = 0, rst_n = 0, wr = 0, mm;
  logic [57:0] wd = 0, seed;
  int checks = 0, failures = 0;

  locic_seed_regs dut (.clk, .rst_n, .wr_i(wr), .wdata_i(wd), .seed_o(seed), .mismatch_o(mm));

  always #1 clk = ~clk;

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    logic [57:0] v;
    repeat (3) @(negedge clk);
    rst_n = 1;
    check(seed != '0, "reset seed non-zero");
    check(!mm, "no mismatch after reset");
    for (int i = 0; i < 30; i++) begin
      v = {26'($urandom), 32'($urandom)};
      @(negedge clk) begin wr = 1; wd = v; end
      @(negedge clk) wr = 0;
      check(seed == v, "write");
      // upset one copy
      case (i % 3)
        0: dut.copy_a = ~dut.copy_a;
        1: dut.copy_b = dut.copy_b ^ 58'h1;
        default: dut.copy_c = '0;
      endcase
      #0.1;
      check(seed == v, "vote hides one upset copy");
      check(mm, "mismatch flagged");
      @(negedge clk);
      check(seed == v && !mm, "scrubbed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
