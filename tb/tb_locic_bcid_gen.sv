// tb_locic_bcid_gen -- feeds the PRBS fields of consecutive frames (from the
// bit-serial reference) and checks that the BCID stays invalid until the
// four most recent frames are one of the decoded subset windows 496k..496k+3,
// is then equal to the true frame number for every following frame, wraps
// correctly at the orbit restart (no false table hit across it), survives a
// RESYNC period, and is invalidated by CHECK. Also checks the worst-case time
// to the first valid BCID (at most 496 + 3 frames).
module tb_locic_bcid_gen;
  import tb_locic_ref_pkg::*;
  import locic_pkg::*;

  logic clk = 0, rst_n = 0, tick = 0, f0 = 0;
  sync_state_e state = ST_CHECK;
  prbs_field_t field = '0;
  logic [11:0] bcid;
  logic valid;
  int checks = 0, failures = 0;

  locic_bcid_gen dut (.clk, .rst_n, .state_i(state), .tick_i(tick), .field_i(field), .f0_i(f0),
                      .bcid_o(bcid), .valid_o(valid));

  always #1 clk = ~clk;

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

  int fr = 0;
  task automatic send();
    logic [7:0] t;
    t = ctrl_hi(fr % 3564);
    @(negedge clk);
    field = t[7:4];
    tick  = 1;
    @(negedge clk);
    tick  = 0;
  endtask

  // Sync from frame `start`; returns the number of frames to the first valid BCID.
  task automatic lock_at(int start, output int wait_frames);
    state = ST_CHECK;
    repeat (2) @(negedge clk);
    state = ST_SYNC;
    fr = start;
    wait_frames = 0;
    forever begin
      send();
      if (valid) break;
      check(bcid == BCID_INVALID, "invalid before the first subset window");
      wait_frames++;
      fr++;
      if (wait_frames > 600) break;
    end
    check(valid && bcid == 12'(fr % 3564), $sformatf("first BCID %0d vs %0d", bcid, fr % 3564));
    fr++;
  endtask

  initial begin
    int w;
    int max_wait = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // worst case: start just after a subset window
    lock_at(1, w);
    max_wait = w;
    check(w <= 496 + 3, $sformatf("first valid BCID within 499 frames (%0d)", w));
    // follow two full orbits: every frame must be right, incl. the wrap
    for (int i = 0; i < 2 * 3564 + 10; i++) begin
      send();
      check(valid && bcid == 12'(fr % 3564), $sformatf("frame %0d: bcid %0d", fr, bcid));
      fr++;
    end
    // RESYNC: output invalid, count continues; back in SYNC it is right at once
    state = ST_RESYNC;
    send();
    check(!valid && bcid == BCID_INVALID, "invalid in RESYNC");
    fr++;
    state = ST_SYNC;
    send();
    check(valid && bcid == 12'(fr % 3564), "valid one frame after RESYNC -> SYNC");
    fr++;
    // CHECK invalidates; a new lock needs a subset window again
    for (int s = 0; s < 8; s++) begin
      lock_at(100 + s * 437, w);
      if (w > max_wait) max_wait = w;
      check(w <= 499, "lock wait bound");
    end
    $display("longest wait for the first BCID: %0d frames", max_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
