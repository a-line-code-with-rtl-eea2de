// tb_locic_synchronizer -- plays the data extractor: every 8 cycles it
// offers the three candidate control words for the synchronizer's pointer,
// built from a true frame boundary T and the reference control fields.
// Scenarios: first lock from CHECK (pointer search, exactly 4 frames to
// lock), steady SYNC with the PRBS field per frame, a corrupted frame (RESYNC
// at the same position), one-bit slips later and earlier (each recovered in
// one frame), a larger jump (RESYNC -> CHECK -> SYNC), the orbit restart of
// the PRBS fields, and 1010 patterns whose PRBS bits break the recurrence
// (must not lock). Each mechanism is counted and must occur.
module tb_locic_synchronizer;
  import tb_locic_ref_pkg::*;
  import locic_pkg::*;

  logic clk = 0, rst_n = 0, slot = 0;
  logic [2:0][15:0] cand;
  logic [6:0] pos;
  sync_state_e state;
  logic lock, tick, f0;
  prbs_field_t field;
  logic [1:0] slip;
  int checks = 0, failures = 0;

  locic_synchronizer dut (.clk, .rst_n, .slot_i(slot), .cand_i(cand), .pos_o(pos),
    .state_o(state), .lock_o(lock), .tick_o(tick), .field_o(field), .f0_o(f0), .slip_o(slip));

  always #1 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  int T = 37;          // true boundary position
  int f = 100;         // frame number of the next control word
  bit corrupt = 0;     // corrupt the control word of the next frame
  bit fake = 0;        // offer 1010 with wrong PRBS at every position

  function automatic logic [15:0] good(int fr);
    return {ctrl_hi(fr % 3564), 8'($urandom)};
  endfunction

  function automatic logic [15:0] bad();
    logic [15:0] w;
    w = 16'($urandom);
    if (w[11:8] == 4'b0101) w[8] = 0;
    return w;
  endfunction

  // One frame: idle cycles then a slot; returns after the synchronizer acted.
  task automatic frame();
    repeat (7) @(negedge clk);
    for (int k = 0; k < 3; k++) begin
      int p;
      p = (int'(pos) + k - 1 + 128) % 128;
      cand[k] = (p == T && !corrupt) ? good(f) : bad();
      if (fake) cand[k] = {ctrl_hi(f % 3564) ^ 8'h30, 8'h00};   // 1010 but PRBS broken
    end
    slot = 1;
    @(negedge clk);
    slot = 0;
    f++;
    corrupt = 0;
  endtask

  int n_lock = 0, n_resync_same = 0, n_slip_late = 0, n_slip_early = 0, n_lost = 0, n_wrap = 0;

  task automatic lock_from_check(string what);
    int n = 0, at_t = 0;
    while (state != ST_SYNC && n < 1000) begin
      at_t = (pos == 7'(T)) ? at_t + 1 : 0;
      frame();
      n++;
    end
    check(state == ST_SYNC && pos == 7'(T), $sformatf("%s: locked at %0d (T=%0d) after %0d frames", what, pos, T, n));
    check(at_t == 4, $sformatf("%s: lock after exactly 4 frames at the boundary (%0d)", what, at_t));
    n_lock++;
  endtask

  initial begin
    cand = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // false 1010 with broken PRBS never locks
    fake = 1;
    repeat (40) frame();
    check(state == ST_CHECK, "no lock on 1010 with PRBS breaking the rule");
    fake = 0;

    // first lock: the pointer walks to T, then exactly 4 good frames
    begin
      int n = 0;
      while (pos != 7'(T) && n < 200) begin frame(); n++; end
      check(pos == 7'(T), "pointer search reaches T");
      repeat (3) begin frame(); check(state == ST_CHECK, "still CHECK before 4 frames"); end
      frame();
      check(state == ST_SYNC, "SYNC after 4 consecutive frames");
      n_lock++;
    end

    // steady SYNC, ticks and fields
    repeat (20) begin
      frame();
      #0.1;
      check(state == ST_SYNC, "stays in SYNC");
      check(field == ctrl_hi((f - 1) % 3564) >> 4, "PRBS field of the frame");
    end

    // one corrupted control word: RESYNC, then SYNC at the same position
    corrupt = 1;
    frame();
    check(state == ST_RESYNC, "corrupted frame -> RESYNC");
    frame();
    check(state == ST_SYNC && pos == 7'(T), "RESYNC -> SYNC, same position");
    n_resync_same++;

    // one-bit slips in both directions, repeated across word boundaries
    for (int i = 0; i < 40; i++) begin
      bit late;
      late = (i % 3 != 1);
      T = late ? (T + 1) % 128 : (T + 127) % 128;
      frame();
      check(state == ST_RESYNC, "slip -> RESYNC");
      frame();
      check(state == ST_SYNC && pos == 7'(T), $sformatf("slip %s recovered in one frame", late ? "late" : "early"));
      if (late) n_slip_late++; else n_slip_early++;
      repeat (2) frame();
    end

    // large jump: RESYNC fails, CHECK, then lock again
    T = (T + 10) % 128;
    frame();
    check(state == ST_RESYNC, "jump -> RESYNC");
    frame();
    check(state == ST_CHECK, "RESYNC failed -> CHECK");
    n_lost++;
    lock_from_check("relock");

    // orbit restart of the PRBS fields
    f = 3564 * 3 - 30;
    // re-lock needed because the frame number jumped
    repeat (2) frame();
    lock_from_check("before wrap");
    repeat (60) begin
      frame();
      check(state == ST_SYNC, $sformatf("SYNC across orbit restart (frame %0d)", (f - 1) % 3564));
    end
    n_wrap++;

    check(n_lock > 0 && n_resync_same > 0 && n_slip_late > 0 && n_slip_early > 0 &&
          n_lost > 0 && n_wrap > 0, "all mechanisms exercised");
    $display("locks=%0d resync_same=%0d slips_late=%0d slips_early=%0d lost=%0d wraps=%0d",
             n_lock, n_resync_same, n_slip_late, n_slip_early, n_lost, n_wrap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
