// locic_bcid_gen -- recovers the 12-bit bunch-crossing ID in the decoder.
//
// The PRBS fields of four consecutive frames give one byte of each sequence
// (PRBS5 byte and PRBS7 byte, first-sent bit of the oldest frame in bit 7).
// A full map from these bytes to the 3564 BCIDs would be a large table, so only
// a subset is decoded: the eight BCIDs 0, 496, 992, 1488, 1984, 2480, 2976
// and 3472 = 496*k, which share one PRBS5 byte (496 is a multiple of 31) and
// differ in their PRBS7 byte. When the bytes of frames b..b+3 match entry k,
// the BCID of the current frame (b+3) is 496*k+3. Otherwise a valid BCID is
// incremented by one per frame (wrapping 3563 -> 0) and an invalid one stays
// invalid. A frame that the synchronizer accepted only as a PRBS restart
// (frame-0 pattern where another value was predicted, as after a BCID reset
// in the encoder) sets the count to 0 without changing its validity. So the first valid BCID after locking from CHECK appears within
// 496 frames, while after a RESYNC the count simply continues.
//
// The table is computed at elaboration from the PRBS recurrences
// (locic_pkg::prbs5_byte_of / prbs7_byte_of), not stored as numbers.
//
// Interface / timing: tick_i/field_i come from the synchronizer once per frame
// in SYNC or RESYNC; state_i resets the calculation in CHECK. bcid_o is
// registered and reads BCID_INVALID (0xFFF) unless the synchronizer is in SYNC
// and a BCID has been found. The subset scheme follows the source; its list
// prints 1489 where every other property (shared PRBS5 byte, 496 spacing)
// requires 1488, which is used here. The "+3" convention is this design's.
module locic_bcid_gen #(
  parameter int unsigned PERIOD = locic_pkg::BCID_PERIOD,
  parameter int unsigned STEP   = 496,   // spacing of the decoded subset
  parameter int unsigned NKEYS  = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  locic_pkg::sync_state_e state_i,
  input  logic                   tick_i,
  input  locic_pkg::prbs_field_t field_i,
  input  logic                   f0_i,      // frame recognised as frame 0 by its restart pattern
  output logic [11:0]            bcid_o,
  output logic                   valid_o
);
  import locic_pkg::*;

  typedef logic [7:0] key_t;

  function automatic key_t [NKEYS-1:0] make_keys();
    key_t [NKEYS-1:0] k;
    for (int unsigned i = 0; i < NKEYS; i++) k[i] = prbs7_byte_of(i * STEP);
    return k;
  endfunction

  localparam key_t KEY5 = prbs5_byte_of(0);
  localparam key_t [NKEYS-1:0] KEY7 = make_keys();

  key_t        b5, b7, b5n, b7n;
  logic [2:0]  nfr;
  logic [11:0] cnt;
  logic        cnt_valid;
  logic        hit;
  logic [11:0] hit_bcid;

  assign b5n = {b5[5:0], field_i.p5[0], field_i.p5[1]};
  assign b7n = {b7[5:0], field_i.p7[0], field_i.p7[1]};

  always_comb begin
    hit      = 1'b0;
    hit_bcid = '0;
    if (nfr >= 3'd3 && b5n == KEY5) begin
      for (int unsigned i = 0; i < NKEYS; i++) begin
        if (b7n == KEY7[i]) begin
          hit      = 1'b1;
          hit_bcid = 12'(i * STEP + 3);
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b5        <= '0;
      b7        <= '0;
      nfr       <= '0;
      cnt       <= '0;
      cnt_valid <= 1'b0;
    end else if (state_i == ST_CHECK) begin
      nfr       <= '0;
      cnt_valid <= 1'b0;
    end else if (tick_i) begin
      b5 <= b5n;
      b7 <= b7n;
      if (nfr != 3'd4) nfr <= nfr + 3'd1;
      if (hit) begin
        cnt       <= hit_bcid;
        cnt_valid <= 1'b1;
      end else if (f0_i) begin
        cnt <= '0;
      end else if (cnt_valid) begin
        cnt <= (cnt == 12'(PERIOD - 1)) ? 12'd0 : cnt + 12'd1;
      end
    end
  end

  assign valid_o = cnt_valid && state_i == ST_SYNC;
  assign bcid_o  = valid_o ? cnt : BCID_INVALID;

endmodule
