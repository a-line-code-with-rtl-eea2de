// locic_synchronizer -- frame synchronisation state machine of the decoder.
//
// States (as in the line code's synchronisation diagram):
//   CHECK   At each candidate control-word slot, test the boundary field
//           T8..T11 = 1010. After 4 consecutive frames with 1010 at the same
//           pointer, the 8 PRBS5 bits and 8 PRBS7 bits collected must obey the
//           recurrences s[n]=s[n-5]^s[n-3] and s[n]=s[n-7]^s[n-6]; then go to
//           SYNC. Any failure moves the pointer one bit later and starts over.
//   SYNC    Predict T8..T15 of the next frame from the PRBS history. A match
//           keeps SYNC; a mismatch goes to RESYNC (the frame is counted with
//           its predicted PRBS bits).
//   RESYNC  At the next frame, compare the prediction with the control word at
//           the same pointer, one bit earlier and one bit later. The first
//           match (same, earlier, later) returns to SYNC with the pointer moved
//           accordingly; otherwise go to CHECK at the current pointer.
//           If the earlier and the later word both match, one of them is an
//           alias two bits from the true boundary (1010 repeats with period
//           2); the decision is then deferred once by one frame (stay in RESYNC).
// The PRBS fields restart at frame 0 after each 3564-frame orbit. A control
// word with boundary 1010 and PRBS field 1111 (the frame-0 value) is therefore
// also accepted in SYNC/RESYNC and reloads the history with that of frame 0.
//
// Interface / timing: the extractor supplies slot_i and the three candidate
// words combinationally; pos_o is registered. After a slot has been handled,
// further slots are ignored for HOLDOFF cycles, so that a pointer carry into
// the next word does not make the same control word be examined twice.
// tick_o pulses for every frame handled in SYNC or RESYNC, with field_o the
// PRBS field taken for that frame ({T15,T14,T13,T12}) and f0_o set when the
// frame was accepted by the frame-0 rule; lock_o is high in SYNC.
// The states and their transitions are the line code's; the history
// registers, the frame-0 rule, the tie-break and the holdoff are this design's.
module locic_synchronizer #(
  parameter int unsigned CHECK_FRAMES = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    slot_i,
  input  logic [2:0][15:0]        cand_i,
  output logic [6:0]              pos_o,
  output locic_pkg::sync_state_e  state_o,
  output logic                    lock_o,
  output logic                    tick_o,
  output locic_pkg::prbs_field_t  field_o,
  output logic                    f0_o,     // with tick_o: frame taken as frame 0 by the restart rule
  output logic [1:0]              slip_o    // 01: pointer -1, 10: pointer +1 (pulse)
);
  import locic_pkg::*;

  localparam int unsigned HOLDOFF = 6;
  localparam logic [7:0] H5_F0 = prbs5_byte_of(28);   // bits 2f-6..2f+1, f = 0
  localparam logic [7:0] H7_F0 = prbs7_byte_of(124);

  sync_state_e state;
  logic [6:0]  pos;
  logic [2:0]  nfr;
  logic [7:0]  h5, h7;        // last 8 bits of each PRBS, bit 0 newest
  logic [2:0]  since;
  logic        deferred;    // RESYNC decision already deferred once

  // Prediction of the next pairs from the history.
  logic [1:0] pred5, pred7;   // {T13,T12}, {T15,T14}
  assign pred5 = {h5[3] ^ h5[1], h5[4] ^ h5[2]};
  assign pred7 = {h7[5] ^ h7[4], h7[6] ^ h7[5]};

  function automatic logic bnd_ok(input logic [15:0] c);
    return c[11:8] == BOUNDARY;
  endfunction

  function automatic logic pred_ok(input logic [15:0] c, input logic [1:0] p5,
                                   input logic [1:0] p7);
    return bnd_ok(c) && c[13:12] == p5 && c[15:14] == p7;
  endfunction

  function automatic logic frame0_ok(input logic [15:0] c);
    return bnd_ok(c) && c[15:12] == 4'b1111;
  endfunction

  // History after shifting in one pair, first-sent bit first.
  function automatic logic [7:0] push(input logic [7:0] h, input logic [1:0] pair);
    return {h[5:0], pair[0], pair[1]};
  endfunction

  // Recurrence check on 8 collected bits (bit 7 oldest = s0 .. bit 0 = s7).
  function automatic logic comply(input logic [7:0] a5, input logic [7:0] a7);
    return (a5[2] == (a5[7] ^ a5[5])) && (a5[1] == (a5[6] ^ a5[4])) &&
           (a5[0] == (a5[5] ^ a5[3])) && (a7[0] == (a7[7] ^ a7[6]));
  endfunction

  logic        slot;
  logic [15:0] c_nom, c_early, c_late;
  logic [7:0]  h5_rx, h7_rx;
  // History as if the current frame carried the predicted field.
  logic [7:0]  h5_pr, h7_pr;
  // RESYNC: which of the three candidates matches (same, earlier, later).
  logic        rs_hit, rs_f0, rs_again;
  logic [6:0]  rs_step;
  logic [1:0]  rs_slip;

  assign slot    = slot_i && since >= 3'(HOLDOFF);
  assign c_early = cand_i[0];
  assign c_nom   = cand_i[1];
  assign c_late  = cand_i[2];
  assign h5_rx   = push(h5, c_nom[13:12]);
  assign h7_rx   = push(h7, c_nom[15:14]);
  assign h5_pr   = push(h5, pred5);
  assign h7_pr   = push(h7, pred7);

  always_comb begin
    rs_hit  = 1'b1;
    rs_again = 1'b0;
    rs_f0   = 1'b0;
    rs_step = 7'd0;
    rs_slip = 2'b00;
    if (pred_ok(c_nom, pred5, pred7)) begin
      rs_step = 7'd0;
    end else if (frame0_ok(c_nom)) begin
      rs_f0 = 1'b1;
    end else if ((pred_ok(c_early, pred5, pred7) || frame0_ok(c_early)) &&
                 (pred_ok(c_late, pred5, pred7) || frame0_ok(c_late))) begin
      // Both neighbours match: one of them is an alias two bits away from the
      // true boundary (the boundary field 1010 repeats with period 2). Decide
      // at the next frame.
      rs_hit   = 1'b0;
      rs_again = 1'b1;
    end else if (pred_ok(c_early, pred5, pred7) || frame0_ok(c_early)) begin
      rs_f0   = !pred_ok(c_early, pred5, pred7);
      rs_step = 7'h7F;     // -1 modulo 128
      rs_slip = 2'b01;
    end else if (pred_ok(c_late, pred5, pred7) || frame0_ok(c_late)) begin
      rs_f0   = !pred_ok(c_late, pred5, pred7);
      rs_step = 7'd1;
      rs_slip = 2'b10;
    end else begin
      rs_hit = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= ST_CHECK;
      pos     <= '0;
      nfr     <= '0;
      h5      <= '0;
      h7      <= '0;
      since   <= '0;
      tick_o  <= 1'b0;
      f0_o    <= 1'b0;
      field_o <= '0;
      slip_o  <= '0;
      deferred <= 1'b0;
    end else begin
      tick_o <= 1'b0;
      f0_o   <= 1'b0;
      slip_o <= '0;
      if (since != 3'(HOLDOFF)) since <= since + 3'd1;
      if (slot) begin
        since <= '0;
        unique case (state)
          ST_CHECK: begin
            if (bnd_ok(c_nom)) begin
              h5 <= h5_rx;
              h7 <= h7_rx;
              if (nfr == 3'(CHECK_FRAMES - 1)) begin
                nfr <= '0;
                if (comply(h5_rx, h7_rx)) state <= ST_SYNC;
                else                      pos   <= pos + 7'd1;
              end else begin
                nfr <= nfr + 3'd1;
              end
            end else begin
              nfr <= '0;
              pos <= pos + 7'd1;
            end
          end
          ST_SYNC: begin
            tick_o <= 1'b1;
            if (pred_ok(c_nom, pred5, pred7)) begin
              h5      <= h5_rx;
              h7      <= h7_rx;
              field_o <= c_nom[15:12];
            end else if (frame0_ok(c_nom)) begin
              h5      <= H5_F0;
              h7      <= H7_F0;
              f0_o    <= 1'b1;
              field_o <= c_nom[15:12];
            end else begin
              h5      <= h5_pr;
              h7      <= h7_pr;
              field_o <= {pred7, pred5};
              state   <= ST_RESYNC;
            end
          end
          ST_RESYNC: begin
            if (rs_hit) begin
              deferred <= 1'b0;
              state   <= ST_SYNC;
              tick_o  <= 1'b1;
              pos     <= pos + rs_step;
              slip_o  <= rs_slip;
              h5      <= rs_f0 ? H5_F0 : h5_pr;
              h7      <= rs_f0 ? H7_F0 : h7_pr;
              field_o <= rs_f0 ? 4'b1111 : {pred7, pred5};
              f0_o    <= rs_f0;
            end else if (rs_again && !deferred) begin
              // stay in RESYNC one more frame; count this frame as predicted
              tick_o  <= 1'b1;
              h5      <= h5_pr;
              h7      <= h7_pr;
              field_o <= {pred7, pred5};
              deferred <= 1'b1;
            end else begin
              state    <= ST_CHECK;
              nfr      <= '0;
              deferred <= 1'b0;
            end
          end
          default: state <= ST_CHECK;
        endcase
      end
    end
  end

  assign pos_o   = pos;
  assign state_o = state;
  assign lock_o  = (state == ST_SYNC);

endmodule
