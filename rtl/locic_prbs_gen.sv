// locic_prbs_gen -- frame control code T8..T15 of the LOCic encoder.
//
// T8..T11 are the constant frame boundary 1,0,1,0. T12T13 are the next two
// bits of a 2^5-1 PRBS (s[n] = s[n-5]^s[n-3], first bits 11 00 01 10 11 ...)
// and T14T15 the next two bits of a 2^7-1 PRBS (s[n] = s[n-7]^s[n-6], first
// bits 11 00 00 00 10 ...). Both sequences and the frame counter restart at
// frame 0 after frame BCID_PERIOD-1, which trims the 3937-frame period of the
// pair of sequences to the 3564-frame LHC orbit.
//
// Interface / timing: frame_en_i is a one-cycle strobe at the start of each
// frame (the "BCID Clk" from the frame builder). On it the registers move to
// the next frame, so t_o and bcid_o are valid for the whole frame that starts
// with the strobe. After rst_n the first strobe gives frame 0. bcid_reset_i
// (the "Reset" input of the block diagram) makes the next frame frame 0; its
// exact meaning is this design's reading of the diagram. t_o[k] = T(8+k).
module locic_prbs_gen #(
  parameter int unsigned PERIOD = locic_pkg::BCID_PERIOD
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        frame_en_i,
  input  logic        bcid_reset_i,
  output logic [7:0]  t_o,
  output logic [11:0] bcid_o
);
  import locic_pkg::*;

  logic [4:0]  q5;
  logic [6:0]  q7;
  logic [11:0] bcid;
  logic        reset_pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q5         <= PRBS5_INIT;
      q7         <= PRBS7_INIT;
      bcid       <= 12'(PERIOD - 1);
      reset_pend <= 1'b1;
    end else begin
      if (bcid_reset_i) reset_pend <= 1'b1;
      if (frame_en_i) begin
        if (reset_pend || bcid_reset_i || bcid == 12'(PERIOD - 1)) begin
          q5         <= PRBS5_INIT;
          q7         <= PRBS7_INIT;
          bcid       <= '0;
          reset_pend <= 1'b0;
        end else begin
          q5   <= prbs5_adv2(q5);
          q7   <= prbs7_adv2(q7);
          bcid <= bcid + 1'b1;
        end
      end
    end
  end

  // {T15,T14,T13,T12,T11,T10,T9,T8}
  assign t_o    = {q7[1], q7[0], q5[1], q5[0], BOUNDARY};
  assign bcid_o = bcid;

endmodule
