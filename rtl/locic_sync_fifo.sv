// locic_sync_fifo -- rate-adapting FIFO between a COTS ADC and the 640 MHz
// encoder core.
//
// The COTS ADC delivers 12 bits per channel and frame at 480 Mb/s, as 8-bit
// words (bit c = channel c) on both edges of a 240 MHz data clock. The write
// side captures the word at the rising edge and the word at the following
// falling edge and stores the pair in one entry at the next rising edge,
// together with a start-of-frame flag: the rising edge of the 40 MHz frame
// clock, sampled at rising data-clock edges, marks the rising-edge word of a
// pair as word 0. Pointers (counting pairs) cross the clock domains in Gray
// code through two-flop synchronisers.
//
// The read side emits frames of 16 words: 12 words read from the FIFO
// (D0..D11) followed by 4 dummy words of zero (the D12, D13 and T0..T15 slots,
// the latter replaced later by the frame builder). Once started it runs
// free with a period of 16 read cycles, which matches the write side when
// the data clock is 3/8 of the read clock, as 240 and 640 MHz are. A frame
// is only started when the head word is a start-of-frame word and at least
// START_LEVEL words are stored, so that the 12-word burst read at 640 MHz
// never overtakes the writes. If a later frame does not begin with a
// start-of-frame word, `err_o` pulses and the read side re-aligns.
//
// Interface / timing:
//   write domain: wr_clk (240 MHz, a word on each edge), adc_data_i,
//                 frame_clk_i (high from word 0 of a frame; its rising edge
//                 must fall on word 0, a rising-edge word).
//   read domain : rd_clk; data_o/frame_start_o are registered; frame_start_o
//                 is high with word 0 of each frame (the "Frame Clock" of
//                 the encoder block diagram).
// The 240 MHz data clock, the 8-bit width and the 4 added dummy slots follow
// the line code's description. The FIFO itself, its start rule, the zero fill
// value and the DEPTH and START_LEVEL values are this design's choices.
// START_LEVEL = 6: word k of a frame is read about 1.56 ns x k after the
// start, while its pair is written 4.17 ns x (k/2 + 1) after word 0 arrives
// and seen by the read side up to three read cycles later; word 10 is the
// tightest and needs three pairs stored before the burst begins.
module locic_sync_fifo #(
  parameter int unsigned DEPTH       = 16,  // words (8 pairs), power of two, >= 8
  parameter int unsigned START_LEVEL = 6    // words stored before a frame starts
) (
  input  logic       rst_n,
  // write side (ADC, double data rate)
  input  logic       wr_clk,
  input  logic [7:0] adc_data_i,
  input  logic       frame_clk_i,
  // read side (640 MHz)
  input  logic       rd_clk,
  output logic [7:0] data_o,
  output logic       frame_start_o,
  output logic       running_o,
  output logic       err_o
);
  import locic_pkg::*;

  localparam int unsigned PAIRS = DEPTH / 2;
  localparam int unsigned AW    = $clog2(PAIRS);

  typedef struct packed {
    logic       sof;   // lo is word 0 of a frame
    logic [7:0] hi;    // falling-edge word
    logic [7:0] lo;    // rising-edge word
  } entry_t;

  entry_t mem [PAIRS];

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [AW:0] gray2bin(input logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = int'(AW) - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  logic [AW:0]   wptr, wptr_gray;     // pairs
  logic [AW+1:0] rptr;                // words; rptr[AW+1:1] counts pairs
  logic [AW:0]   rptr_gray_r;

  // ------------------------------------------------------------ write side
  logic [AW:0] rptr_gray_w1, rptr_gray_w2;
  logic        fclk_q, seen_sof;
  logic        sof_w, full_w;
  logic [7:0]  lo_q, hi_q;
  logic        lo_sof, lo_ok;

  assign sof_w  = frame_clk_i & ~fclk_q;
  assign full_w = (wptr_gray == {~rptr_gray_w2[AW:AW-1], rptr_gray_w2[AW-2:0]});

  // second word of a pair
  always_ff @(negedge wr_clk or negedge rst_n) begin
    if (!rst_n) hi_q <= '0;
    else        hi_q <= adc_data_i;
  end

  always_ff @(posedge wr_clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr         <= '0;
      wptr_gray    <= '0;
      fclk_q       <= 1'b1;   // no edge is seen in the first cycle
      seen_sof     <= 1'b0;
      lo_q         <= '0;
      lo_sof       <= 1'b0;
      lo_ok        <= 1'b0;
      rptr_gray_w1 <= '0;
      rptr_gray_w2 <= '0;
    end else begin
      rptr_gray_w1 <= rptr_gray_r;
      rptr_gray_w2 <= rptr_gray_w1;
      fclk_q       <= frame_clk_i;
      if (sof_w) seen_sof <= 1'b1;
      lo_q   <= adc_data_i;
      lo_sof <= sof_w;
      lo_ok  <= seen_sof || sof_w;
      if (lo_ok && !full_w) begin
        mem[wptr[AW-1:0]] <= '{sof: lo_sof, hi: hi_q, lo: lo_q};
        wptr              <= wptr + 1'b1;
        wptr_gray         <= bin2gray(wptr + 1'b1);
      end
    end
  end

  // ------------------------------------------------------------- read side
  logic [AW:0]   wptr_gray_r1, wptr_gray_r2;
  logic [AW+1:0] level;               // words
  logic [AW+1:0] rptr_inc;
  logic [3:0]    slot;
  logic          run;
  entry_t        head;
  logic [7:0]    head_word;
  logic          head_sof;

  assign level     = {gray2bin(wptr_gray_r2), 1'b0} - rptr;
  assign head      = mem[rptr[AW:1]];
  assign head_word = rptr[0] ? head.hi : head.lo;
  assign head_sof  = head.sof & ~rptr[0];
  assign rptr_inc  = rptr + 1'b1;

  always_ff @(posedge rd_clk or negedge rst_n) begin
    if (!rst_n) begin
      rptr          <= '0;
      rptr_gray_r   <= '0;
      wptr_gray_r1  <= '0;
      wptr_gray_r2  <= '0;
      slot          <= '0;
      run           <= 1'b0;
      data_o        <= '0;
      frame_start_o <= 1'b0;
      err_o         <= 1'b0;
    end else begin
      wptr_gray_r1  <= wptr_gray;
      wptr_gray_r2  <= wptr_gray_r1;
      frame_start_o <= 1'b0;
      err_o         <= 1'b0;
      data_o        <= '0;
      if (!run) begin
        // Drop anything ahead of a frame start, then wait for enough words.
        if (level != 0 && !head_sof) begin
          rptr        <= rptr_inc;
          rptr_gray_r <= bin2gray(rptr_inc[AW+1:1]);
        end else if (level >= (AW+2)'(START_LEVEL)) begin
          run           <= 1'b1;
          slot          <= 4'd1;
          data_o        <= head_word;
          frame_start_o <= 1'b1;
          rptr          <= rptr_inc;
          rptr_gray_r   <= bin2gray(rptr_inc[AW+1:1]);
        end
      end else begin
        slot <= slot + 1'b1;   // wraps 15 -> 0
        if (slot < 4'(W8_RAW)) begin
          if (level == 0 || (slot == 0) != head_sof) begin
            // Underflow or lost frame alignment: restart alignment.
            run   <= 1'b0;
            err_o <= 1'b1;
          end else begin
            data_o        <= head_word;
            frame_start_o <= (slot == 0);
            rptr          <= rptr_inc;
            rptr_gray_r   <= bin2gray(rptr_inc[AW+1:1]);
          end
        end
      end
    end
  end

  assign running_o = run;

endmodule
