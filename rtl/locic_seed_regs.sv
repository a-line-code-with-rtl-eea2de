// locic_seed_regs -- triplicated configuration register for the scrambler seed.
//
// The scrambler needs a non-zero seed after every power cycle. The seed is
// held in three copies and read through a bitwise two-of-three majority vote,
// so a single upset copy does not change the seed. Each cycle the voted value
// is written back into all three copies (scrubbing), so an upset is repaired
// one cycle later. mismatch_o flags that the copies disagreed.
//
// Interface / timing: wr_i loads wdata_i into all copies on the next clock;
// seed_o is combinational from the copies. The reset value RESET_SEED is
// non-zero. Triplication follows the intended radiation hardening of these
// registers; the write port, the scrubbing and the reset value are this
// design's choices (the write path to the chip, e.g. a slow-control bus, is
// outside this block).
module locic_seed_regs #(
  parameter int unsigned W = locic_pkg::SCR_LEN,
  parameter logic [W-1:0] RESET_SEED = {W{1'b1}}
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_i,
  input  logic [W-1:0] wdata_i,
  output logic [W-1:0] seed_o,
  output logic         mismatch_o
);
  // The three copies are logically identical; a synthesis flow merges them
  // unless told to preserve them (keep here, or the flow's own setting),
  // which would remove the triplication.
  (* keep *) logic [W-1:0] copy_a;
  (* keep *) logic [W-1:0] copy_b;
  (* keep *) logic [W-1:0] copy_c;

  assign seed_o     = (copy_a & copy_b) | (copy_b & copy_c) | (copy_a & copy_c);
  assign mismatch_o = (copy_a != copy_b) || (copy_b != copy_c);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      copy_a <= RESET_SEED;
      copy_b <= RESET_SEED;
      copy_c <= RESET_SEED;
    end else if (wr_i) begin
      copy_a <= wdata_i;
      copy_b <= wdata_i;
      copy_c <= wdata_i;
    end else begin
      copy_a <= seed_o;
      copy_b <= seed_o;
      copy_c <= seed_o;
    end
  end

endmodule
