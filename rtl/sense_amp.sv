// sense_amp: sense amplifier of one tag segment (the 4-bit amplifier on bit
// lines BL3..BL0 by default). While sense_en is high the segment's word line
// is on and the bit lines carry the stored bits; done reports that sensing
// completes in this cycle, and the sensed value is captured at the clock edge
// that ends it. q then holds the value, with q_valid high for exactly the
// following cycle, the cycle in which the comparator result is used.
// Because sensing is taken to finish within its cycle, done simply mirrors
// sense_en.
//
// The analog sensing is abstracted as a capture register; the completion
// signal driving the step latch's reset follows the paper, the one-cycle
// sensing time is this design's choice.
module sense_amp #(
  parameter int unsigned W = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         sense_en,
  input  logic [W-1:0] bl,
  output logic         done,
  output logic [W-1:0] q,
  output logic         q_valid
);

  assign done = sense_en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q       <= '0;
      q_valid <= 1'b0;
    end else begin
      q_valid <= sense_en;
      if (sense_en) q <= bl;
    end
  end

endmodule
