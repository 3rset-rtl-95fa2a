// step_latch: the per-way step controller of the two-step tag comparison.
// It is the SR latch with its AND and NOT gates: a new request sets it, the
// completion of the 4-bit sense amplifier resets it, and the set input is
// gated off (AND with the inverted reset) while the reset is active. Its
// output turns on the word-line gate of tag bits 3..0, so those bits are read
// only in step 1 and stay unread in step 2 until the next request.
//
// Timing: q rises in the cycle after new_req and falls in the cycle after
// sense_done. The paper's latch is self-timed inside one clock cycle; here
// it is a clocked, reset-dominant set/reset flop so that step 1 and step 2
// each occupy one clock cycle. Reset clears q.
module step_latch (
  input  logic clk,
  input  logic rst_n,
  input  logic new_req,     // "New Request"
  input  logic sense_done,  // 4-bit sense amplifier completed (Reset)
  output logic q            // enables Ctrl. Trans. 1
);

  logic set_in;

  // AND gate with the inverted reset: no set while the reset is active.
  assign set_in = new_req & ~sense_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          q <= 1'b0;
    else if (sense_done) q <= 1'b0;
    else if (set_in)     q <= 1'b1;
  end

endmodule
