// tb_step_latch: self-checking test of the step latch. It drives request and
// sense-done sequences, including the two at once, and compares q with a
// reference model of a reset-dominant set/reset element whose set is gated
// by the inverted reset. Ends with a TB_RESULT line; a watchdog bounds it.
module tb_step_latch;
  logic clk = 1'b0, rst_n = 1'b0, new_req = 1'b0, sense_done = 1'b0, q;
  int checks = 0, failures = 0;
  logic ref_q;

  step_latch dut (.clk, .rst_n, .new_req, .sense_done, .q);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input logic r, input logic d);
    new_req = r; sense_done = d;
    @(posedge clk);
    if (d)      ref_q = 1'b0;
    else if (r) ref_q = 1'b1;
    #1;
    checks++;
    if (q !== ref_q) begin
      failures++;
      $display("mismatch req=%b done=%b q=%b exp=%b", r, d, q, ref_q);
    end
  endtask

  initial begin
    ref_q = 1'b0;
    repeat (2) @(posedge clk);
    #1;
    checks++; if (q !== 1'b0) failures++;
    rst_n = 1'b1;
    // Directed: request, then sensing completes.
    step(1'b1, 1'b0);  // set
    checks++; if (q !== 1'b1) failures++;
    step(1'b0, 1'b1);  // reset
    checks++; if (q !== 1'b0) failures++;
    step(1'b0, 1'b0);  // hold low
    step(1'b1, 1'b1);  // AND gate blocks the set while reset is active
    checks++; if (q !== 1'b0) failures++;
    step(1'b1, 1'b0);
    step(1'b0, 1'b0);  // hold high
    checks++; if (q !== 1'b1) failures++;
    // Random
    for (int i = 0; i < 500; i++) step(1'($urandom), 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
