// tb_sense_amp: self-checking test of the sense amplifier. Random bit-line
// values with random sense enables; checks done in the sensing cycle, the
// captured value in the following cycle, q_valid for exactly one cycle and
// that q holds while not sensing.
module tb_sense_amp;
  localparam int W = 4;
  logic clk = 1'b0, rst_n = 1'b0, sense_en = 1'b0, done, q_valid;
  logic [W-1:0] bl = '0, q, ref_q;
  logic ref_v;
  int checks = 0, failures = 0;

  sense_amp #(.W(W)) dut (.clk, .rst_n, .sense_en, .bl, .done, .q, .q_valid);

  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_q = '0; ref_v = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 1000; i++) begin
      sense_en = 1'($urandom);
      bl       = W'($urandom);
      #1;
      checks++;
      if (done !== sense_en) begin failures++; $display("done wrong"); end
      @(posedge clk);
      if (sense_en) ref_q = bl;
      ref_v = sense_en;
      #1;
      checks++;
      if (q !== ref_q || q_valid !== ref_v) begin
        failures++;
        $display("q=%h exp %h  v=%b exp %b", q, ref_q, q_valid, ref_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
