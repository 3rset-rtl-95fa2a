// tb_partial_tag_comp: exhaustive test of the 4-bit comparator over all 256
// input pairs against an independent bitwise XOR reduction.
module tb_partial_tag_comp;
  logic [3:0] stored, incoming;
  logic match;
  int checks = 0, failures = 0;

  partial_tag_comp #(.W(4)) dut (.stored, .incoming, .match);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 16; a++) begin
      for (int b = 0; b < 16; b++) begin
        stored = 4'(a); incoming = 4'(b);
        #1;
        checks++;
        if (match !== ~|(stored ^ incoming)) begin
          failures++;
          $display("a=%0d b=%0d match=%b", a, b, match);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
