// tb_upper_tag_comp: test of the enabled 27-bit comparator. Random pairs,
// equal pairs and pairs differing in a single bit, each with the enable on
// and off; a disabled comparator must never report a hit.
module tb_upper_tag_comp;
  localparam int W = 27;
  logic en;
  logic [W-1:0] stored, incoming;
  logic hit, expv;
  int checks = 0, failures = 0;

  upper_tag_comp #(.W(W)) dut (.en, .stored, .incoming, .hit);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      en     = 1'($urandom);
      stored = W'($urandom);
      case (i % 3)
        0: incoming = W'($urandom);
        1: incoming = stored;
        default: incoming = stored ^ (W'(1) << ($urandom % W));
      endcase
      #1;
      expv = en && (i % 3 == 1 || (i % 3 == 0 && stored == incoming));
      checks++;
      if (hit !== expv) begin
        failures++;
        $display("en=%b s=%h i=%h hit=%b", en, stored, incoming, hit);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
