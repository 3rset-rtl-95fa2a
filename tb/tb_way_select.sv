// tb_way_select: test of the way-select stage. For every one-hot hit and
// for no hit, the bus must carry exactly the hitting way's block (or zero).
module tb_way_select;
  localparam int WAYS = 8, BB = 512;
  logic [WAYS-1:0] hit_vec;
  logic [BB-1:0] ways_data [WAYS];
  logic [BB-1:0] bus_data;
  logic hit;
  int checks = 0, failures = 0;

  way_select #(.WAYS(WAYS), .BLOCK_BITS(BB)) dut (.hit_vec, .ways_data, .bus_data, .hit);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 50; r++) begin
      for (int w = 0; w < WAYS; w++)
        for (int k = 0; k < BB / 32; k++) ways_data[w][k*32 +: 32] = $urandom;
      for (int h = -1; h < WAYS; h++) begin
        hit_vec = (h < 0) ? '0 : WAYS'(1) << h;
        #1;
        checks++;
        if (h < 0) begin
          if (bus_data !== '0 || hit !== 1'b0) begin failures++; $display("miss wrong"); end
        end else if (bus_data !== ways_data[h] || hit !== 1'b1) begin
          failures++;
          $display("way %0d wrong", h);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
