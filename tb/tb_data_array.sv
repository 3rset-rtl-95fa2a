// tb_data_array: test of the data array at full size (8 ways x 2048 sets x
// 64 bytes). Random block writes into a shadow copy and random set reads;
// each read must return all eight ways of the set exactly two cycles after
// it is issued, including a read issued right after a write to the set.
module tb_data_array;
  localparam int WAYS = 8, SETS = 2048, BB = 512, IW = 11, WW = 3;
  localparam int NTRACK = 64;  // sets used, so reads mostly hit written data
  logic clk = 1'b0;
  logic rd_en = 1'b0, wr_en = 1'b0;
  logic [IW-1:0] rd_idx = '0, wr_idx = '0;
  logic [WW-1:0] wr_way = '0;
  logic [BB-1:0] wr_data = '0;
  logic [BB-1:0] rd_data [WAYS];
  logic [BB-1:0] shadow [WAYS][NTRACK];
  int checks = 0, failures = 0;
  logic [2:0] vpipe = '0;
  int ipipe [3];

  data_array #(.WAYS(WAYS), .SETS(SETS), .BLOCK_BITS(BB)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [BB-1:0] rnd_block();
    logic [BB-1:0] b;
    for (int k = 0; k < BB / 32; k++) b[k*32 +: 32] = $urandom;
    return b;
  endfunction

  // Expected values are taken when the read is issued (after the write of
  // the same cycle has landed) and compared two cycles later.
  logic [BB-1:0] exp_pipe [3][WAYS];
  always @(posedge clk) begin
    #2;
    if (vpipe[1]) begin
      for (int w = 0; w < WAYS; w++) begin
        checks++;
        if (rd_data[w] !== exp_pipe[1][w]) begin
          failures++;
          $display("set %0d way %0d wrong", ipipe[1], w);
        end
      end
    end
  end

  initial begin
    // Initialise the tracked sets in every way.
    for (int s = 0; s < NTRACK; s++)
      for (int w = 0; w < WAYS; w++) begin
        @(negedge clk);
        wr_en = 1'b1; wr_way = WW'(w); wr_idx = IW'(s * 31); wr_data = rnd_block();
        shadow[w][s] = wr_data;
      end
    @(negedge clk); wr_en = 1'b0;
    for (int i = 0; i < 3000; i++) begin
      int s;
      @(negedge clk);
      // optional write
      wr_en = 1'($urandom);
      s = $urandom % NTRACK;
      wr_way = WW'($urandom); wr_idx = IW'(s * 31); wr_data = rnd_block();
      // read: half the time the set just written
      rd_en = 1'($urandom);
      if ($urandom % 2 == 0) rd_idx = wr_idx; else rd_idx = IW'(($urandom % NTRACK) * 31);
      @(posedge clk);
      // pipeline bookkeeping: the read sees the array before this edge's write
      for (int k = 2; k > 0; k--) begin
        vpipe[k] = vpipe[k-1]; ipipe[k] = ipipe[k-1];
        exp_pipe[k] = exp_pipe[k-1];
      end
      vpipe[0] = rd_en; ipipe[0] = int'(rd_idx) / 31;
      for (int w = 0; w < WAYS; w++) exp_pipe[0][w] = shadow[w][ipipe[0]];
      if (wr_en) shadow[wr_way][s] = wr_data;
    end
    @(negedge clk); rd_en = 1'b0; wr_en = 1'b0;
    repeat (3) begin
      @(posedge clk);
      vpipe[2] = vpipe[1]; vpipe[1] = vpipe[0]; vpipe[0] = 1'b0;
      ipipe[1] = ipipe[0]; exp_pipe[1] = exp_pipe[0];
    end
    #3;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
