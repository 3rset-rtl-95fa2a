// tb_tag_way: test of one split tag way at full size (2048 rows). It checks
// that valid bits clear on reset, fills every row, then mixes random reads
// under all four combinations of the two word-line gates with random
// rewrites, against a shadow copy: a gated-off segment must read as zero.
module tb_tag_way;
  localparam int SETS = 2048, LO_W = 4, HI_W = 27, IW = 11;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [IW-1:0] idx = '0, widx = '0;
  logic wl_lo_en = 1'b0, wl_hi_en = 1'b0, we = 1'b0, wvalid = 1'b0;
  logic [LO_W-1:0] bl_lo;
  logic bl_valid;
  logic [HI_W-1:0] bl_hi;
  logic [LO_W+HI_W-1:0] wtag = '0;
  logic [LO_W+HI_W-1:0] shadow [SETS];
  logic shadow_v [SETS];
  int checks = 0, failures = 0;

  tag_way #(.SETS(SETS), .LO_W(LO_W), .HI_W(HI_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_read(input int r, input logic lo, input logic hi);
    idx = IW'(r); wl_lo_en = lo; wl_hi_en = hi;
    #1;
    checks++;
    if (bl_lo    !== (lo ? shadow[r][LO_W-1:0] : '0) ||
        bl_valid !== (lo ? shadow_v[r] : 1'b0) ||
        bl_hi    !== (hi ? shadow[r][LO_W+HI_W-1:LO_W] : '0)) begin
      failures++;
      $display("row %0d lo=%b hi=%b: got %h %b %h", r, lo, hi, bl_lo, bl_valid, bl_hi);
    end
  endtask

  initial begin
    @(posedge clk); #1;
    rst_n = 1'b1;
    // After reset no row is valid.
    for (int r = 0; r < SETS; r += 97) begin
      idx = IW'(r); wl_lo_en = 1'b1; #1;
      checks++; if (bl_valid !== 1'b0) failures++;
    end
    wl_lo_en = 1'b0;
    // Fill all rows.
    for (int r = 0; r < SETS; r++) begin
      @(negedge clk);
      we = 1'b1; widx = IW'(r); wtag = 31'($urandom); wvalid = 1'($urandom);
      shadow[r] = wtag; shadow_v[r] = wvalid;
    end
    @(negedge clk); we = 1'b0;
    // Random reads and rewrites.
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      check_read($urandom % SETS, 1'($urandom), 1'($urandom));
      if ($urandom % 4 == 0) begin
        we = 1'b1; widx = IW'($urandom % SETS); wtag = 31'($urandom); wvalid = 1'($urandom);
        @(posedge clk);
        shadow[widx] = wtag; shadow_v[widx] = wvalid;
        @(negedge clk); we = 1'b0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
