// tb_rrrset_tag_array: test of the full tag array (8 ways x 2048 sets,
// 31-bit tags split 4 + 27). Tags are installed through the fill port with
// deliberate low-bit similarity inside a set; lookups use stored tags, tags
// matching only in their low 4 bits, and unrelated tags. For every lookup it
// checks: all ways read their low segment in cycle 1 and only then; in
// cycle 2 the partial-match vector and the high-segment reads equal the
// reference; in cycle 3 the registered hit vector is valid and correct.
module tb_rrrset_tag_array;
  localparam int WAYS = 8, SETS = 2048, TW = 31, LO_W = 4, IW = 11, WW = 3;
  localparam int NSETS_USED = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  logic new_req = 1'b0, fill_we = 1'b0;
  logic [IW-1:0] idx = '0, fill_idx = '0;
  logic [TW-1:0] in_tag = '0, fill_tag = '0;
  logic [WW-1:0] fill_way = '0;
  logic step2, hit_valid;
  logic [WAYS-1:0] hit_comb, hit_vec, lo_rd, hi_rd, pmatch_vec;
  logic [TW-1:0] mtag [NSETS_USED][WAYS];
  logic          mval [NSETS_USED][WAYS];
  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0, n_nopm = 0, n_multi_pm = 0, n_false_pm = 0;

  rrrset_tag_array #(.WAYS(WAYS), .SETS(SETS), .TAG_W(TW), .LO_W(LO_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chkv(input string what, input logic [WAYS-1:0] got, input logic [WAYS-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: got %b expected %b (t=%0t)", what, got, exp, $time);
    end
  endtask

  function automatic logic tag_present(input int s, input logic [TW-1:0] t);
    for (int w = 0; w < WAYS; w++) if (mval[s][w] && mtag[s][w] == t) return 1'b1;
    return 1'b0;
  endfunction

  task automatic do_fill(input int s, input int w, input logic [TW-1:0] t);
    @(negedge clk);
    fill_we = 1'b1; fill_idx = IW'(s * 100); fill_way = WW'(w); fill_tag = t;
    @(negedge clk);
    fill_we = 1'b0;
    mtag[s][w] = t; mval[s][w] = 1'b1;
  endtask

  initial begin
    logic [TW-1:0] base;
    for (int s = 0; s < NSETS_USED; s++)
      for (int w = 0; w < WAYS; w++) mval[s][w] = 1'b0;
    @(negedge clk); rst_n = 1'b1;
    base = TW'($urandom);
    // Fill 6 of 8 ways per set with tags close to each other (locality).
    for (int s = 0; s < NSETS_USED; s++)
      for (int w = 0; w < 6; w++) begin
        logic [TW-1:0] t;
        do t = base + TW'($urandom % 40); while (tag_present(s, t));
        do_fill(s, w, t);
      end
    for (int i = 0; i < 4000; i++) begin
      int s, w;
      logic [WAYS-1:0] exp_pm, exp_hit;
      s = $urandom % NSETS_USED;
      w = $urandom % WAYS;
      case ($urandom % 3)
        0: in_tag = mval[s][w] ? mtag[s][w] : base;
        1: in_tag = base + TW'($urandom % 64);
        default: in_tag = TW'($urandom);
      endcase
      // Occasionally refill a way, keeping tags unique in the set.
      if ($urandom % 16 == 0) begin
        logic [TW-1:0] t;
        do t = base + TW'($urandom % 64); while (tag_present(s, t));
        do_fill(s, $urandom % WAYS, t);
      end
      for (int k = 0; k < WAYS; k++) begin
        exp_pm[k]  = mval[s][k] && (mtag[s][k][LO_W-1:0] == in_tag[LO_W-1:0]);
        exp_hit[k] = exp_pm[k] && (mtag[s][k] == in_tag);
      end
      idx = IW'(s * 100);
      @(negedge clk);
      chkv("no low read before request", lo_rd, '0);
      new_req = 1'b1;
      @(negedge clk);                       // cycle 1
      new_req = 1'b0;
      chkv("low read in step 1", lo_rd, '1);
      chkv("no high read in step 1", hi_rd, '0);
      @(negedge clk);                       // cycle 2
      chkv("no low read in step 2", lo_rd, '0);
      chkv("partial match", pmatch_vec, exp_pm);
      chkv("high reads", hi_rd, exp_pm);
      chkv("comb hits", hit_comb, exp_hit);
      @(negedge clk);                       // cycle 3
      chkv("hit_valid", {7'b0, hit_valid}, 8'b1);
      chkv("hit_vec", hit_vec, exp_hit);
      if (|exp_hit) n_hit++; else n_miss++;
      if (exp_pm == '0) n_nopm++;
      if ($countones(exp_pm) > 1) n_multi_pm++;
      if (exp_pm != '0 && exp_hit == '0) n_false_pm++;
    end
    $display("hits=%0d misses=%0d no-partial=%0d multi-partial=%0d false-partial=%0d",
             n_hit, n_miss, n_nopm, n_multi_pm, n_false_pm);
    checks++;
    if (n_hit == 0 || n_miss == 0 || n_nopm == 0 || n_multi_pm == 0 || n_false_pm == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
