// tb_rrrset_way: cycle-level test of one selective-comparison tag way. Rows
// are filled with random tags (some left invalid); lookups use the stored
// tag, a tag equal only in its low 4 bits, or a random tag. For each lookup
// it checks that the low segment is read in exactly the first cycle after
// the request, and that in the second cycle the partial match, the high
// segment read and the hit equal a reference computed from a shadow copy.
// It also counts how often each case (partial match with hit, partial match
// without hit, no partial match) occurred and fails if one never did.
module tb_rrrset_way;
  localparam int SETS = 2048, LO_W = 4, HI_W = 27, IW = 11, TW = 31;
  logic clk = 1'b0, rst_n = 1'b0;
  logic new_req = 1'b0, we = 1'b0, wvalid = 1'b0;
  logic [IW-1:0] idx = '0, widx = '0;
  logic [TW-1:0] in_tag = '0, wtag = '0;
  logic step1, step2_rd, pmatch, hit;
  logic [TW-1:0] shadow [SETS];
  logic shadow_v [SETS];
  int checks = 0, failures = 0;
  int n_hit = 0, n_pm_miss = 0, n_nopm = 0;

  rrrset_way #(.SETS(SETS), .LO_W(LO_W), .HI_W(HI_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input logic got, input logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: got %b expected %b (t=%0t)", what, got, exp, $time);
    end
  endtask

  initial begin
    @(negedge clk); rst_n = 1'b1;
    for (int r = 0; r < SETS; r++) begin
      @(negedge clk);
      we = 1'b1; widx = IW'(r); wtag = TW'($urandom); wvalid = ($urandom % 8) != 0;
      shadow[r] = wtag; shadow_v[r] = wvalid;
    end
    @(negedge clk); we = 1'b0;
    chk("idle step1", step1, 1'b0);
    for (int i = 0; i < 3000; i++) begin
      int r;
      logic pm, h;
      r = $urandom % SETS;
      case ($urandom % 3)
        0: in_tag = shadow[r];
        1: in_tag = {HI_W'($urandom), shadow[r][LO_W-1:0]};
        default: in_tag = TW'($urandom);
      endcase
      idx = IW'(r);
      new_req = 1'b1;
      @(negedge clk);           // cycle 1: step 1
      new_req = 1'b0;
      chk("step1 in cycle 1", step1, 1'b1);
      chk("no high read in cycle 1", step2_rd, 1'b0);
      chk("no hit in cycle 1", hit, 1'b0);
      @(negedge clk);           // cycle 2: step 2
      pm = shadow_v[r] && (shadow[r][LO_W-1:0] == in_tag[LO_W-1:0]);
      h  = pm && (shadow[r] == in_tag);
      chk("step1 off in cycle 2", step1, 1'b0);
      chk("pmatch", pmatch, pm);
      chk("high read", step2_rd, pm);
      chk("hit", hit, h);
      if (h) n_hit++; else if (pm) n_pm_miss++; else n_nopm++;
      // Half of the time issue the next request right away (cycle 2).
      if ($urandom % 2 == 0) begin
        @(negedge clk);
        chk("idle after lookup", step1, 1'b0);
      end
    end
    $display("hits=%0d partial-only=%0d no-partial=%0d", n_hit, n_pm_miss, n_nopm);
    if (n_hit == 0 || n_pm_miss == 0 || n_nopm == 0) failures++;
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
