// tb_rrrset_cache: end-to-end test of the cache array at its default size
// (1 MiB, 8 ways, 2048 sets, 64-byte blocks, 48-bit addresses). The bench
// plays the cache controller: it issues reads and writes, installs a block
// with a fill (round-robin victim per set) after every miss, and keeps a
// reference copy of tags and blocks. Addresses have locality: a small
// window of neighbouring tags over a few sets, plus some unrelated ones.
//
// Checked: every response arrives exactly two cycles after its request is
// accepted, with the right hit/miss, way and block; in step 2 the partial-
// match vector equals the reference and only partially matching ways read
// their high tag segment; every lookup reads each way's low segment once.
// Counted, and required to occur: read hit, read miss, write hit, write
// miss, fill, lookups where no way reaches step 2, partial matches that are
// not hits, stalls behind step 1, stalls behind a write, back-to-back
// lookups. It also prints the average number of partially matching ways on
// hits and misses and the fraction of tag bits read against a
// full-tag-compare array.
module tb_rrrset_cache;
  import rrrset_pkg::*;
  localparam int WAYS = 8, SETS = 2048, BB = 512, AW = 48, TW = 31, LO_W = 4;
  localparam int IW = 11, WW = 3, NOPS = 6000;

  logic clk = 1'b0, rst_n = 1'b0;
  logic req_valid = 1'b0, req_ready;
  op_e  req_op = OP_READ;
  logic [AW-1:0] req_addr = '0;
  logic [BB-1:0] req_wdata = '0;
  logic [WW-1:0] req_fill_way = '0;
  logic resp_valid, resp_hit;
  op_e  resp_op;
  logic [WW-1:0] resp_way;
  logic [BB-1:0] resp_rdata;
  logic [WAYS-1:0] lo_rd, hi_rd, pmatch_vec;

  rrrset_cache dut (.*);

  always #5 clk = ~clk;

  // reference model (the controller's view)
  logic [TW-1:0] mtag [SETS][WAYS];
  logic          mval [SETS][WAYS];
  logic [BB-1:0] mdat [SETS][WAYS];
  int            victim [SETS];

  typedef struct {
    int            due;        // cycle in which the response must be seen
    op_e           op;
    logic          hit;
    int            way;
    logic [BB-1:0] data;
    logic [WAYS-1:0] pm;
  } exp_t;
  exp_t expq [$];

  int cycle = 0;
  int checks = 0, failures = 0;
  int n_rd_hit = 0, n_rd_miss = 0, n_wr_hit = 0, n_wr_miss = 0, n_fill = 0;
  int n_nopm = 0, n_false_pm = 0, n_stall_step1 = 0, n_stall_write = 0, n_b2b = 0;
  int pm_sum_hit = 0, pm_sum_miss = 0, lookups = 0, last_accept = -10;
  longint bits_read = 0, lo_reads = 0;

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (NOPS * 12 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string msg);
    failures++;
    if (failures < 20) $display("FAIL t=%0t: %s", $time, msg);
  endtask

  // Monitor: sampled in the middle of each cycle.
  always @(negedge clk) if (rst_n) begin
    lo_reads  += $countones(lo_rd);
    bits_read += $countones(lo_rd) * (LO_W + 1) + $countones(hi_rd) * (TW - LO_W);
    checks++;
    if (hi_rd != pmatch_vec) fail("high reads differ from partial matches");
    if (lo_rd != '0 && lo_rd != '1) fail("ways not in step 1 together");
    // step-2 check for the oldest pending lookup
    if (expq.size() > 0 && expq[0].due - 1 == cycle) begin
      checks++;
      if (pmatch_vec != expq[0].pm) fail($sformatf("pmatch %b exp %b", pmatch_vec, expq[0].pm));
    end
    if (resp_valid) begin
      exp_t e;
      checks++;
      if (expq.size() == 0) fail("unexpected response");
      else begin
        e = expq.pop_front();
        if (e.due != cycle) fail($sformatf("response in cycle %0d, expected %0d", cycle, e.due));
        if (resp_op != e.op || resp_hit != e.hit) fail("op/hit mismatch");
        if (e.hit && int'(resp_way) != e.way) fail("way mismatch");
        if (e.op == OP_READ && e.hit && resp_rdata != e.data) fail("read data mismatch");
        if (e.op == OP_READ && !e.hit && resp_rdata != '0) fail("data on a miss");
      end
    end else if (expq.size() > 0 && expq[0].due < cycle) begin
      void'(expq.pop_front());
      fail("response missing");
    end
  end

  function automatic logic [BB-1:0] rnd_block();
    logic [BB-1:0] b;
    for (int k = 0; k < BB / 32; k++) b[k*32 +: 32] = $urandom;
    return b;
  endfunction

  // Drive one request, wait until accepted, update the reference model.
  task automatic issue(input op_e op, input logic [AW-1:0] addr, input logic [BB-1:0] wd,
                       input int fway);
    int s;
    logic [TW-1:0] t;
    exp_t e;
    @(negedge clk);
    req_valid = 1'b1; req_op = op; req_addr = addr; req_wdata = wd; req_fill_way = WW'(fway);
    #1;
    while (!req_ready) begin
      if (dut.busy_write) n_stall_write++; else n_stall_step1++;
      @(negedge clk); #1;
    end
    @(posedge clk);              // accepted at this edge
    if (op != OP_FILL && cycle == last_accept + 2) n_b2b++;
    s = int'(addr[6 +: IW]);
    t = addr[AW-1 -: TW];
    if (op == OP_FILL) begin
      mtag[s][fway] = t; mval[s][fway] = 1'b1; mdat[s][fway] = wd;
      n_fill++;
    end else begin
      last_accept = cycle;
      e.due = cycle + 3;  // counter increments at this edge too
      e.op = op; e.hit = 1'b0; e.way = 0; e.data = '0;
      for (int w = 0; w < WAYS; w++) begin
        e.pm[w] = mval[s][w] && (mtag[s][w][LO_W-1:0] == t[LO_W-1:0]);
        if (mval[s][w] && mtag[s][w] == t) begin
          e.hit = 1'b1; e.way = w; e.data = mdat[s][w];
        end
      end
      if (e.pm == '0) n_nopm++;
      if (e.pm != '0 && !e.hit) n_false_pm++;
      if (e.hit) pm_sum_hit += $countones(e.pm); else pm_sum_miss += $countones(e.pm);
      if (op == OP_WRITE && e.hit) mdat[s][e.way] = wd;
      if (op == OP_READ)  begin if (e.hit) n_rd_hit++; else n_rd_miss++; end
      if (op == OP_WRITE) begin if (e.hit) n_wr_hit++; else n_wr_miss++; end
      lookups++;
      expq.push_back(e);
    end
    #1;
    req_valid = 1'b0;
  endtask

  function automatic logic present(input int s, input logic [TW-1:0] t);
    for (int w = 0; w < WAYS; w++) if (mval[s][w] && mtag[s][w] == t) return 1'b1;
    return 1'b0;
  endfunction

  initial begin
    logic [TW-1:0] base;
    for (int s = 0; s < SETS; s++) begin
      victim[s] = 0;
      for (int w = 0; w < WAYS; w++) mval[s][w] = 1'b0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    base = TW'($urandom);
    for (int i = 0; i < NOPS; i++) begin
      logic [AW-1:0] a;
      logic [TW-1:0] t;
      int s;
      op_e op;
      s = 100 + ($urandom % 8);
      t = ($urandom % 8 == 0) ? TW'($urandom) : base + TW'($urandom % 24);
      a = {t, IW'(s), 6'($urandom)};
      op = ($urandom % 4 == 0) ? OP_WRITE : OP_READ;
      issue(op, a, rnd_block(), 0);
      // As controller: allocate on a miss (read or write).
      if (!present(s, t)) begin
        issue(OP_FILL, a, rnd_block(), victim[s]);
        victim[s] = (victim[s] + 1) % WAYS;
      end
      // Sometimes do not wait: the next request is issued at once, so that
      // requests meet the ready signal of the previous lookup.
      if ($urandom % 4 == 0) repeat (3) @(negedge clk);
    end
    repeat (6) @(negedge clk);
    checks++;
    if (expq.size() != 0) fail("responses outstanding at the end");
    checks++;
    if (lo_reads != longint'(lookups) * WAYS) fail("low segment not read once per way per lookup");
    $display("read hit %0d  read miss %0d  write hit %0d  write miss %0d  fills %0d",
             n_rd_hit, n_rd_miss, n_wr_hit, n_wr_miss, n_fill);
    $display("no step 2 %0d  partial-only %0d  stall step1 %0d  stall write %0d  back-to-back %0d",
             n_nopm, n_false_pm, n_stall_step1, n_stall_write, n_b2b);
    $display("avg partial matches: hit %0.2f  miss %0.2f",
             real'(pm_sum_hit) / real'(n_rd_hit + n_wr_hit),
             real'(pm_sum_miss) / real'(n_rd_miss + n_wr_miss));
    $display("tag bits read: %0d of %0d for full-tag compare (%0.1f%%)",
             bits_read, longint'(lookups) * WAYS * TW,
             100.0 * real'(bits_read) / real'(longint'(lookups) * WAYS * TW));
    checks++;
    if (n_rd_hit == 0 || n_rd_miss == 0 || n_wr_hit == 0 || n_wr_miss == 0 || n_fill == 0 ||
        n_nopm == 0 || n_false_pm == 0 || n_stall_step1 == 0 || n_stall_write == 0 || n_b2b == 0)
      fail("a mechanism never occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
