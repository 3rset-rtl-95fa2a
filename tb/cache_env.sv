// cache_env: a self-contained checking environment for one rrrset_cache of
// any geometry, used by tb_rrrset_configs to run several configurations side
// by side. It plays the cache controller as tb_rrrset_cache does (reads and
// writes with locality, a fill after each miss, round-robin victims) and
// checks every response, its two-cycle latency and the step-2 partial-match
// vector against a reference model. The access stream comes from a private
// xorshift generator seeded by SEED, so environments that differ only in the
// split point LO_W see the same stream and their tag-read counts compare.
// When finished it raises done and holds checks, failures, the cells read
// (low part plus valid bit, and high part) and the cells a full-tag compare
// would read.
module cache_env #(
  parameter int unsigned WAYS  = 8,
  parameter int unsigned SETS  = 2048,
  parameter int unsigned LO_W  = 4,
  parameter int unsigned NOPS  = 2000,
  parameter int unsigned SEED  = 32'h1234_5678,
  localparam int unsigned AW   = 48,
  localparam int unsigned BB   = 512,
  localparam int unsigned IW   = $clog2(SETS),
  localparam int unsigned TW   = AW - IW - 6,
  localparam int unsigned WW   = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic   clk,
  input  logic   rst_n,
  output logic   done,
  output int     checks,
  output int     failures,
  output longint bits_read,
  output longint bits_full,
  output int     mech_missing
);
  import rrrset_pkg::*;

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

  rrrset_cache #(.WAYS(WAYS), .SETS(SETS), .LO_W(LO_W)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req_op, .req_addr, .req_wdata, .req_fill_way,
    .resp_valid, .resp_op, .resp_hit, .resp_way, .resp_rdata, .lo_rd, .hi_rd, .pmatch_vec);

  // reference model; only the sets the stream uses are tracked
  localparam int NS = 8, SET0 = 100;
  logic [TW-1:0] mtag [NS][WAYS];
  logic          mval [NS][WAYS];
  logic [BB-1:0] mdat [NS][WAYS];
  int            victim [NS];

  typedef struct {
    int            due;
    op_e           op;
    logic          hit;
    int            way;
    logic [BB-1:0] data;
    logic [WAYS-1:0] pm;
  } exp_t;
  exp_t expq [$];

  int cycle = 0, lookups = 0;
  int n_hit = 0, n_miss = 0, n_fill = 0, n_nopm = 0, n_false_pm = 0;
  logic [31:0] rs = SEED;

  function automatic logic [31:0] rnd();
    rs ^= rs << 13; rs ^= rs >> 17; rs ^= rs << 5;
    return rs;
  endfunction

  function automatic logic [BB-1:0] rnd_block();
    logic [BB-1:0] b;
    for (int k = 0; k < BB / 32; k++) b[k*32 +: 32] = rnd();
    return b;
  endfunction

  task automatic fail(input string msg);
    failures++;
    if (failures < 10) $display("[W%0d S%0d L%0d] FAIL t=%0t: %s", WAYS, SETS, LO_W, $time, msg);
  endtask

  always @(posedge clk) cycle <= cycle + 1;

  always @(negedge clk) if (rst_n && !done) begin
    bits_read += $countones(lo_rd) * (LO_W + 1) + $countones(hi_rd) * (TW - LO_W);
    checks++;
    if (hi_rd != pmatch_vec) fail("high reads differ from partial matches");
    if (expq.size() > 0 && expq[0].due - 1 == cycle) begin
      checks++;
      if (pmatch_vec != expq[0].pm) fail("partial-match vector");
    end
    if (resp_valid) begin
      exp_t e;
      checks++;
      if (expq.size() == 0) fail("unexpected response");
      else begin
        e = expq.pop_front();
        if (e.due != cycle) fail("response latency");
        if (resp_op != e.op || resp_hit != e.hit) fail("op/hit");
        if (e.hit && int'(resp_way) != e.way) fail("way");
        if (e.op == OP_READ && e.hit && resp_rdata != e.data) fail("read data");
      end
    end
  end

  task automatic issue(input op_e op, input logic [AW-1:0] addr, input logic [BB-1:0] wd,
                       input int fway);
    int s;
    logic [TW-1:0] t;
    exp_t e;
    @(negedge clk);
    req_valid = 1'b1; req_op = op; req_addr = addr; req_wdata = wd; req_fill_way = WW'(fway);
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    s = int'(addr[6 +: IW]) - SET0;
    t = addr[AW-1 -: TW];
    if (op == OP_FILL) begin
      mtag[s][fway] = t; mval[s][fway] = 1'b1; mdat[s][fway] = wd;
      n_fill++;
    end else begin
      e.due = cycle + 3;
      e.op = op; e.hit = 1'b0; e.way = 0; e.data = '0;
      for (int w = 0; w < WAYS; w++) begin
        e.pm[w] = mval[s][w] && (mtag[s][w][LO_W-1:0] == t[LO_W-1:0]);
        if (mval[s][w] && mtag[s][w] == t) begin
          e.hit = 1'b1; e.way = w; e.data = mdat[s][w];
        end
      end
      if (e.pm == '0) n_nopm++;
      if (e.pm != '0 && !e.hit) n_false_pm++;
      if (e.hit) n_hit++; else n_miss++;
      if (op == OP_WRITE && e.hit) mdat[s][e.way] = wd;
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
    done = 1'b0; checks = 0; failures = 0; bits_read = 0; bits_full = 0; mech_missing = 0;
    for (int s = 0; s < NS; s++) begin
      victim[s] = 0;
      for (int w = 0; w < WAYS; w++) mval[s][w] = 1'b0;
    end
    @(posedge rst_n);
    base = TW'({rnd(), rnd()});
    for (int i = 0; i < NOPS; i++) begin
      logic [AW-1:0] a;
      logic [TW-1:0] t;
      int s;
      s = int'(rnd() % NS);
      t = (rnd() % 8 == 0) ? TW'({rnd(), rnd()}) : base + TW'(rnd() % (3 * WAYS));
      a = {t, IW'(SET0 + s), 6'(rnd())};
      issue((rnd() % 4 == 0) ? OP_WRITE : OP_READ, a, rnd_block(), 0);
      if (!present(s, t)) begin
        issue(OP_FILL, a, rnd_block(), victim[s]);
        victim[s] = (victim[s] + 1) % WAYS;
      end
    end
    repeat (6) @(negedge clk);
    checks++;
    if (expq.size() != 0) fail("responses outstanding");
    bits_full = longint'(lookups) * WAYS * TW;
    if (n_hit == 0 || n_miss == 0 || n_fill == 0 || n_nopm == 0 || n_false_pm == 0) mech_missing = 1;
    $display("[%0d ways x %0d sets, tag %0d = %0d + %0d] lookups %0d hits %0d misses %0d: tag cells read %0.1f%% of full compare",
             WAYS, SETS, TW, LO_W, TW - LO_W, lookups, n_hit, n_miss,
             100.0 * real'(bits_read) / real'(bits_full));
    done = 1'b1;
  end
endmodule
