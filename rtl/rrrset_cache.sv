// rrrset_cache: a set-associative STT-MRAM cache array whose tag lookup
// reads as few tag bits as possible (selective tag comparison). Default:
// 1 MiB, 8 ways, 64-byte blocks, 48-bit addresses, 2048 sets, 31-bit tags
// split into a 4-bit low part and a 27-bit high part.
//
// A lookup first reads only the low tag bits of every way of the set and
// compares them with the request; only ways that match there read and
// compare their high tag bits. The data array reads all ways of the set in
// parallel meanwhile, and the registered way-hit vector selects the block.
//
// Request interface (valid/ready): req_op is OP_READ, OP_WRITE or OP_FILL,
// req_addr the byte address, req_wdata a whole block, req_fill_way the way
// a fill goes to. A lookup accepted in cycle 0 runs tag step 1 in cycle 1
// and step 2 in cycle 2; its response (resp_valid, resp_hit, resp_way and,
// for reads, resp_rdata) appears in cycle 3, the same two-cycle array
// latency the data array alone has. A write lookup that hits writes its
// block at the end of step 2; a miss is only reported, because allocation,
// replacement and write-back belong to the cache controller. A fill writes
// tag, valid bit and block into req_fill_way at the edge that accepts it.
// req_ready is low during step 1 (the step latch blocks a new set while it
// is being reset), so lookups are accepted at most every other cycle, and
// during step 2 of a write: the data array has one write port, and a write
// lookup uses it at the end of step 2, the edge at which a fill accepted in
// that cycle would also write. lo_rd, hi_rd and pmatch_vec show, per way and
// cycle, which tag segments were read and which ways matched partially.
//
// The split, the two-step lookup and the address bits used follow the
// paper; the request interface, the valid bits, the fill port and the
// cycle-level timing are this design's own.
module rrrset_cache
  import rrrset_pkg::op_e, rrrset_pkg::OP_READ, rrrset_pkg::OP_WRITE, rrrset_pkg::OP_FILL;
#(
  parameter int unsigned ADDR_W      = rrrset_pkg::DEF_ADDR_W,
  parameter int unsigned WAYS        = rrrset_pkg::DEF_WAYS,
  parameter int unsigned SETS        = rrrset_pkg::DEF_SETS,
  parameter int unsigned BLOCK_BYTES = rrrset_pkg::DEF_BLOCK_BYTES,
  parameter int unsigned LO_W        = rrrset_pkg::DEF_LO_W,
  localparam int unsigned BB         = BLOCK_BYTES * 8,
  localparam int unsigned OW         = $clog2(BLOCK_BYTES),
  localparam int unsigned IW         = $clog2(SETS),
  localparam int unsigned TW         = ADDR_W - IW - OW,
  localparam int unsigned WW         = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // request
  input  logic              req_valid,
  output logic              req_ready,
  input  op_e               req_op,
  input  logic [ADDR_W-1:0] req_addr,
  input  logic [BB-1:0]     req_wdata,
  input  logic [WW-1:0]     req_fill_way,
  // response
  output logic              resp_valid,
  output op_e               resp_op,
  output logic              resp_hit,
  output logic [WW-1:0]     resp_way,
  output logic [BB-1:0]     resp_rdata,
  // tag read activity
  output logic [WAYS-1:0]   lo_rd,
  output logic [WAYS-1:0]   hi_rd,
  output logic [WAYS-1:0]   pmatch_vec
);

  // ---------------------------------------------------------------- request
  logic          accept, lookup, fill;
  logic [IW-1:0] req_idx;
  logic [TW-1:0] req_tag;

  logic          busy_write;
  op_e           op_q;
  logic [IW-1:0] idx_q;
  logic [TW-1:0] tag_q;
  logic [BB-1:0] wdata_q;

  logic [WAYS-1:0] hit_comb, hit_vec;
  logic            step2, hit_valid;

  assign req_idx = req_addr[OW +: IW];
  assign req_tag = req_addr[ADDR_W-1 -: TW];

  assign busy_write = step2 && (op_q == OP_WRITE);
  assign req_ready  = !lo_rd[0] && !busy_write;
  assign accept     = req_valid && req_ready;
  assign lookup     = accept && (req_op != OP_FILL);
  assign fill       = accept && (req_op == OP_FILL);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      op_q    <= OP_READ;
      idx_q   <= '0;
      tag_q   <= '0;
      wdata_q <= '0;
    end else if (lookup) begin
      op_q    <= req_op;
      idx_q   <= req_idx;
      tag_q   <= req_tag;
      wdata_q <= req_wdata;
    end
  end

  // ------------------------------------------------------------- tag array
  rrrset_tag_array #(.WAYS(WAYS), .SETS(SETS), .TAG_W(TW), .LO_W(LO_W)) u_tags (
    .clk        (clk),
    .rst_n      (rst_n),
    .new_req    (lookup),
    .idx        (idx_q),
    .in_tag     (tag_q),
    .fill_we    (fill),
    .fill_way   (req_fill_way),
    .fill_idx   (req_idx),
    .fill_tag   (req_tag),
    .step2      (step2),
    .hit_comb   (hit_comb),
    .hit_vec    (hit_vec),
    .hit_valid  (hit_valid),
    .lo_rd      (lo_rd),
    .hi_rd      (hi_rd),
    .pmatch_vec (pmatch_vec)
  );

  // ------------------------------------------------------------ data array
  logic [BB-1:0] ways_data [WAYS];
  logic          wr_en;
  logic [WW-1:0] wr_way;
  logic [IW-1:0] wr_idx;
  logic [BB-1:0] wr_data;
  logic          lookup_wr;

  assign lookup_wr = step2 && (op_q == OP_WRITE) && (|hit_comb);

  always_comb begin
    wr_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (hit_comb[w]) wr_way = WW'(w);
    end
    wr_en   = lookup_wr;
    wr_idx  = idx_q;
    wr_data = wdata_q;
    if (fill) begin
      wr_en   = 1'b1;
      wr_way  = req_fill_way;
      wr_idx  = req_idx;
      wr_data = req_wdata;
    end
  end

  data_array #(.WAYS(WAYS), .SETS(SETS), .BLOCK_BITS(BB)) u_data (
    .clk     (clk),
    .rd_en   (lo_rd[0]),
    .rd_idx  (idx_q),
    .rd_data (ways_data),
    .wr_en   (wr_en),
    .wr_way  (wr_way),
    .wr_idx  (wr_idx),
    .wr_data (wr_data)
  );

  // --------------------------------------------------------------- output
  logic [BB-1:0] bus_data;
  logic          any_hit;

  way_select #(.WAYS(WAYS), .BLOCK_BITS(BB)) u_sel (
    .hit_vec   (hit_vec),
    .ways_data (ways_data),
    .bus_data  (bus_data),
    .hit       (any_hit)
  );

  op_e resp_op_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     resp_op_q <= OP_READ;
    else if (step2) resp_op_q <= op_q;
  end

  always_comb begin
    resp_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (hit_vec[w]) resp_way = WW'(w);
    end
  end

  assign resp_valid = hit_valid;
  assign resp_op    = resp_op_q;
  assign resp_hit   = any_hit;
  assign resp_rdata = (resp_op_q == OP_READ) ? bus_data : '0;

  // ------------------------------------------------------------ assertions
  // A tag may live in at most one way of a set.
  a_onehot_hit: assert property (@(posedge clk) disable iff (!rst_n)
    step2 |-> $onehot0(hit_comb));
  // A request held while not ready must not change.
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (req_valid && !req_ready) |=> (req_valid && $stable(req_addr) && $stable(req_op)));

endmodule
