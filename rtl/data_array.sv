// data_array: the conventional data side of the cache, WAYS x SETS blocks of
// BLOCK_BITS bits. A read reads the addressed set in all ways at once, in
// parallel with the tag lookup, and the way is chosen afterwards by the tag
// hit. Read latency is two cycles: rd_en/rd_idx in cycle t, rd_data valid in
// cycle t+2 (array access register, then output register). One block write
// per cycle through wr_*, taking effect at the clock edge; a read issued in
// the cycle after a write to the same block sees the new data.
//
// The parallel all-way read is the conventional organisation the paper
// keeps unchanged. The two-cycle latency is this design's reading of a
// roughly 1.06 ns data-array access at a 1 GHz clock; it equals the two
// cycles the tag array needs for its two steps.
module data_array #(
  parameter int unsigned WAYS       = 8,
  parameter int unsigned SETS       = 2048,
  parameter int unsigned BLOCK_BITS = 512,
  localparam int unsigned IW        = $clog2(SETS),
  localparam int unsigned WW        = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic                  clk,
  input  logic                  rd_en,
  input  logic [IW-1:0]         rd_idx,
  output logic [BLOCK_BITS-1:0] rd_data [WAYS],
  input  logic                  wr_en,
  input  logic [WW-1:0]         wr_way,
  input  logic [IW-1:0]         wr_idx,
  input  logic [BLOCK_BITS-1:0] wr_data
);

  for (genvar w = 0; w < WAYS; w++) begin : g_way
    logic [BLOCK_BITS-1:0] mem [SETS];
    logic [BLOCK_BITS-1:0] rd_q;

    always_ff @(posedge clk) begin
      if (wr_en && (wr_way == WW'(w))) mem[wr_idx] <= wr_data;
    end

    always_ff @(posedge clk) begin
      if (rd_en) rd_q <= mem[rd_idx];
      rd_data[w] <= rd_q;
    end
  end

endmodule
