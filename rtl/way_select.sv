// way_select: the per-way output stage between the data array and the data
// bus. Each way's stage is controlled by that way's tag hit, so the hitting
// way's block reaches the bus; with no hit the bus carries zeros. It is
// written as an AND-OR multiplexer, which is exact for a one-hot (or empty)
// hit vector; the driving of a shared bus is this design's choice of
// realisation. Combinational.
module way_select #(
  parameter int unsigned WAYS       = 8,
  parameter int unsigned BLOCK_BITS = 512
) (
  input  logic [WAYS-1:0]       hit_vec,
  input  logic [BLOCK_BITS-1:0] ways_data [WAYS],
  output logic [BLOCK_BITS-1:0] bus_data,
  output logic                  hit
);

  always_comb begin
    bus_data = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (hit_vec[w]) bus_data |= ways_data[w];
    end
  end

  assign hit = |hit_vec;

endmodule
