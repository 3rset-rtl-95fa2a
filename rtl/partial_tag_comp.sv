// partial_tag_comp: the narrow comparator of the first step. It compares the
// sensed low bits of a stored tag (bits 3..0 by default) with the same bits
// of the incoming tag (address bits 20..17) and reports a partial match.
// Purely combinational; its output enables the second step of its way.
module partial_tag_comp #(
  parameter int unsigned W = 4
) (
  input  logic [W-1:0] stored,
  input  logic [W-1:0] incoming,
  output logic         match
);

  assign match = (stored == incoming);

endmodule
