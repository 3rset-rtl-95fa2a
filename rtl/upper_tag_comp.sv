// upper_tag_comp: the wide comparator of the second step, with enable. It
// compares the high part of a stored tag (bits 30..4 by default) with the
// incoming tag's high part only when its way partially matched in step 1;
// a disabled comparator reports no hit (and, in silicon, switches nothing).
// Purely combinational; its output selects the way's data block.
module upper_tag_comp #(
  parameter int unsigned W = 27
) (
  input  logic         en,
  input  logic [W-1:0] stored,
  input  logic [W-1:0] incoming,
  output logic         hit
);

  assign hit = en && (stored == incoming);

endmodule
