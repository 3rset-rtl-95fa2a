// rrrset_tag_array: the complete selective-comparison tag array, WAYS
// rrrset_way columns sharing the set index and the incoming tag. A request
// accepted in cycle 0 runs step 1 in cycle 1 and step 2 in cycle 2 in every
// way at once; the one-hot way-hit vector is registered at the end of step 2
// and is valid, with hit_valid, in cycle 3. Per-way strobes lo_rd and hi_rd
// tell which tag segments were read in each cycle; pmatch_vec lists the
// partially matching ways in step 2. The hit register is this design's
// choice; everything else follows the structure of the paper's tag array.
module rrrset_tag_array #(
  parameter int unsigned WAYS  = 8,
  parameter int unsigned SETS  = 2048,
  parameter int unsigned TAG_W = 31,
  parameter int unsigned LO_W  = 4,
  localparam int unsigned IW   = $clog2(SETS),
  localparam int unsigned WW   = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             new_req,
  input  logic [IW-1:0]    idx,
  input  logic [TAG_W-1:0] in_tag,
  // tag fill port
  input  logic             fill_we,
  input  logic [WW-1:0]    fill_way,
  input  logic [IW-1:0]    fill_idx,
  input  logic [TAG_W-1:0] fill_tag,
  // results
  output logic             step2,       // step 2 in progress (comb.)
  output logic [WAYS-1:0]  hit_comb,    // way hits during step 2
  output logic [WAYS-1:0]  hit_vec,     // registered way hits
  output logic             hit_valid,   // hit_vec belongs to a finished lookup
  output logic [WAYS-1:0]  lo_rd,
  output logic [WAYS-1:0]  hi_rd,
  output logic [WAYS-1:0]  pmatch_vec
);

  logic [WAYS-1:0] step1_vec;
  logic            step2_q;

  for (genvar w = 0; w < WAYS; w++) begin : g_way
    rrrset_way #(.SETS(SETS), .LO_W(LO_W), .HI_W(TAG_W - LO_W)) u_way (
      .clk      (clk),
      .rst_n    (rst_n),
      .new_req  (new_req),
      .idx      (idx),
      .in_tag   (in_tag),
      .we       (fill_we && (fill_way == WW'(w))),
      .widx     (fill_idx),
      .wtag     (fill_tag),
      .wvalid   (1'b1),
      .step1    (step1_vec[w]),
      .step2_rd (hi_rd[w]),
      .pmatch   (pmatch_vec[w]),
      .hit      (hit_comb[w])
    );
  end

  assign lo_rd = step1_vec;

  // Step 2 is the cycle after step 1 (all ways step together).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      step2_q   <= 1'b0;
      hit_vec   <= '0;
      hit_valid <= 1'b0;
    end else begin
      step2_q   <= step1_vec[0];
      hit_valid <= step2_q;
      if (step2_q) hit_vec <= hit_comb;
    end
  end

  assign step2 = step2_q;

endmodule
