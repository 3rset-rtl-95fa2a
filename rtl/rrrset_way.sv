// rrrset_way: one tag way with selective tag comparison. It joins the way's
// tag storage, its step latch, its 4-bit sense amplifier, its 4-bit
// comparator and its enabled 27-bit comparator (default widths).
//
// Operation, for a request accepted in cycle 0 (new_req high):
//   cycle 1 (step 1): the latch is set, the low-segment word line is on,
//     bits 3..0 and the valid bit are sensed; sensing completes in this
//     cycle and resets the latch, so the low segment is read exactly once.
//   cycle 2 (step 2): the sensed low bits are compared with the incoming
//     tag's low bits. On a partial match (of a valid row) the high-segment
//     word line and the 27-bit comparator are enabled and hit is valid;
//     otherwise the high segment is not read and hit stays 0.
// idx and in_tag must stay stable through cycles 1 and 2. step1, step2_rd
// and pmatch expose the segment reads for read-disturbance accounting.
// The structure follows the paper; one clock cycle per step, the valid bit
// and the registered sense amplifier are this design's choices.
module rrrset_way #(
  parameter int unsigned SETS = 2048,
  parameter int unsigned LO_W = 4,
  parameter int unsigned HI_W = 27,
  localparam int unsigned IW  = $clog2(SETS),
  localparam int unsigned TW  = LO_W + HI_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          new_req,
  input  logic [IW-1:0] idx,
  input  logic [TW-1:0] in_tag,
  // tag write port (fills)
  input  logic          we,
  input  logic [IW-1:0] widx,
  input  logic [TW-1:0] wtag,
  input  logic          wvalid,
  // status
  output logic          step1,     // low segment read (Ctrl. Trans. 1 on)
  output logic          step2_rd,  // high segment read (Ctrl. Trans. 2 on)
  output logic          pmatch,    // partial match, valid in step 2
  output logic          hit        // full match, valid in step 2
);

  logic            latch_q;
  logic            sa_done;
  logic [LO_W-1:0] bl_lo;
  logic            bl_valid;
  logic [HI_W-1:0] bl_hi;
  logic [LO_W-1:0] sa_q;
  logic            sa_valid_bit;
  logic            sa_q_valid;
  logic            lo_match;

  step_latch u_latch (
    .clk        (clk),
    .rst_n      (rst_n),
    .new_req    (new_req),
    .sense_done (sa_done),
    .q          (latch_q)
  );

  tag_way #(.SETS(SETS), .LO_W(LO_W), .HI_W(HI_W)) u_store (
    .clk      (clk),
    .rst_n    (rst_n),
    .idx      (idx),
    .wl_lo_en (latch_q),
    .wl_hi_en (step2_rd),
    .bl_lo    (bl_lo),
    .bl_valid (bl_valid),
    .bl_hi    (bl_hi),
    .we       (we),
    .widx     (widx),
    .wtag     (wtag),
    .wvalid   (wvalid)
  );

  // The 4-bit amplifier also senses the valid bit that sits beside bits 3..0.
  sense_amp #(.W(LO_W + 1)) u_sa_lo (
    .clk      (clk),
    .rst_n    (rst_n),
    .sense_en (latch_q),
    .bl       ({bl_valid, bl_lo}),
    .done     (sa_done),
    .q        ({sa_valid_bit, sa_q}),
    .q_valid  (sa_q_valid)
  );

  partial_tag_comp #(.W(LO_W)) u_cmp_lo (
    .stored   (sa_q),
    .incoming (in_tag[LO_W-1:0]),
    .match    (lo_match)
  );

  assign pmatch   = sa_q_valid & sa_valid_bit & lo_match;
  assign step2_rd = pmatch;
  assign step1    = latch_q;

  upper_tag_comp #(.W(HI_W)) u_cmp_hi (
    .en       (pmatch),
    .stored   (bl_hi),
    .incoming (in_tag[TW-1:LO_W]),
    .hit      (hit)
  );

endmodule
