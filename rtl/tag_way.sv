// tag_way: storage of one tag way, SETS rows of a split tag. Each row holds
// a LO_W-bit low segment (tag bits 3..0 by default), a HI_W-bit high segment
// (tag bits 30..4) and a valid bit. The row decoder selects row idx; the
// decoded word line reaches the low segment (and the valid bit) only through
// the first control gate (wl_lo_en, "Ctrl. Trans. 1") and the high segment
// only through the second (wl_hi_en, "Ctrl. Trans. 2"). A segment whose gate
// is off is not read: its bit lines stay at 0, which is what the read
// exposure of the cells depends on.
//
// Reads are combinational from idx and the gates; writes of a whole row
// (both segments and the valid bit) happen at the clock edge when we is
// high. Reset clears the valid bits only. The split word line follows the
// paper; the valid bit and the register-array model of the STT-MRAM cells
// are this design's own choices.
module tag_way #(
  parameter int unsigned SETS = 2048,
  parameter int unsigned LO_W = 4,
  parameter int unsigned HI_W = 27,
  localparam int unsigned IW  = $clog2(SETS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // read side
  input  logic [IW-1:0]        idx,
  input  logic                 wl_lo_en,
  input  logic                 wl_hi_en,
  output logic [LO_W-1:0]      bl_lo,
  output logic                 bl_valid,
  output logic [HI_W-1:0]      bl_hi,
  // write side
  input  logic                 we,
  input  logic [IW-1:0]        widx,
  input  logic [HI_W+LO_W-1:0] wtag,
  input  logic                 wvalid
);

  logic [LO_W-1:0] mem_lo [SETS];
  logic [HI_W-1:0] mem_hi [SETS];
  logic [SETS-1:0] valid_q;

  always_ff @(posedge clk) begin
    if (we) begin
      mem_lo[widx] <= wtag[LO_W-1:0];
      mem_hi[widx] <= wtag[HI_W+LO_W-1:LO_W];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  valid_q       <= '0;
    else if (we) valid_q[widx] <= wvalid;
  end

  // Gated word lines: an unselected segment drives nothing.
  assign bl_lo    = wl_lo_en ? mem_lo[idx]  : '0;
  assign bl_valid = wl_lo_en ? valid_q[idx] : 1'b0;
  assign bl_hi    = wl_hi_en ? mem_hi[idx]  : '0;

endmodule
