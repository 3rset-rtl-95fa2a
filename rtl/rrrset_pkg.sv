// rrrset_pkg: shared constants and types of the selective-tag-comparison
// cache. The default geometry is a 1 MiB, 8-way set-associative cache with
// 64-byte blocks behind a 48-bit physical address: 2048 sets, so an address
// splits into a 6-bit block offset (bits 5..0), an 11-bit set index
// (bits 16..6) and a 31-bit tag (bits 47..17). The tag is split once more
// into a 4-bit low part (tag bits 3..0 = address bits 20..17), compared in
// the first step, and a 27-bit high part (tag bits 30..4), read and compared
// only in ways whose low part matched. These numbers follow the paper; the
// request opcode encoding is this design's own.
package rrrset_pkg;

  // Default geometry (module parameters take these as defaults).
  localparam int unsigned DEF_ADDR_W      = 48;
  localparam int unsigned DEF_WAYS        = 8;
  localparam int unsigned DEF_SETS        = 2048;
  localparam int unsigned DEF_BLOCK_BYTES = 64;
  localparam int unsigned DEF_LO_W        = 4;

  // Request kinds seen by the cache array.
  typedef enum logic [1:0] {
    OP_READ  = 2'd0,  // tag lookup, return the block on a hit
    OP_WRITE = 2'd1,  // tag lookup, overwrite the block on a hit
    OP_FILL  = 2'd2   // controller installs tag and block in a given way
  } op_e;

endpackage
